// fotu: Fast Object Tracking Unit.
//
// One rp_monitor per RPU PE recalibrates that PE's event-mode threshold and
// produces trajectory points of fast objects. A round-robin arbiter grants one
// point per cycle and writes it to the trajectory memory, 2 KB organised as
// NB banks of DEPTH 32-bit words, one bank per fast object. A PE whose object
// becomes fast is given the lowest free bank on its first point; points go to
// consecutive words of that bank. Points are dropped (and counted) when no bank
// is free or the object's bank is full. traj_clear releases all banks (after
// the trajectories have been handed to the NPU). hold is set while any object
// is fast, which keeps the RPU in event mode.
//
// Interface: per-PE upd/rp/freed in, per-PE th out; hold; bank status
// (bank_used, bank_pe, bank_len); a read port (rd_en/rd_addr, rd_data one cycle
// later, address = bank * DEPTH + word).
//
// Follows the paper (Fig. 4): 32 monitors, arbiter, 2 KB trajectory memory in
// 8 banks for objects #0..#7, hold of the RPU in event mode. Own choices: word
// format (x, y, 14-bit stamp), bank allocation and the drop policy.
module fotu
  import anti_uav_pkg::*;
#(
  parameter int unsigned N     = NUM_PE,
  parameter int unsigned NB    = 8,
  parameter int unsigned DEPTH = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [7:0]      bias,
  input  logic [7:0]      wa,
  input  logic [7:0]      ws,
  input  logic [17:0]     th_a,
  input  logic [CW:0]     th_s,
  input  coord_t          step,
  input  logic [13:0]     stamp,
  input  logic [N-1:0]    upd,
  input  rp_t             rps [N],
  input  logic [N-1:0]    freed,
  output logic [TH_W-1:0] th [N],
  output logic            hold,
  output logic [N-1:0]    fast,
  input  logic            traj_clear,
  output logic [NB-1:0]   bank_used,
  output logic [4:0]      bank_pe  [NB],
  output logic [$clog2(DEPTH):0] bank_len [NB],
  input  logic            rd_en,
  input  logic [$clog2(NB*DEPTH)-1:0] rd_addr,
  output logic [31:0]     rd_data,
  output logic [15:0]     n_points,
  output logic [15:0]     n_lost
);

  localparam int unsigned AW = $clog2(NB * DEPTH);
  localparam int unsigned DW = $clog2(DEPTH);

  logic [N-1:0] req, ack;
  traj_point_t  point [N];

  for (genvar i = 0; i < N; i++) begin : g_mon
    rp_monitor u_mon (
      .clk, .rst_n, .bias, .wa, .ws, .th_a, .th_s, .step, .stamp,
      .upd(upd[i]), .rp(rps[i]), .freed(freed[i]), .th(th[i]), .fast(fast[i]),
      .req(req[i]), .point(point[i]), .ack(ack[i])
    );
  end

  assign hold = |fast;

  // round-robin arbiter
  logic [$clog2(N)-1:0] last, gnt;
  logic                 gnt_v;
  always_comb begin
    gnt_v = 1'b0;
    gnt   = '0;
    for (int k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % N;
      if (!gnt_v && req[idx]) begin
        gnt_v = 1'b1;
        gnt   = idx[$clog2(N)-1:0];
      end
    end
    ack = '0;
    if (gnt_v) ack[gnt] = 1'b1;
  end

  // bank lookup / allocation
  logic                  own_hit, free_hit;
  logic [$clog2(NB)-1:0] own_b, free_b, tgt_b;
  always_comb begin
    own_hit  = 1'b0;
    free_hit = 1'b0;
    own_b    = '0;
    free_b   = '0;
    for (int b = NB - 1; b >= 0; b--) begin
      if (bank_used[b] && bank_pe[b] == 5'(gnt)) begin
        own_hit = 1'b1;
        own_b   = b[$clog2(NB)-1:0];
      end
      if (!bank_used[b]) begin
        free_hit = 1'b1;
        free_b   = b[$clog2(NB)-1:0];
      end
    end
    tgt_b = own_hit ? own_b : free_b;
  end

  logic          we;
  logic [AW-1:0] waddr;
  assign we    = gnt_v && (own_hit || free_hit) && (bank_len[tgt_b] < (DW+1)'(DEPTH));
  assign waddr = {tgt_b, bank_len[tgt_b][DW-1:0]};

  npu_sram #(.WIDTH(32), .DEPTH(NB * DEPTH)) u_traj_mem (
    .clk, .we, .waddr, .wdata(point[gnt]), .re(rd_en), .raddr(rd_addr), .rdata(rd_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last      <= '0;
      bank_used <= '0;
      n_points  <= '0;
      n_lost    <= '0;
      for (int b = 0; b < NB; b++) begin
        bank_pe[b]  <= '0;
        bank_len[b] <= '0;
      end
    end else begin
      if (gnt_v) begin
        last <= gnt;
        if (we) begin
          n_points        <= n_points + 1'b1;
          bank_len[tgt_b] <= bank_len[tgt_b] + 1'b1;
          if (!own_hit) begin
            bank_used[tgt_b] <= 1'b1;
            bank_pe[tgt_b]   <= 5'(gnt);
          end
        end else begin
          n_lost <= n_lost + 1'b1;
        end
      end
      if (traj_clear) begin
        bank_used <= '0;
        for (int b = 0; b < NB; b++) bank_len[b] <= '0;
      end
    end
  end

endmodule
