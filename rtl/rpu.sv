// rpu: Region Proposal Unit with hybrid frame / event tracking.
//
// Frame mode (connected-component labelling on slices): each slice from the
// run-length encoder is broadcast to all PEs (cycle 1); in cycle 2 the PE
// controller reads the status registers. No match: the slice becomes a new RP
// in the lowest free PE (if none is free the slice is dropped and counted).
// One or more matches: the union of the matched RPs and the slice is loaded
// into the lowest matched PE, the other matched PEs are freed (merge), and the
// sizes are added. At the end-of-frame token every RP whose size exceeds
// valid_size (nine pixels) is kept as an object, all others are freed. If any
// object remains the unit switches to event mode, otherwise it stays in frame
// mode.
// Event mode: each event is broadcast the same way. A single match gives the
// PE a PE_HIT (count and record, RP update after more than TH events); several
// matches merge the RPs. Unmatched events are ignored. After refresh_period
// cycles in event mode all PEs are freed and the unit goes back to frame mode
// to find new objects, unless hold is set (the FOTU is recording a fast
// object's trajectory).
//
// Interface: slice stream (valid/ready, eof token), event stream (valid/ready),
// configuration inputs, th per PE from the FOTU, per-PE RP/occupied/upd/freed
// outputs and event counters.
// Timing: two cycles per slice or event; the mode switch takes effect in the
// cycle after the end-of-frame token.
//
// Follows the paper (Fig. 3, text): 32 PEs, data scheduler, PE controller
// merging RPs matched by the same input, nine-pixel validity rule, counter
// threshold in event mode, periodic return to frame mode, hold by the FOTU.
// Own choices: the two-cycle broadcast/command protocol, lowest-index winner,
// dropping when all PEs are busy, and a cycle count as the refresh period.
module rpu
  import anti_uav_pkg::*;
#(
  parameter int unsigned N = NUM_PE
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration
  input  coord_t        nbr_dx,
  input  coord_t        nbr_dy,
  input  coord_t        ev_nbr,
  input  logic [SIZE_W-1:0] valid_size,
  input  logic [31:0]   refresh_period,
  input  logic          hold,
  input  logic [TH_W-1:0] th [N],
  // slices from the RLE (frame mode)
  input  logic          s_valid,
  output logic          s_ready,
  input  slice_t        s_slice,
  input  logic          s_eof,
  // events (event mode)
  input  logic          e_valid,
  output logic          e_ready,
  input  coord_t        e_x,
  input  coord_t        e_y,
  // state
  output rpu_mode_e     mode,
  output logic [N-1:0]  occupied,
  output rp_t           rps [N],
  output logic [N-1:0]  upd,
  output logic [N-1:0]  freed,
  output logic [15:0]   n_merge,
  output logic [15:0]   n_drop,
  output logic [15:0]   n_switch_event,
  output logic [15:0]   n_switch_frame
);

  typedef enum logic [1:0] {S_IDLE, S_DECIDE, S_EOF} state_e;
  state_e      state;
  slice_t      cur;
  logic [31:0] timer;

  logic        bc_valid;
  slice_t      bc_slice;
  pe_cmd_e     cmd      [N];
  rp_t         cmd_rp;
  logic [N-1:0] status;
  logic [TH_W-1:0] cnt [N];

  for (genvar i = 0; i < N; i++) begin : g_pe
    rpu_pe #(.ID(5'(i))) u_pe (
      .clk, .rst_n, .mode, .nbr_dx, .nbr_dy, .ev_nbr, .th(th[i]),
      .in_valid(bc_valid), .in_slice(bc_slice),
      .cmd(cmd[i]), .cmd_rp, .cmd_x(cur.c1), .cmd_y(cur.row),
      .occupied(occupied[i]), .status(status[i]), .rp(rps[i]), .upd(upd[i]),
      .cnt(cnt[i])
    );
  end

  // data scheduler: take the input of the current mode when idle
  assign s_ready = (state == S_IDLE) && (mode == MODE_FRAME);
  assign e_ready = (state == S_IDLE) && (mode == MODE_EVENT);
  wire take_s = s_valid && s_ready;
  wire take_e = e_valid && e_ready;

  // PE controller: decisions from the status registers
  logic [N-1:0] match;
  int unsigned  n_match;
  int unsigned  winner, free_pe;
  logic         any_free;
  box_t         ubox;
  logic [SIZE_W-1:0] usize;
  logic [N-1:0] keep;
  logic         refresh;

  always_comb begin
    match    = status & occupied;
    n_match  = 0;
    winner   = 0;
    free_pe  = 0;
    any_free = 1'b0;
    ubox     = '{xmin: cur.c1, xmax: cur.c2, ymin: cur.row, ymax: cur.row};
    usize    = sat_add('0, (SIZE_W+1)'(cur.c2 - cur.c1) + 1'b1);
    if (mode == MODE_EVENT) usize = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (!occupied[i]) begin
        free_pe  = i;
        any_free = 1'b1;
      end
      if (match[i]) begin
        winner = i;
        if (rps[i].box.xmin < ubox.xmin) ubox.xmin = rps[i].box.xmin;
        if (rps[i].box.xmax > ubox.xmax) ubox.xmax = rps[i].box.xmax;
        if (rps[i].box.ymin < ubox.ymin) ubox.ymin = rps[i].box.ymin;
        if (rps[i].box.ymax > ubox.ymax) ubox.ymax = rps[i].box.ymax;
        usize = sat_add(usize, {1'b0, rps[i].size});
      end
    end
    for (int i = 0; i < N; i++) n_match += match[i] ? 1 : 0;
    for (int i = 0; i < N; i++) keep[i] = occupied[i] && (rps[i].size > valid_size);
  end

  assign refresh = (mode == MODE_EVENT) && (state == S_IDLE) && !take_e
                && (timer >= refresh_period) && !hold;

  always_comb begin
    cmd_rp = '{id: '0, box: ubox, size: usize};
    for (int i = 0; i < N; i++) cmd[i] = PE_NOP;
    if (state == S_DECIDE) begin
      if (n_match == 0) begin
        if (mode == MODE_FRAME && any_free) cmd[free_pe] = PE_LOAD;
      end else if (n_match == 1 && mode == MODE_EVENT) begin
        cmd[winner] = PE_HIT;
      end else begin
        for (int i = 0; i < N; i++)
          if (match[i]) cmd[i] = (i == winner) ? PE_LOAD : PE_CLEAR;
      end
    end else if (state == S_EOF) begin
      for (int i = 0; i < N; i++)
        if (occupied[i] && !keep[i]) cmd[i] = PE_CLEAR;
    end else if (refresh) begin
      for (int i = 0; i < N; i++)
        if (occupied[i]) cmd[i] = PE_CLEAR;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) freed[i] = (cmd[i] == PE_CLEAR);
  end

  assign bc_valid = (take_s && !s_eof) || take_e;
  assign bc_slice = take_s ? s_slice : '{row: e_y, c1: e_x, c2: e_x};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      cur            <= '0;
      mode           <= MODE_FRAME;
      timer          <= '0;
      n_merge        <= '0;
      n_drop         <= '0;
      n_switch_event <= '0;
      n_switch_frame <= '0;
    end else begin
      if (mode == MODE_EVENT && timer != '1) timer <= timer + 32'd1;
      unique case (state)
        S_IDLE: begin
          if (take_s) begin
            cur   <= s_slice;
            state <= s_eof ? S_EOF : S_DECIDE;
          end else if (take_e) begin
            cur   <= '{row: e_y, c1: e_x, c2: e_x};
            state <= S_DECIDE;
          end else if (refresh) begin
            mode           <= MODE_FRAME;
            n_switch_frame <= n_switch_frame + 1'b1;
          end
        end
        S_DECIDE: begin
          state <= S_IDLE;
          if (n_match > 1) n_merge <= n_merge + 1'b1;
          if (n_match == 0 && mode == MODE_FRAME && !any_free) n_drop <= n_drop + 1'b1;
        end
        S_EOF: begin
          state <= S_IDLE;
          if (|keep) begin
            mode           <= MODE_EVENT;
            timer          <= '0;
            n_switch_event <= n_switch_event + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
