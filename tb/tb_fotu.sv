// tb_fotu: FOTU with 4 monitors, 2 banks of 4 words. Three PEs move fast at
// the same time, so the arbiter must serialise their points; two get a bank,
// the third loses its points, and each bank overflows after 4 points. The
// trajectory memory is read back and compared with the expected centres;
// hold, the per-PE TH outputs and traj_clear are checked as well.
module tb_fotu;
  import anti_uav_pkg::*;
  localparam int N = 4, NB = 2, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] bias = 4, wa = 16, ws = 32;
  logic [17:0] th_a = 1000;
  logic [CW:0] th_s = 3;
  coord_t step = 4;
  logic [13:0] stamp = 14'd5;
  logic [N-1:0] upd = '0, freed = '0, fast;
  rp_t rps [N];
  logic [TH_W-1:0] th [N];
  logic hold, traj_clear = 0, rd_en = 0;
  logic [NB-1:0] bank_used;
  logic [4:0] bank_pe [NB];
  logic [$clog2(DEPTH):0] bank_len [NB];
  logic [$clog2(NB*DEPTH)-1:0] rd_addr = '0;
  logic [31:0] rd_data;
  logic [15:0] n_points, n_lost;
  int checks = 0, failures = 0;

  fotu #(.N(N), .NB(NB), .DEPTH(DEPTH)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    traj_point_t p;
    for (int i = 0; i < N; i++) rps[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    chk(!hold, "no hold at start");
    // six updates, centre x = 10 + 8k, PEs 0..2 at y centre 20 + 10*i
    for (int k = 0; k < 6; k++) begin
      @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        rps[i] = '{id: 5'(i), box: '{xmin: 9'(9 + 8*k), xmax: 9'(11 + 8*k),
                   ymin: 9'(19 + 10*i), ymax: 9'(21 + 10*i)}, size: 7'd9};
        upd[i] = 1'b1;
      end
      @(negedge clk); upd = '0;
      repeat (6) @(negedge clk);
    end
    chk(hold && fast == 4'b0111, "three fast objects, hold");
    chk(th[0] == 4 + 9 + 16 && th[3] == 4, $sformatf("TH per PE %0d %0d", th[0], th[3]));
    chk(bank_used == 2'b11, "both banks used");
    chk(bank_len[0] == 4 && bank_len[1] == 4, "banks full");
    chk(n_points == 8 && n_lost == 7, $sformatf("points %0d lost %0d", n_points, n_lost));
    chk(bank_pe[0] != bank_pe[1] && bank_pe[0] < 3 && bank_pe[1] < 3, "distinct owners");
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < DEPTH; w++) begin
        @(negedge clk); rd_en = 1; rd_addr = 3'(b * DEPTH + w);
        @(negedge clk); rd_en = 0;
        p = rd_data;
        chk(p.x == 9'(10 + 8 * (w + 1)) && p.y == 9'(20 + 10 * bank_pe[b]) && p.stamp == 5,
            $sformatf("bank %0d word %0d: (%0d,%0d)", b, w, p.x, p.y));
      end
    @(negedge clk); traj_clear = 1; @(negedge clk); traj_clear = 0;
    chk(bank_used == '0 && bank_len[0] == 0, "traj_clear frees banks");
    @(negedge clk); freed = '1; @(negedge clk); freed = '0;
    chk(!hold, "freed PEs drop hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
