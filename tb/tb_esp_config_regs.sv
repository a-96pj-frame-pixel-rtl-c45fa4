// tb_esp_config_regs: AXI4-Lite writes and reads of every register, reset
// values, the read-only status word, an unmapped address, and a write whose
// address and data arrive in different cycles.
module tb_esp_config_regs;
  import anti_uav_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1;
  logic arvalid = 0, arready, rvalid, rready = 1;
  logic [7:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata, status = 32'hCAFE_0001;
  logic [3:0] wstrb = 4'hF;
  logic [1:0] bresp, rresp;
  esp_cfg_t cfg;
  int checks = 0, failures = 0;

  esp_config_regs dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d, input int gap = 0);
    @(negedge clk); awvalid = 1; awaddr = a;
    repeat (gap) @(negedge clk);
    wvalid = 1; wdata = d;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk); awvalid = 0; wvalid = 0;
    chk(bvalid && bresp == 2'b00, "write response");
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); arvalid = 1; araddr = a;
    while (!arready) @(negedge clk);
    @(negedge clk); arvalid = 0;
    chk(rvalid && rresp == 2'b00, "read response");
    d = rdata;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    logic [31:0] vals [12];
    repeat (2) @(posedge clk); rst_n = 1;
    rd(8'h14, d); chk(d == 9, "reset valid_size = 9");
    rd(8'h2C, d); chk(d == 4, "reset step = 4");
    rd(8'h30, d); chk(d == 32'hCAFE_0001, "status");
    vals = '{32'd1234, 32'd99999, 32'd2, 32'd3, 32'd5, 32'd11, 32'd7, 32'd8, 32'd9, 32'd300, 32'd6, 32'd2};
    for (int i = 0; i < 12; i++) wr(8'(4 * i), vals[i], i % 3);
    for (int i = 0; i < 12; i++) begin
      rd(8'(4 * i), d); chk(d == vals[i], $sformatf("reg %0d = %0d", i, d));
    end
    chk(cfg.frame_period == 1234 && cfg.ev_nbr == 5 && cfg.th_a == 300 && cfg.ws == 9, "cfg outputs");
    wr(8'h30, 32'h0); rd(8'h30, d); chk(d == 32'hCAFE_0001, "status is read-only");
    rd(8'h3C, d); chk(d == 0, "unmapped reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
