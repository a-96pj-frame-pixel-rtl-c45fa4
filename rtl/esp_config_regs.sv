// esp_config_regs: AXI4-Lite slave with the ESP's configuration and status
// registers.
//
// Register map (32-bit words, byte addresses):
//   0x00 frame_period    0x04 refresh_period  0x08 nbr_dx      0x0C nbr_dy
//   0x10 ev_nbr          0x14 valid_size      0x18 bias        0x1C wa
//   0x20 ws              0x24 th_a            0x28 th_s        0x2C step
//   0x30 status (read only, from the ESP)
// Unused bits read as zero; writes to unmapped or read-only addresses are
// ignored and answered with OKAY. wstrb is ignored (whole-word writes).
//
// Handshake: a write is taken when AWVALID and WVALID are both high and no
// response is pending; BVALID follows one cycle later and stays until BREADY.
// A read is taken when ARVALID is high and no read data is pending; RVALID
// follows one cycle later and stays until RREADY.
//
// The paper names an "AXI Interface & Config. Regs" block only; the register
// map, the reset values and the AXI4-Lite subset are this design's choices.
// Reset values: 60 frames/s and 10 s between re-detections at 153 MHz, the
// nine-pixel object rule, a 4-pixel trajectory step.
module esp_config_regs
  import anti_uav_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        awvalid,
  output logic        awready,
  input  logic [7:0]  awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [31:0] wdata,
  input  logic [3:0]  wstrb,
  output logic        bvalid,
  input  logic        bready,
  output logic [1:0]  bresp,
  input  logic        arvalid,
  output logic        arready,
  input  logic [7:0]  araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  input  logic [31:0] status,
  output esp_cfg_t    cfg
);

  wire wr = awvalid && wvalid && !bvalid;
  wire rd = arvalid && !rvalid;

  assign awready = wr;
  assign wready  = wr;
  assign arready = rd;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;

  function automatic logic [31:0] rd_word(input logic [7:0] a, input esp_cfg_t c,
                                          input logic [31:0] st);
    case (a[7:2])
      6'd0:  return c.frame_period;
      6'd1:  return c.refresh_period;
      6'd2:  return 32'(c.nbr_dx);
      6'd3:  return 32'(c.nbr_dy);
      6'd4:  return 32'(c.ev_nbr);
      6'd5:  return 32'(c.valid_size);
      6'd6:  return 32'(c.bias);
      6'd7:  return 32'(c.wa);
      6'd8:  return 32'(c.ws);
      6'd9:  return 32'(c.th_a);
      6'd10: return 32'(c.th_s);
      6'd11: return 32'(c.step);
      6'd12: return st;
      default: return '0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.frame_period   <= 32'd2_550_000;
      cfg.refresh_period <= 32'd1_530_000_000;
      cfg.nbr_dx         <= 9'd1;
      cfg.nbr_dy         <= 9'd1;
      cfg.ev_nbr         <= 9'd8;
      cfg.valid_size     <= 7'd9;
      cfg.bias           <= 8'd4;
      cfg.wa             <= 8'd4;
      cfg.ws             <= 8'd16;
      cfg.th_a           <= 18'd64;
      cfg.th_s           <= 10'd2;
      cfg.step           <= 9'd4;
      bvalid             <= 1'b0;
      rvalid             <= 1'b0;
      rdata              <= '0;
    end else begin
      if (bvalid && bready) bvalid <= 1'b0;
      if (rvalid && rready) rvalid <= 1'b0;
      if (wr) begin
        bvalid <= 1'b1;
        case (awaddr[7:2])
          6'd0:  cfg.frame_period   <= wdata;
          6'd1:  cfg.refresh_period <= wdata;
          6'd2:  cfg.nbr_dx         <= wdata[CW-1:0];
          6'd3:  cfg.nbr_dy         <= wdata[CW-1:0];
          6'd4:  cfg.ev_nbr         <= wdata[CW-1:0];
          6'd5:  cfg.valid_size     <= wdata[SIZE_W-1:0];
          6'd6:  cfg.bias           <= wdata[7:0];
          6'd7:  cfg.wa             <= wdata[7:0];
          6'd8:  cfg.ws             <= wdata[7:0];
          6'd9:  cfg.th_a           <= wdata[17:0];
          6'd10: cfg.th_s           <= wdata[CW:0];
          6'd11: cfg.step           <= wdata[CW-1:0];
          default: ;
        endcase
      end
      if (rd) begin
        rvalid <= 1'b1;
        rdata  <= rd_word(araddr, cfg, status);
      end
    end
  end

endmodule
