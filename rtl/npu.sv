// npu: Neural Network Processing Unit, classifies tracked objects from a gray
// image patch or a trajectory.
//
// A program of 64-bit instructions sits in the instruction memory (0.5 KB,
// 64 words). On start the top controller fetches instructions from address 0,
// the decoder splits them (npu_decoder) and the controller runs each to
// completion before fetching the next, until an instruction with the last bit
// set has finished (done pulses).
//   FC / MatMul: the data scheduler reads K consecutive 128-bit words of the
//     feature memory (16 int8 features, one per array row) and of the weight
//     memory (16 int8 weights, one per array column) and streams them, one k
//     per cycle, into the 16 x 16 output-stationary PE array. All 16 result
//     rows then pass the non-linear units (shift, ReLU, saturate to int8) in
//     one cycle and enter the 16-row output FIFO. The FIFO drains one row per
//     cycle, optionally through the 2 x 2 max-pooling unit, into the output
//     memory, one 128-bit word per row (pooled rows use the low 64 bits),
//     while the controller already runs the next instruction.
//     FC is the same operation with a feature vector in array row 0.
//   CONV: a KS x KS convolution (KS = K[3:0], 1..15) of a one-channel image
//     strip with 16 kernels, producing 16 neighbouring output pixels of one
//     output row. Image row y of the strip sits in feature words faddr + 2y
//     (pixels 0..15) and faddr + 2y + 1 (pixels 16..31); tap (ky, kx) of the
//     16 kernels is weight word waddr + ky*KS + kx. For each ky the two words
//     are read into a 32-pixel window; then one tap per cycle is applied:
//     array row r (output pixel r) takes window pixel r + kx, column c
//     (kernel c) the tap's weight. Output word oaddr + r holds the 16 kernel
//     results of output pixel r, through the same non-linear and pooling path.
//     A multi-channel layer is one CONV per input channel, all but the last
//     with the chain bit set (see below).
//   chain bit (FC/MatMul/CONV): the accumulator sums are neither written
//     back nor cleared, so the next MAC instruction adds to them (several
//     input channels, or more than 1023 MatMul steps).
//   DATA MOV: copies `len` words from one memory to another (for example the
//     output of one layer into the feature memory for the next).
//   WTA: winner-take-all, the index of the largest of the first ncls int8
//     values of one output-memory row becomes the class (wta_class).
// Memories: weight 8 KB and feature 8 KB (512 x 128 bit), output 2 KB
// (128 x 128 bit), instruction 0.5 KB. The host/DMA port writes any of them
// and reads the output memory while the NPU is idle.
//
// Timing: FC/MatMul take K + 2 cycles of MACs and one cycle to fill the
// output FIFO, CONV KS * (KS + 2) + 2; the FIFO's 16-cycle drain overlaps the
// following instructions. An instruction waits for the FIFO when it is a
// second FC/MatMul/CONV finishing within the drain, a WTA, or a DATA MOV from
// or to the output memory; done waits for the drain.
// DATA MOV len + 1 cycles, WTA 2 cycles, plus 2 cycles of fetch per
// instruction.
//
// Follows the paper (Fig. 5): memory sizes, 16 x 16 zero-skipping PE array,
// 64-bit instructions with the type in bits [2:0], the operation list, ReLU,
// pooling, CONV, the accumulator, the output FIFO and write-back overlapped
// with the next instruction (the pipeline chart: the next instruction's reads
// run under the current write-back). Not built: reading the next
// instruction's operands already during the current MACs, and the
// weight/feature staging buffers (operands go from the memories straight into
// the array). The field layout, the CONV data layout and the memory word width
// are this design's choices.
module npu
  import anti_uav_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // host / DMA port
  input  logic         h_we,
  input  logic [1:0]   h_mem,      // 0 feature, 1 weight, 2 output, 3 instruction
  input  logic [8:0]   h_addr,
  input  logic [127:0] h_wdata,
  input  logic         h_re,
  input  logic [6:0]   h_raddr,
  output logic [127:0] h_rdata,
  // control
  input  logic         start,
  input  logic [5:0]   start_pc,   // program entry address
  output logic         busy,
  output logic         done,
  output logic         err,
  output logic         wta_valid,
  output logic [3:0]   wta_class,
  output logic [31:0]  n_mac,
  output logic [31:0]  n_skip
);

  localparam int unsigned A = 16;

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_MM_RUN, S_MM_DRAIN, S_MM_OUT, S_DM, S_WTA0, S_WTA1, S_NEXT,
    S_CV_LD0, S_CV_LD1, S_CV_TAP
  } state_e;
  state_e state;

  // ---------------- memories ----------------
  logic         f_we, w_we, o_we, i_we;
  logic [8:0]   f_wa, w_wa;
  logic [6:0]   o_wa;
  logic [5:0]   i_wa;
  logic [127:0] f_wd, w_wd, o_wd;
  logic         f_re, w_re, o_re, i_re;
  logic [8:0]   f_ra, w_ra;
  logic [6:0]   o_ra;
  logic [5:0]   i_ra;
  logic [127:0] f_rd, w_rd, o_rd;
  logic [63:0]  i_rd;

  npu_sram #(.WIDTH(128), .DEPTH(512)) u_feat (.clk, .we(f_we), .waddr(f_wa), .wdata(f_wd), .re(f_re), .raddr(f_ra), .rdata(f_rd));
  npu_sram #(.WIDTH(128), .DEPTH(512)) u_wgt  (.clk, .we(w_we), .waddr(w_wa), .wdata(w_wd), .re(w_re), .raddr(w_ra), .rdata(w_rd));
  npu_sram #(.WIDTH(128), .DEPTH(128)) u_out  (.clk, .we(o_we), .waddr(o_wa), .wdata(o_wd), .re(o_re), .raddr(o_ra), .rdata(o_rd));
  npu_sram #(.WIDTH(64),  .DEPTH(64))  u_inst (.clk, .we(i_we), .waddr(i_wa), .wdata(h_wdata[63:0]), .re(i_re), .raddr(i_ra), .rdata(i_rd));

  // ---------------- decode ----------------
  npu_dec_t dec_c, dec;
  npu_decoder u_dec (.instr(i_rd), .dec(dec_c));

  // ---------------- PE array ----------------
  logic              arr_clr, arr_en;
  logic signed [7:0] av [A];
  logic signed [7:0] bv [A];
  logic signed [31:0] psum [A][A];
  logic [$clog2(A*A+1)-1:0] skip_now;

  // CONV input window: two feature words = 32 pixels of one image row;
  // PE row r takes pixel (kxp + r) for kernel column kxp
  logic [255:0] win;
  logic [3:0]   ky, kx, kxp;
  always_comb begin
    for (int i = 0; i < A; i++) begin
      av[i] = (dec.op == OP_CONV) ? win[8*(int'(kxp) + i) +: 8] : f_rd[8*i +: 8];
      bv[i] = w_rd[8*i +: 8];
    end
  end

  npu_pe_array #(.R(A), .C(A)) u_array (
    .clk, .rst_n, .clr(arr_clr), .en(arr_en), .a(av), .b(bv), .psum, .n_skip(skip_now)
  );

  // ---------------- accumulator read-out, non-linear, output FIFO, pooling ----------------
  // All 16 accumulator rows pass the non-linear units at once and are taken
  // into the output FIFO in one cycle, which frees the PE array for the next
  // instruction while the FIFO drains one row per cycle into the output
  // memory (through the pooling unit when pooling is on).
  logic              ob_busy;           // FIFO holds rows not yet written
  logic [3:0]        orow;              // FIFO read pointer
  logic [6:0]        ob_oaddr;
  logic              ob_pool;
  logic signed [7:0] nl    [A][A];
  logic signed [7:0] obuf  [A][A];
  logic signed [7:0] prev  [A];
  logic signed [7:0] pooled [A/2];

  for (genvar r = 0; r < A; r++) begin : g_nl
    npu_nonlinear #(.C(A)) u_nl (.x(psum[r]), .shift(dec.shift), .relu(dec.relu), .y(nl[r]));
  end
  npu_pool #(.C(A)) u_pool (.r0(prev), .r1(obuf[orow]), .y(pooled));

  logic [127:0] nl_word, pool_word;
  always_comb begin
    nl_word   = '0;
    pool_word = '0;
    for (int j = 0; j < A; j++)     nl_word[8*j +: 8]   = obuf[orow][j];
    for (int j = 0; j < A / 2; j++) pool_word[8*j +: 8] = pooled[j];
  end

  // ---------------- WTA ----------------
  logic [3:0] best;
  always_comb begin
    logic signed [7:0] bval;
    best = '0;
    bval = o_rd[7:0];
    for (int j = 1; j < A; j++) begin
      if (5'(j) < dec.ncls && $signed(o_rd[8*j +: 8]) > bval) begin
        bval = o_rd[8*j +: 8];
        best = 4'(j);
      end
    end
  end

  // ---------------- controller ----------------
  logic [5:0]  pc;
  logic [9:0]  k;        // reads issued
  logic        rd_pend;  // a read was issued last cycle (operands valid now)
  logic [8:0]  n;
  logic [8:0]  dm_dst;
  logic        dm_pend;
  logic        keep;     // previous instruction was chained: do not clear the sums

  assign busy = state != S_IDLE || ob_busy;

  // instructions that touch the output memory wait until the FIFO is empty
  logic hazard;
  assign hazard = ob_busy && (dec_c.op == OP_WTA ||
                  (dec_c.op == OP_DATAMOV && (dec_c.src == MEM_OUT || dec_c.dst == MEM_OUT)));

  // memory port multiplexing
  always_comb begin
    f_we = 1'b0; w_we = 1'b0; o_we = 1'b0; i_we = 1'b0;
    f_wa = h_addr; w_wa = h_addr; o_wa = h_addr[6:0]; i_wa = h_addr[5:0];
    f_wd = h_wdata; w_wd = h_wdata; o_wd = h_wdata;
    f_re = 1'b0; w_re = 1'b0; o_re = 1'b0; i_re = 1'b0;
    f_ra = '0; w_ra = '0; o_ra = '0; i_ra = pc;
    if (!busy) begin
      f_we = h_we && h_mem == 2'd0;
      w_we = h_we && h_mem == 2'd1;
      o_we = h_we && h_mem == 2'd2;
      i_we = h_we && h_mem == 2'd3;
      o_re = h_re;
      o_ra = h_raddr;
    end
    unique case (state)
      S_FETCH: i_re = 1'b1;
      S_MM_RUN: begin
        f_re = 1'b1; f_ra = dec.faddr + 9'(k);
        w_re = 1'b1; w_ra = dec.waddr + 9'(k);
      end
      S_DM: begin
        if (n < dec.len) begin
          unique case (dec.src)
            MEM_FEAT: begin f_re = 1'b1; f_ra = dec.saddr + n; end
            MEM_WGT:  begin w_re = 1'b1; w_ra = dec.saddr + n; end
            default:  begin o_re = 1'b1; o_ra = 7'(dec.saddr + n); end
          endcase
        end
        if (dm_pend) begin
          unique case (dec.dst)
            MEM_FEAT: begin f_we = 1'b1; f_wa = dm_dst; f_wd = (dec.src == MEM_FEAT) ? f_rd : (dec.src == MEM_WGT) ? w_rd : o_rd; end
            MEM_WGT:  begin w_we = 1'b1; w_wa = dm_dst; w_wd = (dec.src == MEM_FEAT) ? f_rd : (dec.src == MEM_WGT) ? w_rd : o_rd; end
            default:  begin o_we = 1'b1; o_wa = 7'(dm_dst); o_wd = (dec.src == MEM_FEAT) ? f_rd : (dec.src == MEM_WGT) ? w_rd : o_rd; end
          endcase
        end
      end
      S_WTA0: begin o_re = 1'b1; o_ra = dec.wta_row; end
      S_CV_LD0: begin f_re = 1'b1; f_ra = dec.faddr + {4'd0, ky, 1'b0}; end
      S_CV_LD1: begin f_re = 1'b1; f_ra = dec.faddr + {4'd0, ky, 1'b1}; end
      S_CV_TAP: begin w_re = 1'b1; w_ra = dec.waddr + 9'(ky * dec.k[3:0]) + 9'(kx); end
      default: ;
    endcase
    // output FIFO drain (never at the same time as DATA MOV or WTA on the output memory)
    if (ob_busy && (!ob_pool || orow[0])) begin
      o_we = 1'b1;
      o_wa = ob_pool ? ob_oaddr + 7'(orow[3:1]) : ob_oaddr + 7'(orow);
      o_wd = ob_pool ? pool_word : nl_word;
    end
  end

  assign arr_clr = state == S_DECODE && !hazard && !keep;
  assign arr_en  = rd_pend && (state == S_MM_RUN || state == S_MM_DRAIN || state == S_CV_TAP || state == S_CV_LD0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pc        <= '0;
      dec       <= '0;
      k         <= '0;
      rd_pend   <= 1'b0;
      n         <= '0;
      dm_dst    <= '0;
      dm_pend   <= 1'b0;
      keep      <= 1'b0;
      orow      <= '0;
      win       <= '0;
      ky        <= '0;
      kx        <= '0;
      kxp       <= '0;
      done      <= 1'b0;
      err       <= 1'b0;
      wta_valid <= 1'b0;
      wta_class <= '0;
      n_mac     <= '0;
      n_skip    <= '0;
      ob_busy   <= 1'b0;
      ob_oaddr  <= '0;
      ob_pool   <= 1'b0;
      for (int j = 0; j < A; j++) prev[j] <= '0;
      for (int i = 0; i < A; i++) for (int j = 0; j < A; j++) obuf[i][j] <= '0;
    end else begin
      done <= 1'b0;
      if (arr_en) begin
        n_mac  <= n_mac + 32'(A * A);
        n_skip <= n_skip + 32'(skip_now);
      end
      if (ob_busy) begin
        for (int j = 0; j < A; j++) prev[j] <= obuf[orow][j];
        orow <= orow + 1'b1;
        if (orow == 4'(A - 1)) ob_busy <= 1'b0;
      end
      unique case (state)
        S_IDLE: if (start) begin
          keep      <= 1'b0;
          pc        <= start_pc;
          err       <= 1'b0;
          wta_valid <= 1'b0;
          state     <= S_FETCH;
        end
        S_FETCH: state <= S_DECODE;
        S_DECODE: if (!hazard) begin
          dec     <= dec_c;
          k       <= '0;
          n       <= '0;
          rd_pend <= 1'b0;
          dm_pend <= 1'b0;
          keep    <= 1'b0;
          ky      <= '0;
          kx      <= '0;
          if (!dec_c.legal) begin
            err   <= 1'b1;
            state <= S_NEXT;
          end else begin
            unique case (dec_c.op)
              OP_FC, OP_MATMUL: state <= (dec_c.k == '0) ? S_MM_OUT : S_MM_RUN;
              OP_CONV:          state <= (dec_c.k[3:0] == '0) ? S_MM_OUT : S_CV_LD0;
              OP_DATAMOV:       state <= S_DM;
              default:          state <= S_WTA0;
            endcase
          end
        end
        S_MM_RUN: begin
          k       <= k + 1'b1;
          rd_pend <= 1'b1;
          if (k + 1'b1 == dec.k) state <= S_MM_DRAIN;
        end
        S_MM_DRAIN: begin
          rd_pend <= 1'b0;
          state   <= S_MM_OUT;
        end
        S_MM_OUT: if (dec.chain) begin  // sums stay in the array for the next instruction
          keep  <= 1'b1;
          state <= S_NEXT;
        end else if (!ob_busy) begin   // take the results into the output FIFO
          obuf     <= nl;
          ob_busy  <= 1'b1;
          ob_oaddr <= dec.oaddr;
          ob_pool  <= dec.pool;
          orow     <= '0;
          state    <= S_NEXT;
        end
        S_DM: begin
          dm_pend <= n < dec.len;
          dm_dst  <= dec.daddr + n;
          if (n < dec.len) n <= n + 1'b1;
          else             state <= S_NEXT;
        end
        S_CV_LD0: begin           // read the low half of image row ky
          rd_pend <= 1'b0;
          state   <= S_CV_LD1;
        end
        S_CV_LD1: begin           // read the high half, take the low half
          win[127:0] <= f_rd;
          state      <= S_CV_TAP;
        end
        S_CV_TAP: begin           // one kernel column per cycle
          if (kx == '0 && !rd_pend) win[255:128] <= f_rd;
          rd_pend <= 1'b1;
          kxp     <= kx;
          if (kx + 1'b1 == dec.k[3:0]) begin
            kx <= '0;
            ky <= ky + 1'b1;
            state <= (ky + 1'b1 == dec.k[3:0]) ? S_MM_DRAIN : S_CV_LD0;
          end else begin
            kx <= kx + 1'b1;
          end
        end
        S_WTA0: state <= S_WTA1;
        S_WTA1: begin
          wta_class <= best;
          wta_valid <= 1'b1;
          state     <= S_NEXT;
        end
        S_NEXT: begin
          if (dec.last || pc == 6'd63) begin
            if (!ob_busy) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end else begin
            pc    <= pc + 1'b1;
            state <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign h_rdata = o_rd;

endmodule
