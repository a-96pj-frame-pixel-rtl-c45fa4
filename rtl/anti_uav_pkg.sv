// anti_uav_pkg: types and constants shared by the event signal processor (ESP),
// the image signal processor (ISP) and the neural network processing unit (NPU).
// Coordinates are 9-bit because the event sensor is 346 x 260 pixels. A region
// proposal (RP) is 48 bits as in the PE's RP buffer: a 5-bit id, a 36-bit box and
// a 7-bit size; the split of the 48 bits into fields is this design's choice.
package anti_uav_pkg;

  localparam int unsigned CW      = 9;    // coordinate width
  localparam int unsigned IMG_W   = 346;  // event sensor columns
  localparam int unsigned IMG_H   = 260;  // event sensor rows
  localparam int unsigned NUM_PE  = 32;   // RPU processing elements / FOTU monitors
  localparam int unsigned SIZE_W  = 7;    // RP size field (pixels / events, saturating)
  localparam int unsigned TH_W    = 8;    // event-mode RP update threshold width

  typedef logic [CW-1:0] coord_t;

  typedef struct packed {
    coord_t xmin;
    coord_t xmax;
    coord_t ymin;
    coord_t ymax;
  } box_t;

  typedef struct packed {
    logic [4:0]        id;
    box_t              box;
    logic [SIZE_W-1:0] size;
  } rp_t;

  // AER event from the event camera
  typedef struct packed {
    coord_t x;
    coord_t y;
    logic   pol;
  } aer_event_t;

  // One input of the RPU: a slice (frame mode) or a single event (event mode,
  // c1 == c2 == x).
  typedef struct packed {
    coord_t row;
    coord_t c1;
    coord_t c2;
  } slice_t;

  typedef enum logic [1:0] {PE_NOP, PE_LOAD, PE_CLEAR, PE_HIT} pe_cmd_e;

  typedef enum logic {MODE_FRAME = 1'b0, MODE_EVENT = 1'b1} rpu_mode_e;

  // Trajectory point stored in the FOTU trajectory memory (32-bit word)
  typedef struct packed {
    coord_t      x;
    coord_t      y;
    logic [13:0] stamp;
  } traj_point_t;

  // NPU instruction types, bits [2:0] of the 64-bit instruction
  typedef enum logic [2:0] {
    OP_CONV    = 3'd0,
    OP_FC      = 3'd1,
    OP_MATMUL  = 3'd2,
    OP_DATAMOV = 3'd3,
    OP_WTA     = 3'd4
  } npu_op_e;

  // ESP configuration, held in the AXI-Lite register file
  typedef struct packed {
    logic [31:0]       frame_period;    // event-frame interval, cycles
    logic [31:0]       refresh_period;  // event-mode time before re-detection, cycles
    coord_t            nbr_dx;          // frame-mode neighbourhood, x
    coord_t            nbr_dy;          // frame-mode neighbourhood, y
    coord_t            ev_nbr;          // event-mode neighbourhood dL
    logic [SIZE_W-1:0] valid_size;      // object if RP size exceeds this
    logic [7:0]        bias;            // TH* = bias + wa*area + ws*speed
    logic [7:0]        wa;              // Q4.4
    logic [7:0]        ws;              // Q4.4
    logic [17:0]       th_a;            // dArea threshold for fast objects
    logic [CW:0]       th_s;            // speed threshold for fast objects
    coord_t            step;            // trajectory step (record if > step)
  } esp_cfg_t;

  // Decoded NPU instruction. Field positions (bits [63:3]) are this design's
  // choice; the paper fixes only the type in bits [2:0].
  //   CONV/FC/MATMUL: [11:3] feature addr, [20:12] weight addr, [30:21] K
  //                   (CONV: kernel size KS in K[3:0]),
  //                   [45] chain: keep the sums in the array for the next
  //                   instruction and write nothing back,
  //                   [37:31] output addr, [42:38] shift, [43] ReLU, [44] pool
  //   DATA MOV:       [4:3] src mem, [6:5] dst mem, [15:7] src addr,
  //                   [24:16] dst addr, [33:25] words
  //   WTA:            [9:3] output-mem row, [14:10] number of classes
  //   all:            [63] last instruction of the program
  typedef struct packed {
    npu_op_e     op;
    logic        legal;
    logic        last;
    logic [8:0]  faddr;
    logic [8:0]  waddr;
    logic [9:0]  k;
    logic [6:0]  oaddr;
    logic [4:0]  shift;
    logic        relu;
    logic        pool;
    logic        chain;
    logic [1:0]  src;
    logic [1:0]  dst;
    logic [8:0]  saddr;
    logic [8:0]  daddr;
    logic [8:0]  len;
    logic [6:0]  wta_row;
    logic [4:0]  ncls;
  } npu_dec_t;

  localparam logic [1:0] MEM_FEAT = 2'd0;
  localparam logic [1:0] MEM_WGT  = 2'd1;
  localparam logic [1:0] MEM_OUT  = 2'd2;

  function automatic logic [SIZE_W-1:0] sat_add(input logic [SIZE_W-1:0] a,
                                                input logic [SIZE_W:0] b);
    logic [SIZE_W+1:0] s;
    s = {2'b0, a} + {1'b0, b};
    return (s > {2'b0, {SIZE_W{1'b1}}}) ? {SIZE_W{1'b1}} : s[SIZE_W-1:0];
  endfunction

endpackage
