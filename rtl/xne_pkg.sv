// xne_pkg: types and constants shared by the XNOR Neural Engine (XNE).
//
// Holds the TCDM (tightly coupled data memory) port structs used by the
// streamer, the engine command struct, the job descriptor written through the
// APB register file, and the register map. The throughput parameter TP
// (number of XNOR operations per cycle) defaults to 128, the configuration
// integrated in the microcontroller of the paper. Word width of every memory
// port is 32 bits, so there are TP/32 master ports.
//
// Register map and bit encodings are this design's own choices; the paper
// gives the register-file organisation (generic + duplicated job registers)
// but no addresses.
package xne_pkg;

  localparam int unsigned ACC_W      = 16;  // accumulator width (paper: 16 bit, saturated)
  localparam int unsigned NLOOPS     = 6;   // microcode loops (paper: six)
  localparam int unsigned NRW        = 4;   // R/W microcode registers (paper: four)
  localparam int unsigned NRO        = 16;  // R/O microcode registers (paper: sixteen)
  localparam int unsigned NSLOTS     = 32;  // micro-instruction slots (one byte each)
  localparam int unsigned IDX_W      = 16;  // loop index / range width
  localparam int unsigned STAU_W     = 4;   // threshold shift S_tau width

  // ---------------------------------------------------------------- TCDM port
  // One 32-bit word-aligned master port. A request is accepted in the cycle
  // where req && gnt; read data returns one cycle later with r_valid.
  typedef struct packed {
    logic        req;
    logic [31:0] add;    // byte address, word aligned
    logic        wen;    // 1 = read, 0 = write (PULP TCDM convention)
    logic [3:0]  be;
    logic [31:0] data;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        r_valid;
    logic [31:0] r_data;
  } tcdm_rsp_t;

  // ---------------------------------------------------------------- engine
  typedef enum logic [0:0] {
    ENG_ACCUM  = 1'b0,  // load one feature vector, then n_acc weight vectors
    ENG_THRESH = 1'b1   // n_thr threshold vectors, then push one output vector
  } eng_op_e;

  typedef struct packed {
    eng_op_e           op;
    logic [IDX_W-1:0]  n_acc;   // accumulators in use, min(TP, nof)
    logic [IDX_W-1:0]  n_in;    // unmasked input features, min(TP, nif)
  } eng_cmd_t;

  // ---------------------------------------------------------------- ucode
  // Instruction byte: [7] op, [6:5] output R/W reg, [4] input is R/W, [3:0] input reg.
  typedef enum logic [0:0] { UC_ADD = 1'b0, UC_MV = 1'b1 } uc_op_e;

  typedef struct packed {
    uc_op_e      op;
    logic [1:0]  out;
    logic        in_rw;
    logic [3:0]  in;
  } uc_instr_t;

  // Loop descriptor byte: [7:5] number of instructions, [4:0] first slot.
  typedef struct packed {
    logic [2:0]  nb_ops;
    logic [4:0]  base;
  } uc_loop_t;

  // R/W register numbers
  localparam logic [1:0] RW_W = 2'd0, RW_X = 2'd1, RW_Y = 2'd2, RW_XMAJ = 2'd3;
  // R/O register numbers
  // TPSQ: bytes of weights per input tile (n_acc vectors of TP bits)
  // TPX/TPY: bytes of one input/output tile, min(TP,nif)/8 and min(TP,nof)/8
  // ROWSKIP: (w_out-1)*nif/8 + TPX, jump from the end of a filter row to the next row
  // FSNIF: fs*nif/8, jump of the window base from the end of an output row
  localparam logic [3:0] RO_ZERO = 4'd0, RO_TPSQ = 4'd1, RO_TPX = 4'd2, RO_NIF = 4'd3,
                         RO_NOF = 4'd4, RO_ROWSKIP = 4'd5, RO_FSNIF = 4'd6, RO_TPY = 4'd7;
  // R/O registers 8..13 hold the six loop ranges (readable by the program)
  localparam int unsigned RO_RANGE0 = 8;

  // ---------------------------------------------------------------- job
  typedef struct packed {
    logic [31:0]       w_base;    // weights
    logic [31:0]       x_base;    // input activations
    logic [31:0]       y_base;    // output activations
    logic [31:0]       thr_base;  // thresholds, one byte per output feature
    logic [IDX_W-1:0]  nif;       // input features (bits per input pixel)
    logic [IDX_W-1:0]  nof;       // output features
    logic [IDX_W-1:0]  fs;        // filter size
    logic [IDX_W-1:0]  w_out;     // output width
    logic [IDX_W-1:0]  h_out;     // output height
    logic [STAU_W-1:0] s_tau;     // threshold left shift
  } job_t;

  // Register map (byte offsets)
  localparam logic [7:0] REG_TRIGGER  = 8'h00;  // W: commit the job being written
  localparam logic [7:0] REG_STATUS   = 8'h04;  // R: {busy, pending[1:0]}
  localparam logic [7:0] REG_UCODE0   = 8'h10;  // 8 words: 32 instruction bytes
  localparam logic [7:0] REG_LOOPS0   = 8'h30;  // 2 words: 6 loop descriptor bytes
  localparam logic [7:0] REG_W_BASE   = 8'h40;
  localparam logic [7:0] REG_X_BASE   = 8'h44;
  localparam logic [7:0] REG_Y_BASE   = 8'h48;
  localparam logic [7:0] REG_THR_BASE = 8'h4C;
  localparam logic [7:0] REG_NIF      = 8'h50;
  localparam logic [7:0] REG_NOF      = 8'h54;
  localparam logic [7:0] REG_FS       = 8'h58;
  localparam logic [7:0] REG_W_OUT    = 8'h5C;
  localparam logic [7:0] REG_H_OUT    = 8'h60;
  localparam logic [7:0] REG_S_TAU    = 8'h64;

endpackage
