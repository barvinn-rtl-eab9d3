// barvinn_pkg: constants and types shared by the BARVINN accelerator RTL.
//
// The array is eight Matrix Vector Units (MVUs), each a 64-lane bit-serial
// datapath, controlled by an eight-hart barrel RV32I core (one hart per MVU).
// Sizes that the paper states (8 MVUs, 64 lanes, 64x64 weight tiles, 1..16-bit
// operands, 16-bit scalers, 32-bit biases and lane data, 8 KB instruction and
// data memories, 32 banks of 1024 activation words) are the defaults here.
// The depths of the weight, scaler and bias memories and the whole MVU
// control-register map are this design's own choices.
package barvinn_pkg;

  localparam int unsigned N_MVU       = 8;    // MVUs in the array (paper)
  localparam int unsigned LANES       = 64;   // vector lanes / VVPs per MVP (paper)
  localparam int unsigned ACC_W       = 32;   // lane data width after the MVP (paper, Fig. 1)
  localparam int unsigned POP_W       = 8;    // adder-tree output width (paper, Fig. 4)
  localparam int unsigned PREC_W      = 5;    // holds a precision of 1..16 bits
  localparam int unsigned SCALE_W     = 16;   // scaler operand (paper)
  localparam int unsigned BIAS_W      = 32;   // bias operand (paper)
  localparam int unsigned MUL_A_W     = 27;   // multiplier port width, 27x16 (paper)
  localparam int unsigned NLOOPS      = 5;    // nested loops per AGU (paper: "up to five")
  localparam int unsigned CNT_W       = 16;   // loop iteration count width (assumed)

  // Memory sizes, in words.
  localparam int unsigned ACT_AW      = 15;   // 32 banks x 1024 words (Fig. 1 bit fields 0-9, 10-14)
  localparam int unsigned WGT_AW      = 10;   // weight RAM depth 1024 tiles (assumed)
  localparam int unsigned SB_AW       = 8;    // scaler / bias RAM depth 256 (assumed)
  localparam int unsigned IMEM_AW     = 11;   // 8 KB = 2048 x 32-bit words (paper)
  localparam int unsigned DMEM_AW     = 11;   // 8 KB = 2048 x 32-bit words (paper)

  typedef logic [LANES-1:0]               act_word_t;   // one bit from each of 64 elements
  typedef logic [LANES-1:0][LANES-1:0]    wgt_tile_t;   // [row = output channel][lane]
  typedef logic signed [ACC_W-1:0]        lane_t;

  // One write into an activation RAM.
  typedef struct packed {
    logic               valid;
    logic [ACT_AW-1:0]  addr;
    act_word_t          data;
  } act_wr_t;

  // A write the MVU output stage hands to the interconnect.
  typedef struct packed {
    logic               valid;
    logic [N_MVU-1:0]   dest;   // destination MVUs (more than one bit set = broadcast)
    logic [ACT_AW-1:0]  addr;
    act_word_t          data;
  } xbar_req_t;

  // Address-generation loop nest: iteration counts and signed address jumps.
  typedef struct packed {
    logic [NLOOPS-1:0][CNT_W-1:0]        cnt;   // iterations of each loop (0 counts as 1)
    logic [NLOOPS-1:0][ACT_AW:0]         jump;  // signed jump applied when that loop advances
  } agu_cfg_t;

  // A complete MVU job, latched from the control registers on start.
  typedef struct packed {
    logic [PREC_W-1:0]  aprec;      // activation bits, 1..16
    logic [PREC_W-1:0]  wprec;      // weight bits, 1..16
    logic [PREC_W-1:0]  oprec;      // output bits, 1..16
    logic               asigned;    // activations are 2's complement
    logic               wsigned;    // weights are 2's complement
    logic [4:0]         qmsb;       // bit of the 32-bit lane value sent out first
    logic               scale_en;   // use scaler/bias, otherwise pass through
    logic               relu;       // floor the pooling register at 0
    logic [7:0]         pool_len;   // output tiles combined per max-pool window (0 = 1)
    logic [N_MVU-1:0]   dest;       // 0 = own activation RAM, else interconnect destinations
    logic [ACT_AW-1:0]  abase;
    logic [ACT_AW-1:0]  wbase;
    logic [ACT_AW-1:0]  sbase;
    logic [ACT_AW-1:0]  bbase;
    logic [ACT_AW-1:0]  obase;
    logic [ACT_AW-1:0]  ojump;      // output address advance per emitted tile
    logic [NLOOPS-1:0][CNT_W-1:0]  icnt;    // inner loops (blocks of one dot product)
    logic [NLOOPS-1:0][ACT_AW:0]   iajump;
    logic [NLOOPS-1:0][ACT_AW:0]   iwjump;
    logic [NLOOPS-1:0][CNT_W-1:0]  ocnt;    // outer loops (output tiles of the job)
    logic [NLOOPS-1:0][ACT_AW:0]   oajump;
    logic [NLOOPS-1:0][ACT_AW:0]   owjump;
    logic [NLOOPS-1:0][ACT_AW:0]   osjump;
    logic [NLOOPS-1:0][ACT_AW:0]   objump;
  } mvu_job_t;

  // MVU control registers, in the RISC-V custom machine read/write CSR space.
  localparam logic [11:0] CSR_MVU_BASE    = 12'h7C0;
  localparam logic [5:0]  R_APREC   = 6'd0;
  localparam logic [5:0]  R_WPREC   = 6'd1;
  localparam logic [5:0]  R_OPREC   = 6'd2;
  localparam logic [5:0]  R_QUANT   = 6'd3;   // [4:0] msb, [8] asigned, [9] wsigned
  localparam logic [5:0]  R_MODE    = 6'd4;   // [0] scale_en, [1] relu, [15:8] pool_len
  localparam logic [5:0]  R_DEST    = 6'd5;
  localparam logic [5:0]  R_ABASE   = 6'd6;
  localparam logic [5:0]  R_WBASE   = 6'd7;
  localparam logic [5:0]  R_SBASE   = 6'd8;
  localparam logic [5:0]  R_BBASE   = 6'd9;
  localparam logic [5:0]  R_OBASE   = 6'd10;
  localparam logic [5:0]  R_OJUMP   = 6'd11;
  localparam logic [5:0]  R_COMMAND = 6'd12;  // write: [0] start, [1] clear irq
  localparam logic [5:0]  R_STATUS  = 6'd13;  // read:  [0] busy, [1] irq
  localparam logic [5:0]  R_ICNT    = 6'd14;  // 14..18
  localparam logic [5:0]  R_IAJUMP  = 6'd19;  // 19..23
  localparam logic [5:0]  R_IWJUMP  = 6'd24;  // 24..28
  localparam logic [5:0]  R_OCNT    = 6'd29;  // 29..33
  localparam logic [5:0]  R_OAJUMP  = 6'd34;  // 34..38
  localparam logic [5:0]  R_OWJUMP  = 6'd39;  // 39..43
  localparam logic [5:0]  R_OSJUMP  = 6'd44;  // 44..48
  localparam logic [5:0]  R_OBJUMP  = 6'd49;  // 49..53
  localparam int unsigned N_MVU_CSR = 54;

  // One control-register access from the controller to an MVU.
  typedef struct packed {
    logic        we;
    logic [5:0]  addr;
    logic [31:0] wdata;
  } csr_wr_t;

endpackage
