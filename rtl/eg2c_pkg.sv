// eg2c_pkg: constants and types shared by the e-G2C processor RTL.
//
// The sizes that the architecture diagram prints are kept here: 32 MAC lanes, a 6-activation
// row per lane, 4 MACs per lane, 8-bit activations, 4-bit weight GB nibbles per lane, 2-bit
// indices per lane, 16 rows in the temporary activation buffer, 512-bit Act GB words and
// 32-bit instructions. The instruction encoding, the accumulator width and the histogram
// sizes that the paper does not print are this design's own choices.
package eg2c_pkg;

  localparam int unsigned NLANES   = 32;  // MAC lanes
  localparam int unsigned NMAC     = 4;   // MACs per lane
  localparam int unsigned ROWLEN   = 6;   // activations fed to one lane (6*8b)
  localparam int unsigned KTAPS    = 3;   // weights per vector (3x3 kernel row / 3 PW weights)
  localparam int unsigned ACTW     = 8;   // activation width
  localparam int unsigned WNIB     = 4;   // weight GB bits per lane per read
  localparam int unsigned IDXW     = 2;   // index SRAM bits per lane
  localparam int unsigned SELW     = 4;   // accumulated index width
  localparam int unsigned TMPROWS  = 16;  // rows in the temporary act buffer
  localparam int unsigned ACCW     = 24;  // MAC accumulator width (assumed)
  localparam int unsigned OUTW     = 16;  // lane result width
  localparam int unsigned GBW      = 512; // Act GB word
  localparam int unsigned GBBYTES  = GBW / 8;
  localparam int unsigned INSTW    = 32;

  // Adaptation engine (sizes partly assumed)
  localparam int unsigned NBINS    = 16;  // histogram bins Num_0..Num_n
  localparam int unsigned NSENS    = 8;   // sensitive-range bins fed to Argmin (8*8b)
  localparam int unsigned CNTW     = 8;   // histogram counter width
  localparam int unsigned SCOREW   = 16;  // detector output width (8/16b)

  typedef logic [ACTW-1:0]              act_t;
  typedef act_t [ROWLEN-1:0]            act_row_t;
  typedef logic signed [ACTW-1:0]       wgt_t;
  typedef logic signed [OUTW-1:0]       res_t;
  typedef res_t [NMAC-1:0]              lane_res_t;
  typedef logic signed [SCOREW-1:0]     score_t;

  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_HALT  = 4'd1,
    OP_SETW  = 4'd2,   // set weight GB / index SRAM read pointers
    OP_LDACT = 4'd3,   // Act GB -> temporary act buffer rows
    OP_COMP  = 4'd4,   // run sparse vectors through the MAC lanes
    OP_STORE = 4'd5,   // lane results -> output Act GB
    OP_SWAP  = 4'd6,   // exchange input/output roles of Act GB0/GB1
    OP_DET   = 4'd7,   // pool lane results into a detector score
    OP_BRN   = 4'd8,   // branch if last detection was normal (coarse path)
    OP_JMP   = 4'd9,
    OP_SETA  = 4'd10   // write an adaptation-engine register
  } opcode_e;

  typedef enum logic { WF_POT4 = 1'b0, WF_INT8 = 1'b1 } wfmt_e;
  typedef enum logic { CM_RIR = 1'b0, CM_PW = 1'b1 } cmode_e;

  // Control word travelling with a weight GB / index SRAM read into the lanes.
  typedef struct packed {
    logic       valid;     // a weight nibble word is being read
    logic [1:0] tap;       // weight position within the vector (0..2)
    logic       new_vec;   // first word of a vector: index word is read too
    logic       first_vec; // first vector of a COMP: restart accumulated index
    logic       hi;        // INT8: this word holds the high nibbles (MAC fires)
    logic       clr;       // overwrite instead of accumulate
    logic       bank;      // temporary act buffer bank read by the lanes
    wfmt_e      wfmt;
    cmode_e     mode;
  } lane_ctrl_t;

  // Adaptation register select (OP_SETA)
  localparam int unsigned AREG_S0     = NBINS - 1;  // 0..NBINS-2 are Interval_0..Interval_{n-1}
  localparam int unsigned AREG_PERIOD = NBINS;
  localparam int unsigned AREG_THR    = NBINS + 1;

  function automatic logic [INSTW-1:0] enc(opcode_e op, logic [27:0] f);
    return {op, f};
  endfunction

endpackage
