// sta_pkg: types and constants shared by the flexible-format sparse tensor
// accelerator and its MINT format converter.
//
// The broadcast bus between the global buffer and the PEs is a vector of
// lanes; every lane carries one 32-bit element plus a small tag that says
// whether the element is operand data or metadata (a column or a row index).
// Tagging each bus element this way is the second accelerator extension of
// the design; the tag encoding itself is this design's choice.
//
// The global scratchpad is split into eight field banks (value, index and
// pointer spaces for an input and an output format). The bank assignment of
// each conversion is fixed and listed below. Bank count, depth and the
// vector width of a bank port are this design's choices.
package sta_pkg;

  localparam int unsigned DW = 32;  // datatype and metadata width (int32)

  // ---------------- broadcast bus ----------------
  typedef enum logic [1:0] {
    TAG_NONE = 2'd0,   // lane unused
    TAG_DATA = 2'd1,   // operand value of matrix A
    TAG_COL  = 2'd2,   // col_id of the data lane right before it
    TAG_ROW  = 2'd3    // row_id shared by all data lanes of the beat
  } lane_tag_e;

  typedef struct packed {
    lane_tag_e       tag;
    logic [DW-1:0]   val;
  } lane_t;

  // Algorithm compression format (ACF) of the streamed operand A
  typedef enum logic [1:0] {
    A_DENSE = 2'd0,
    A_CSR   = 2'd1,
    A_COO   = 2'd2
  } a_fmt_e;

  // ACF of the stationary operand B held in the PE buffers
  typedef enum logic [0:0] {
    B_DENSE = 1'b0,
    B_CSC   = 1'b1
  } b_fmt_e;

  // MINT conversion selected for a run
  typedef enum logic [2:0] {
    CONV_NONE      = 3'd0,
    CONV_RLC_COO   = 3'd1,
    CONV_CSR_CSC   = 3'd2,
    CONV_CSR_BSR   = 3'd3,
    CONV_DENSE_CSF = 3'd4
  } conv_e;

  // ---------------- scratchpad ----------------
  localparam int unsigned SPL     = 8;    // words per bank port access
  localparam int unsigned SP_AW   = 16;   // bank address width
  localparam int unsigned NBANK   = 8;

  // bank assignment
  localparam int unsigned BK_VAL   = 0;  // input values      | CSF: COO x
  localparam int unsigned BK_IDX   = 1;  // input col_id      | CSF: COO y
  localparam int unsigned BK_PTR   = 2;  // input row_ptr     | CSF: y_idx
  localparam int unsigned BK_OVAL  = 3;  // output values
  localparam int unsigned BK_OIDX0 = 4;  // COO/CSC row_id    | CSF: x_idx
  localparam int unsigned BK_OIDX1 = 5;  // COO col_id, BSR col_id | CSF: z_idx
  localparam int unsigned BK_OPTR0 = 6;  // CSC col_ptr, BSR row_ptr | CSF: x_ptr
  localparam int unsigned BK_OPTR1 = 7;  // CSF: y_ptr

  typedef logic [SPL-1:0][DW-1:0] sp_vec_t;

  // one request on one bank: a read of SPL consecutive words (data back one
  // cycle later) and a masked write of SPL consecutive words
  typedef struct packed {
    logic             re;
    logic [SP_AW-1:0] raddr;
    logic             we;
    logic [SP_AW-1:0] waddr;
    logic [SPL-1:0]   wmask;
    sp_vec_t          wdata;
  } sp_req_t;

  localparam sp_req_t SP_REQ_IDLE = '0;

  // ---------------- shared MINT building blocks ----------------
  localparam int unsigned PS_N   = 32;          // prefix-sum inputs
  localparam int unsigned PS_LAT = $clog2(PS_N) + 1;
  localparam int unsigned DM_N   = 8;           // parallel div/mod units
  localparam int unsigned DM_LAT = DW;          // one quotient bit per stage

  localparam int unsigned IN_W   = 16;          // words per stream beat (512 bit)

  typedef logic [PS_N-1:0][DW-1:0] ps_vec_t;
  typedef logic [IN_W-1:0][DW-1:0] in_vec_t;
  typedef logic [DM_N-1:0][DW-1:0] dm_vec_t;

  // request into the shared prefix-sum unit
  typedef struct packed {
    logic     valid;
    logic     clear;   // this beat starts a new scan (offset restarts at 0)
    ps_vec_t  data;
  } ps_req_t;

  // request into the shared div/mod units
  typedef struct packed {
    logic     valid;
    dm_vec_t  dividend;
    dm_vec_t  divisor;
  } dm_req_t;

endpackage
