// pe_array: NUM_PE extended PEs on one broadcast bus.
//
// Every beat of the streamed operand A, a vector of tagged lanes, is
// registered once and broadcast to all PEs in the next cycle; each PE
// matches it against the column of B it holds. The stationary columns are
// written through one load port that addresses one PE at a time
// (ld_pe). Each PE has its own output port towards the global output
// buffer. Configuration (ACF of A and B, the metadata/data boundary) is
// common to all PEs. The paper gives the array of PEs and the broadcast
// bus; the single-register bus stage and the load port are this design's.
module pe_array
  import sta_pkg::*;
#(
  parameter int unsigned NUM_PE = 2048,
  parameter int unsigned LANES  = 16,
  parameter int unsigned VEC    = 8,
  parameter int unsigned BUF    = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  a_fmt_e                        a_fmt,
  input  b_fmt_e                        b_fmt,
  input  logic [$clog2(BUF):0]          meta_cnt,
  input  logic [$clog2(NUM_PE)-1:0]     ld_pe,
  input  logic                          ld_clear,
  input  logic                          ld_we,
  input  logic [$clog2(BUF)-1:0]        ld_addr,
  input  logic                          ld_meta,
  input  logic [DW-1:0]                 ld_data,
  input  logic                          ld_col_we,
  input  logic [DW-1:0]                 ld_col,
  input  logic                          bus_valid,
  input  lane_t [LANES-1:0]             bus_lane,
  input  logic                          flush,
  output logic [NUM_PE-1:0]             out_valid,
  output logic [NUM_PE-1:0][DW-1:0]     out_row,
  output logic [NUM_PE-1:0][DW-1:0]     out_col,
  output logic [NUM_PE-1:0][DW-1:0]     out_val
);
  logic              bv_q, fl_q;
  lane_t [LANES-1:0] bl_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bv_q <= 1'b0;
      fl_q <= 1'b0;
      bl_q <= '0;
    end else begin
      bv_q <= bus_valid;
      fl_q <= flush;
      bl_q <= bus_lane;
    end
  end

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic sel;
    assign sel = (ld_pe == p[$clog2(NUM_PE)-1:0]);
    pe #(.LANES(LANES), .VEC(VEC), .BUF(BUF)) u_pe (
      .clk, .rst_n, .a_fmt, .b_fmt, .meta_cnt,
      .ld_clear(ld_clear && sel), .ld_we(ld_we && sel), .ld_addr, .ld_meta,
      .ld_data, .ld_col_we(ld_col_we && sel), .ld_col,
      .bus_valid(bv_q), .bus_lane(bl_q), .flush(fl_q),
      .out_valid(out_valid[p]), .out_row(out_row[p]), .out_col(out_col[p]),
      .out_val(out_val[p]));
  end
endmodule
