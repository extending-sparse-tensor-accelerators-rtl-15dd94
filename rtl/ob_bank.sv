// ob_bank: one bank of the global output buffer, the bank of one PE.
//
// ROWS words with one read-modify-write port that adds an emitted Oreg to
// word wr_row, a sweep write port that zeroes word clr_row while `clearing`
// (the sweep has priority), and an asynchronous read port; the parent
// registers the read. There is no reset, so the array can map to RAM.
// Splitting the banks into their own module is this design's choice; the
// paper only names the global output buffer.
module ob_bank
  import sta_pkg::*;
#(
  parameter int unsigned ROWS = 256
) (
  input  logic                    clk,
  input  logic                    clearing,
  input  logic [$clog2(ROWS)-1:0] clr_row,
  input  logic                    wr_valid,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [DW-1:0]           wr_val,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  output logic [DW-1:0]           rd_data
);
  logic [DW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (clearing)      mem[clr_row] <= '0;
    else if (wr_valid) mem[wr_row]  <= mem[wr_row] + wr_val;
  end
  assign rd_data = mem[rd_row];
endmodule
