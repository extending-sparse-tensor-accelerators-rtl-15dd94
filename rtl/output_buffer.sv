// output_buffer: global output buffer that collects the PEs' Oreg values.
//
// One bank per PE, ROWS words deep. When PE p sends (Rreg, Creg, Oreg) the
// value is added to word Rreg of bank p, so partial sums of the same output
// (a row split over several passes, or a K dimension folded over several
// loads of B) accumulate. Bank p therefore holds column Creg of PE p; the
// address is formed from Rreg and Creg by requiring Creg mod NUM_PE == p,
// which an assertion checks. A read port returns one word a cycle after
// the request. `clear` (and reset) starts a sweep that zeroes one row of
// every bank per cycle, ROWS cycles in all, with `busy` high meanwhile; no
// PE may write while busy. Banks have no reset so they map to RAM.
// The paper only names the global output buffer and says Rreg and Creg give
// the address; banking, accumulation and ROWS are this design's choices.
module output_buffer
  import sta_pkg::*;
#(
  parameter int unsigned NUM_PE = 2048,
  parameter int unsigned ROWS   = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic [NUM_PE-1:0]             wr_valid,
  input  logic [NUM_PE-1:0][DW-1:0]     wr_row,
  input  logic [NUM_PE-1:0][DW-1:0]     wr_col,
  input  logic [NUM_PE-1:0][DW-1:0]     wr_val,
  input  logic                          rd_en,
  input  logic [$clog2(NUM_PE)-1:0]     rd_bank,
  input  logic [$clog2(ROWS)-1:0]       rd_row,
  output logic [DW-1:0]                 rd_data,
  output logic                          busy
);
  localparam int unsigned RW = $clog2(ROWS);

  // Clearing sweeps one row of every bank per cycle; it starts by itself
  // after reset so the buffer never holds unknown words.
  logic          clearing;
  logic [RW-1:0] clr_row;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_row  <= '0;
    end else if (clear) begin
      clearing <= 1'b1;
      clr_row  <= '0;
    end else if (clearing) begin
      clr_row  <= clr_row + 1'b1;
      if (clr_row == RW'(ROWS - 1)) clearing <= 1'b0;
    end
  end
  assign busy = clearing;

  logic [NUM_PE-1:0][DW-1:0] bank_rd;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_bank
    ob_bank #(.ROWS(ROWS)) u_bank (
      .clk, .clearing, .clr_row, .wr_valid(wr_valid[p]),
      .wr_row(wr_row[p][RW-1:0]), .wr_val(wr_val[p]), .rd_row,
      .rd_data(bank_rd[p]));

    a_addr: assert property (@(posedge clk) disable iff (!rst_n)
      wr_valid[p] |-> !clearing && (wr_row[p] < ROWS) &&
                      ((wr_col[p] % NUM_PE) == p));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_data <= '0;
    else if (rd_en) rd_data <= bank_rd[rd_bank];
  end
endmodule
