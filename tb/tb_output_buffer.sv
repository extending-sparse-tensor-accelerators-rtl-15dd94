// tb_output_buffer: random simultaneous writes from four PEs (bank p gets
// columns p, p+4, ...) accumulate into a testbench model; reads through
// the read port (one cycle latency) and a clear are checked.
module tb_output_buffer;
  import sta_pkg::*;
  localparam int NUM_PE = 4, ROWS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, rd_en;
  logic [NUM_PE-1:0] wr_valid;
  logic [NUM_PE-1:0][DW-1:0] wr_row, wr_col, wr_val;
  logic [$clog2(NUM_PE)-1:0] rd_bank;
  logic [$clog2(ROWS)-1:0] rd_row;
  logic busy;
  logic [DW-1:0] rd_data;
  int model [NUM_PE][ROWS];

  output_buffer #(.NUM_PE(NUM_PE), .ROWS(ROWS)) dut (.*);

  task automatic check_all();
    for (int p = 0; p < NUM_PE; p++) for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); rd_en = 1; rd_bank = p; rd_row = r;
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data != model[p][r]) begin failures++; $display("bank %0d row %0d: %0d want %0d", p, r, rd_data, model[p][r]); end
    end
  endtask

  initial begin
    clear = 0; rd_en = 0; wr_valid = 0; wr_row = '0; wr_col = '0; wr_val = '0; rd_bank = 0; rd_row = 0;
    foreach (model[p, r]) model[p][r] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); while (busy) @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int p = 0; p < NUM_PE; p++) begin
        wr_valid[p] = $urandom_range(1);
        wr_row[p] = $urandom_range(ROWS-1);
        wr_col[p] = p + NUM_PE * $urandom_range(3);
        wr_val[p] = $urandom_range(1000);
        if (wr_valid[p]) model[p][wr_row[p]] += wr_val[p];
      end
    end
    @(negedge clk); wr_valid = 0;
    check_all();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (busy) @(negedge clk);
    foreach (model[p, r]) model[p][r] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
