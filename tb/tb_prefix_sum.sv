// tb_prefix_sum: random beats through the 32-input scan, some starting a
// new scan; every output beat is compared with a running sum kept by the
// testbench, and each result must appear exactly LAT = log2(N)+1 cycles
// after its beat.
module tb_prefix_sum;
  localparam int N = 32, W = 32, LAT = $clog2(N) + 1, NBEAT = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_clear, out_valid;
  logic [N-1:0][W-1:0] in_data, out_data;
  int checks = 0, failures = 0, cyc = 0;

  prefix_sum #(.N(N), .W(W)) dut (.*);

  logic [N-1:0][W-1:0] exp_q [$];
  int exp_t [$];
  logic [W-1:0] run;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    logic [N-1:0][W-1:0] e;
    int t;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front(); t = exp_t.pop_front();
      if (e !== out_data) begin failures++; $display("mismatch at cycle %0d", cyc); end
      checks++;
      if (cyc - t != LAT) begin failures++; $display("latency %0d", cyc - t); end
    end
  end

  initial begin
    in_valid = 0; in_clear = 0; in_data = '0; run = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NBEAT; b++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_clear = (b == 0) || ($urandom_range(9) == 0);
      for (int i = 0; i < N; i++) in_data[i] = $urandom_range(1000);
      if (in_valid) begin
        logic [N-1:0][W-1:0] e;
        if (in_clear) run = '0;
        for (int i = 0; i < N; i++) begin run += in_data[i]; e[i] = run; end
        exp_q.push_back(e); exp_t.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
