// tb_cluster_counter: sorted chunks (the paper's example chunk and random
// ones with few distinct values and short valid prefixes); the reported
// (value, count) pairs at the run ends are compared with counts taken by
// the testbench. Latency is one cycle.
module tb_cluster_counter;
  localparam int N = 8, W = 32, CW = $clog2(N) + 1, NCH = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [N-1:0] in_keep, uniq_valid;
  logic [N-1:0][W-1:0] in_key, uniq_key;
  logic [N-1:0][CW-1:0] uniq_cnt;
  int checks = 0, failures = 0;

  cluster_counter #(.N(N), .W(W)) dut (.*);

  task automatic run_chunk(input logic [W-1:0] k [N], input int n);
    int cnt [int];
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < N; i++) begin
      in_keep[i] = (i < n);
      in_key[i]  = k[i];
      if (i < n) begin
        if (cnt.exists(int'(k[i]))) cnt[int'(k[i])]++; else cnt[int'(k[i])] = 1;
      end
    end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid) failures++;
    for (int i = 0; i < N; i++) begin
      logic want;
      want = (i < n) && ((i == n-1) || (k[i] != k[(i+1)%N]));
      checks++;
      if (uniq_valid[i] !== want) begin failures++; $display("lane %0d valid %0b", i, uniq_valid[i]); end
      if (want) begin
        checks++;
        if (uniq_key[i] !== k[i] || int'(uniq_cnt[i]) != cnt[int'(k[i])]) begin
          failures++;
          $display("lane %0d key %0d cnt %0d want %0d", i, uniq_key[i], uniq_cnt[i], cnt[int'(k[i])]);
        end
      end
    end
  endtask

  initial begin
    logic [W-1:0] k [N];
    in_valid = 0; in_keep = '0; in_key = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // first eight sorted col_ids of the paper's example: 0 1 1 2 2 3 3 6
    k = '{0, 1, 1, 2, 2, 3, 3, 6};
    run_chunk(k, 8);
    for (int c = 0; c < NCH; c++) begin
      int n;
      n = $urandom_range(N);
      for (int i = 0; i < N; i++) k[i] = $urandom_range(5);
      k.sort();
      run_chunk(k, n);
    end
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
