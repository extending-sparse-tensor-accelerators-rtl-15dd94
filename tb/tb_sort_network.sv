// tb_sort_network: random chunks of eight keys with random keep masks
// (including repeated keys); the kept keys must come out ascending as a
// packed prefix, equal to a reference sort, after log2(N)(log2(N)+1)/2
// cycles.
module tb_sort_network;
  localparam int N = 8, W = 32, LAT = 6, NCH = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [N-1:0] in_keep, out_keep;
  logic [N-1:0][W-1:0] in_key, out_key;
  int checks = 0, failures = 0, cyc = 0;

  sort_network #(.N(N), .W(W)) dut (.*);

  typedef struct { int n; logic [W-1:0] k [N]; int t; } exp_t;
  exp_t exp_q [$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) failures++;
    else begin
      e = exp_q.pop_front();
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out_keep[i] !== (i < e.n) || (i < e.n && out_key[i] !== e.k[i])) begin
          failures++;
          $display("lane %0d keep %0b key %0d want %0d", i, out_keep[i], out_key[i], e.k[i]);
        end
      end
      checks++;
      if (cyc - e.t != LAT) begin failures++; $display("latency %0d", cyc - e.t); end
    end
  end

  initial begin
    in_valid = 0; in_keep = '0; in_key = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NCH; c++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_keep  = $urandom();
      for (int i = 0; i < N; i++) in_key[i] = (c % 2) ? $urandom_range(9) : $urandom();
      if (in_valid) begin
        exp_t e;
        logic [W-1:0] tmp [$];
        tmp.delete();
        for (int i = 0; i < N; i++) if (in_keep[i]) tmp.push_back(in_key[i]);
        tmp.sort();
        e.n = tmp.size();
        for (int i = 0; i < N; i++) e.k[i] = (i < e.n) ? tmp[i] : '0;
        e.t = cyc;
        exp_q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
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
