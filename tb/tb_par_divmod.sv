// tb_par_divmod: random dividends and divisors (including small divisors
// and zero) on all eight lanes; quotient and remainder are compared with
// the simulator's own / and %, and the latency must be W cycles.
module tb_par_divmod;
  localparam int N = 8, W = 32, NOP = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [N-1:0][W-1:0] dividend, divisor, quotient, remainder;
  int checks = 0, failures = 0, cyc = 0;

  par_divmod #(.N(N), .W(W)) dut (.*);

  typedef struct { logic [N-1:0][W-1:0] q, r; int t; } exp_t;
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
        if (quotient[i] !== e.q[i] || remainder[i] !== e.r[i]) begin
          failures++;
          $display("lane %0d: got %0d r %0d, want %0d r %0d", i, quotient[i], remainder[i], e.q[i], e.r[i]);
        end
      end
      checks++;
      if (cyc - e.t != W) begin failures++; $display("latency %0d", cyc - e.t); end
    end
  end

  initial begin
    in_valid = 0; dividend = '0; divisor = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NOP; b++) begin
      @(negedge clk);
      in_valid = ($urandom_range(1) == 1);
      for (int i = 0; i < N; i++) begin
        dividend[i] = $urandom();
        case ($urandom_range(3))
          0: divisor[i] = $urandom_range(16);
          1: divisor[i] = $urandom_range(100000);
          2: divisor[i] = $urandom();
          default: divisor[i] = dividend[i] >> $urandom_range(8);
        endcase
      end
      if (in_valid) begin
        exp_t e;
        for (int i = 0; i < N; i++) begin
          e.q[i] = (divisor[i] == 0) ? '1 : dividend[i] / divisor[i];
          e.r[i] = (divisor[i] == 0) ? dividend[i] : dividend[i] % divisor[i];
        end
        e.t = cyc;
        exp_q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (W + 3) @(posedge clk);
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
