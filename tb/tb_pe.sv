// tb_pe: one PE at the evaluated size (16 bus lanes, 8 multipliers, 128
// buffer words) computes one column of O = A x B for a random 9 x 21 A with
// empty rows, for all six ACF pairs: A dense / CSR / COO against B dense /
// CSC (CSC B with a 64-word metadata region). Beats are built by the
// testbench with the lane rules of the bus. Every (Rreg, Creg, Oreg) the
// PE emits is checked against the row of the reference product, and each
// row must be emitted exactly once, one cycle after the next row's beat
// or the flush.
module tb_pe;
  import sta_pkg::*;
  localparam int LANES = 16, VEC = 8, BUF = 128, M = 9, K = 21;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  a_fmt_e a_fmt; b_fmt_e b_fmt;
  logic [$clog2(BUF):0] meta_cnt;
  logic ld_clear, ld_we, ld_meta, ld_col_we, bus_valid, flush, out_valid;
  logic [$clog2(BUF)-1:0] ld_addr;
  logic [DW-1:0] ld_data, ld_col, out_row, out_col, out_val;
  lane_t [LANES-1:0] bus_lane;

  pe #(.LANES(LANES), .VEC(VEC), .BUF(BUF)) dut (.*);

  int A [M][K];
  int Bc [K];
  int exp_o [M];
  int seen [M];
  int got_o [M];
  int colno;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_row >= M || out_col != colno) begin failures++; $display("bad addr %0d %0d", out_row, out_col); end
    else begin
      seen[out_row]++;
      got_o[out_row] = out_val;
    end
  end

  task automatic beat(input lane_t [LANES-1:0] l);
    @(negedge clk); bus_valid = 1; bus_lane = l;
  endtask

  task automatic stream(input a_fmt_e f);
    lane_t [LANES-1:0] l;
    int D, P, T, n;
    D = (VEC < LANES-1) ? VEC : LANES-1;
    P = (VEC < (LANES-1)/2) ? VEC : (LANES-1)/2;
    T = (VEC < LANES/3) ? VEC : LANES/3;
    for (int r = 0; r < M; r++) begin
      if (f == A_DENSE) begin
        for (int k0 = 0; k0 < K; k0 += D) begin
          l = '0;
          for (int i = 0; i < D && k0 + i < K; i++) l[i] = '{TAG_DATA, A[r][k0+i]};
          l[LANES-1] = '{TAG_ROW, r};
          beat(l);
        end
      end else begin
        int ks[$];
        ks.delete();
        for (int k = 0; k < K; k++) if (A[r][k] != 0) ks.push_back(k);
        n = (f == A_CSR) ? P : T;
        for (int s = 0; s < ks.size(); s += n) begin
          l = '0;
          for (int i = 0; i < n && s + i < ks.size(); i++) begin
            if (f == A_CSR) begin
              l[2*i] = '{TAG_DATA, A[r][ks[s+i]]}; l[2*i+1] = '{TAG_COL, ks[s+i]};
            end else begin
              l[3*i] = '{TAG_DATA, A[r][ks[s+i]]}; l[3*i+1] = '{TAG_COL, ks[s+i]}; l[3*i+2] = '{TAG_ROW, r};
            end
          end
          if (f == A_CSR) l[LANES-1] = '{TAG_ROW, r};
          beat(l);
        end
      end
    end
    @(negedge clk); bus_valid = 0; bus_lane = '0; flush = 1;
    @(negedge clk); flush = 0;
    @(negedge clk);
  endtask

  task automatic load_b(input b_fmt_e bf);
    int e;
    @(negedge clk); ld_clear = 1; ld_col_we = 1; ld_col = colno;
    @(negedge clk); ld_clear = 0; ld_col_we = 0;
    e = 0;
    for (int k = 0; k < K; k++) begin
      if (bf == B_DENSE) begin
        @(negedge clk); ld_we = 1; ld_addr = k; ld_meta = 0; ld_data = Bc[k];
      end else if (Bc[k] != 0) begin
        @(negedge clk); ld_we = 1; ld_addr = e; ld_meta = 1; ld_data = k;
        @(negedge clk); ld_we = 1; ld_addr = 64 + e; ld_meta = 0; ld_data = Bc[k];
        e++;
      end
    end
    @(negedge clk); ld_we = 0;
    b_fmt = bf; meta_cnt = (bf == B_CSC) ? 64 : 0;
  endtask

  initial begin
    bus_valid = 0; bus_lane = '0; flush = 0; ld_clear = 0; ld_we = 0; ld_meta = 0;
    ld_col_we = 0; ld_addr = '0; ld_data = '0; ld_col = '0; a_fmt = A_DENSE; b_fmt = B_DENSE; meta_cnt = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      colno = t + 3;
      for (int r = 0; r < M; r++)
        for (int k = 0; k < K; k++)
          A[r][k] = (r == 2 || r == 6 || $urandom_range(2) != 0) ? 0 : $urandom_range(1, 50);
      for (int k = 0; k < K; k++) Bc[k] = ($urandom_range(1) == 0) ? 0 : $urandom_range(1, 50);
      for (int r = 0; r < M; r++) begin
        exp_o[r] = 0; seen[r] = 0; got_o[r] = 0;
        for (int k = 0; k < K; k++) exp_o[r] += A[r][k] * Bc[k];
      end
      load_b(b_fmt_e'(t % 2));
      a_fmt = a_fmt_e'(t / 2);
      stream(a_fmt);
      for (int r = 0; r < M; r++) begin
        int nzr;
        nzr = 0;
        for (int k = 0; k < K; k++) if (A[r][k] != 0) nzr = 1;
        checks++;
        if ((a_fmt == A_DENSE || nzr) ? (seen[r] != 1) : (seen[r] != 0)) begin
          failures++; $display("t%0d row %0d emitted %0d times", t, r, seen[r]);
        end
        checks++;
        if (got_o[r] != exp_o[r]) begin failures++; $display("t%0d row %0d: %0d want %0d", t, r, got_o[r], exp_o[r]); end
      end
    end
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
