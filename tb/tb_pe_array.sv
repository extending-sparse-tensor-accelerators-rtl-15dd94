// tb_pe_array: the paper's walkthrough array (4 PEs, five-lane bus, four
// multipliers, eight buffer words) with its 4 x 8 matrix A and a random
// 8 x 4 B, one column of B per PE. Runs Dense(A)-Dense(B) and
// CSR(A)-CSC(B) (metadata region of four words, as in the walkthrough)
// and COO(A)-Dense(B); every PE's emitted (Rreg, Creg, Oreg) must match
// O = A x B, with the broadcast bus adding one cycle.
module tb_pe_array;
  import sta_pkg::*;
  localparam int NUM_PE = 4, LANES = 5, VEC = 4, BUF = 8, M = 4, K = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  a_fmt_e a_fmt; b_fmt_e b_fmt;
  logic [$clog2(BUF):0] meta_cnt;
  logic [$clog2(NUM_PE)-1:0] ld_pe;
  logic ld_clear, ld_we, ld_meta, ld_col_we, bus_valid, flush;
  logic [$clog2(BUF)-1:0] ld_addr;
  logic [DW-1:0] ld_data, ld_col;
  lane_t [LANES-1:0] bus_lane;
  logic [NUM_PE-1:0] out_valid;
  logic [NUM_PE-1:0][DW-1:0] out_row, out_col, out_val;

  pe_array #(.NUM_PE(NUM_PE), .LANES(LANES), .VEC(VEC), .BUF(BUF)) dut (.*);

  int A [M][K], B [K][NUM_PE], got [M][NUM_PE], nemit;

  always @(negedge clk) if (rst_n) for (int p = 0; p < NUM_PE; p++) if (out_valid[p]) begin
    nemit++;
    checks++;
    if (out_col[p] != p || out_row[p] >= M) begin failures++; $display("PE%0d bad address", p); end
    else got[out_row[p]][p] = out_val[p];
  end

  task automatic beat(input lane_t [LANES-1:0] l);
    @(negedge clk); bus_valid = 1; bus_lane = l;
  endtask

  task automatic run(input a_fmt_e af, input b_fmt_e bf);
    lane_t [LANES-1:0] l;
    for (int p = 0; p < NUM_PE; p++) begin
      int e;
      @(negedge clk); ld_pe = p; ld_clear = 1; ld_col_we = 1; ld_col = p;
      @(negedge clk); ld_clear = 0; ld_col_we = 0;
      e = 0;
      for (int k = 0; k < K; k++) begin
        if (bf == B_DENSE) begin @(negedge clk); ld_we = 1; ld_addr = k; ld_meta = 0; ld_data = B[k][p]; end
        else if (B[k][p] != 0) begin
          @(negedge clk); ld_we = 1; ld_addr = e; ld_meta = 1; ld_data = k;
          @(negedge clk); ld_we = 1; ld_addr = 4 + e; ld_meta = 0; ld_data = B[k][p];
          e++;
        end
      end
      @(negedge clk); ld_we = 0;
    end
    a_fmt = af; b_fmt = bf; meta_cnt = (bf == B_CSC) ? 4 : 0;
    for (int r = 0; r < M; r++) for (int p = 0; p < NUM_PE; p++) got[r][p] = 0;
    nemit = 0;
    for (int r = 0; r < M; r++) begin
      int ks[$];
      ks.delete();
      for (int k = 0; k < K; k++) if (A[r][k] != 0) ks.push_back(k);
      if (af == A_DENSE)
        for (int k0 = 0; k0 < K; k0 += 4) begin
          l = '0; for (int i = 0; i < 4; i++) l[i] = '{TAG_DATA, A[r][k0+i]}; l[4] = '{TAG_ROW, r}; beat(l);
        end
      else if (af == A_CSR)
        for (int s = 0; s < ks.size(); s += 2) begin
          l = '0;
          for (int i = 0; i < 2 && s + i < ks.size(); i++) begin l[2*i] = '{TAG_DATA, A[r][ks[s+i]]}; l[2*i+1] = '{TAG_COL, ks[s+i]}; end
          l[4] = '{TAG_ROW, r}; beat(l);
        end
      else
        foreach (ks[s]) begin
          l = '0; l[0] = '{TAG_DATA, A[r][ks[s]]}; l[1] = '{TAG_COL, ks[s]}; l[2] = '{TAG_ROW, r}; beat(l);
        end
    end
    @(negedge clk); bus_valid = 0; flush = 1;
    @(negedge clk); flush = 0;
    repeat (3) @(negedge clk);
    for (int r = 0; r < M; r++) for (int p = 0; p < NUM_PE; p++) begin
      int ex;
      ex = 0;
      for (int k = 0; k < K; k++) ex += A[r][k] * B[k][p];
      checks++;
      if (got[r][p] != ex) begin failures++; $display("fmt %0d/%0d O[%0d][%0d] %0d want %0d", af, bf, r, p, got[r][p], ex); end
    end
    checks++;
    if (nemit != NUM_PE * ((af == A_DENSE) ? M : 2)) begin failures++; $display("emissions %0d", nemit); end
  endtask

  initial begin
    bus_valid = 0; bus_lane = '0; flush = 0; ld_pe = 0; ld_clear = 0; ld_we = 0; ld_meta = 0;
    ld_col_we = 0; ld_addr = '0; ld_data = '0; ld_col = '0; a_fmt = A_DENSE; b_fmt = B_DENSE; meta_cnt = 0;
    foreach (A[r, k]) A[r][k] = 0;
    A[0][0] = 10; A[0][2] = 11; A[0][4] = 12; A[3][5] = 17;
    foreach (B[k, p]) B[k][p] = 0;
    for (int p = 0; p < NUM_PE; p++)   // at most four nonzeros per column
      for (int i = 0; i < 3; i++) B[$urandom_range(K-1)][p] = $urandom_range(1, 40);
    B[0][0] = 3; B[2][0] = 5;
    repeat (3) @(posedge clk); rst_n = 1;
    run(A_DENSE, B_DENSE);
    run(A_CSR, B_CSC);
    run(A_COO, B_DENSE);
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
