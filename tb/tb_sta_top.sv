// tb_sta_top: end-to-end test of the accelerator with the MINT converter at
// the paper's walkthrough size (4 PEs, five-lane bus, four multipliers,
// eight-word buffers). A random 6 x 8 matrix A is multiplied by a random
// 8 x 4 matrix B (one column per PE) through every path:
//   1. A arrives as RLC, MINT converts it to COO in the scratchpad, the
//      accelerator streams COO A against dense B;
//   2. B arrives as CSR, MINT converts it to CSC, the host loads the CSC
//      columns into the PE buffers; A is written by the host in CSR and
//      streamed without conversion (bypass);
//   3. A is written dense and streamed twice against CSC B without clearing
//      the output buffer, so the second pass must accumulate to 2 x A x B;
//   4. MINT converts A's CSR to 2 x 2 BSR and a random 2 x 3 x 4 tensor to
//      CSF (block and fibre counts checked).
// Every product is read back from the global output buffer and compared
// with a reference. The testbench counts each mechanism (each conversion,
// each A format, each B format, bypass, row-change emissions, flush
// emissions, accumulation) and counts a failure for any that never
// happened.
module tb_sta_top;
  import sta_pkg::*;
  localparam int NUM_PE = 4, LANES = 5, VEC = 4, BUF = 8, SP_DEPTH = 1024, OB_ROWS = 8;
  localparam int M = 6, K = 8, N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  sp_req_t [NBANK-1:0] host_req;
  sp_vec_t [NBANK-1:0] host_rdata;
  conv_e conv;
  logic conv_start, in_valid, in_first, in_last, mint_busy, mint_done;
  logic [DW-1:0] k_dim, n_rows, n_cols, bsz, y_dim, z_dim, mint_nnz, mint_nx, mint_ny;
  logic [IN_W-1:0] in_keep;
  in_vec_t in_data;
  a_fmt_e a_fmt; b_fmt_e b_fmt;
  logic [$clog2(BUF):0] meta_cnt;
  logic [DW-1:0] m_rows, k_cols, a_nnz, acc_beats;
  logic [2:0] val_bank, idx_bank, row_bank;
  logic acc_start, acc_busy, acc_done;
  logic [$clog2(NUM_PE)-1:0] ld_pe;
  logic ld_clear, ld_we, ld_meta, ld_col_we;
  logic [$clog2(BUF)-1:0] ld_addr;
  logic [DW-1:0] ld_data, ld_col;
  logic ob_clear, ob_rd_en, ob_busy;
  logic [$clog2(NUM_PE)-1:0] ob_rd_bank;
  logic [$clog2(OB_ROWS)-1:0] ob_rd_row;
  logic [DW-1:0] ob_rd_data;

  sta_top #(.NUM_PE(NUM_PE), .LANES(LANES), .VEC(VEC), .BUF(BUF), .SP_DEPTH(SP_DEPTH),
            .OB_ROWS(OB_ROWS)) dut (.*);

  // ---- mechanism counters
  typedef enum int { MC_RLC, MC_CSC, MC_BSR, MC_CSF, MC_A_DENSE, MC_A_CSR, MC_A_COO,
                     MC_B_DENSE, MC_B_CSC, MC_BYPASS, MC_ROW_EMIT, MC_FLUSH_EMIT,
                     MC_ACCUM, MC_NUM } mech_e;
  int mech [MC_NUM];
  string mech_name [MC_NUM] = '{"RLC->COO", "CSR->CSC", "CSR->BSR", "Dense->CSF", "dense A",
    "CSR A", "COO A", "dense B", "CSC B", "bypass", "row-change emission", "flush emission",
    "output accumulation"};

  // classify PE emissions: within a few cycles of the flush, or earlier
  int since_flush = 100;
  always @(negedge clk) if (rst_n) begin
    since_flush = dut.flush ? 0 : since_flush + 1;
    for (int p = 0; p < NUM_PE; p++) if (dut.pe_ov[p]) begin
      if (since_flush <= 3) mech[MC_FLUSH_EMIT]++;
      else mech[MC_ROW_EMIT]++;
    end
  end

  int A [M][K], B [K][N];

  task automatic expect_eq(input string what, input int i, input logic [DW-1:0] got, input int want);
    checks++;
    if (got != want) begin failures++; $display("%s[%0d] = %0d, want %0d", what, i, got, want); end
  endtask
  task automatic wr(input int b, input int a, input logic [DW-1:0] v);
    @(negedge clk); host_req = '0; host_req[b].we = 1; host_req[b].waddr = SP_AW'(a);
    host_req[b].wmask = 1; host_req[b].wdata[0] = v;
    @(negedge clk); host_req = '0;
  endtask
  task automatic rd(input int b, input int a, output logic [DW-1:0] v);
    @(negedge clk); host_req = '0; host_req[b].re = 1; host_req[b].raddr = SP_AW'(a);
    @(negedge clk); v = host_rdata[b][0]; host_req = '0;
  endtask
  task automatic write_csr(input bit use_a);
    int e, rows, cols;
    rows = use_a ? M : K; cols = use_a ? K : N;
    e = 0;
    for (int r = 0; r < rows; r++) begin
      wr(BK_PTR, r, e);
      for (int c = 0; c < cols; c++) if ((use_a ? A[r][c] : B[r][c]) != 0) begin
        wr(BK_VAL, e, use_a ? A[r][c] : B[r][c]); wr(BK_IDX, e, c); e++;
      end
    end
    wr(BK_PTR, rows, e);
  endtask
  task automatic conv_run(input conv_e c);
    conv = c;
    @(negedge clk); conv_start = 1; @(negedge clk); conv_start = 0;
    while (!mint_done) @(negedge clk);
    @(negedge clk);
  endtask
  task automatic stream(input a_fmt_e f, input int vb, input int ib, input int rb, input int nnz);
    a_fmt = f; m_rows = M; k_cols = K; a_nnz = nnz;
    val_bank = 3'(vb); idx_bank = 3'(ib); row_bank = 3'(rb);
    @(negedge clk); acc_start = 1; @(negedge clk); acc_start = 0;
    while (!acc_done) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask
  task automatic clear_ob();
    @(negedge clk); ob_clear = 1; @(negedge clk); ob_clear = 0;
    while (ob_busy) @(negedge clk);
  endtask
  // compare the output buffer with times x A x B; returns 1 if all match
  task automatic check_ob(input int times, input string what, output bit ok);
    ok = 1;
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) begin
      int ex;
      ex = 0;
      for (int k = 0; k < K; k++) ex += A[r][k] * B[k][c];
      @(negedge clk); ob_rd_en = 1; ob_rd_bank = c; ob_rd_row = r;
      @(negedge clk); ob_rd_en = 0;
      checks++;
      if (ob_rd_data != times * ex) begin
        failures++; ok = 0;
        $display("%s: O[%0d][%0d] = %0d, want %0d", what, r, c, ob_rd_data, times * ex);
      end
    end
  endtask
  task automatic load_b_dense();
    for (int p = 0; p < N; p++) begin
      @(negedge clk); ld_pe = p; ld_clear = 1; ld_col_we = 1; ld_col = p;
      @(negedge clk); ld_clear = 0; ld_col_we = 0;
      for (int k = 0; k < K; k++) begin
        @(negedge clk); ld_we = 1; ld_addr = k; ld_meta = 0; ld_data = B[k][p];
      end
      @(negedge clk); ld_we = 0;
    end
    b_fmt = B_DENSE; meta_cnt = 0;
  endtask

  initial begin
    bit ok;
    logic [DW-1:0] v, cp [N+1];
    int runs[$], vals[$], prev, nnz_a;
    host_req = '0; conv = CONV_NONE; conv_start = 0; in_valid = 0; in_first = 0; in_last = 0;
    in_keep = '0; in_data = '0; k_dim = K; n_rows = 0; n_cols = 0; bsz = 2; y_dim = 1; z_dim = 1;
    a_fmt = A_DENSE; b_fmt = B_DENSE; meta_cnt = 0; m_rows = 0; k_cols = 0; a_nnz = 0;
    val_bank = 0; idx_bank = 0; row_bank = 0; acc_start = 0; ld_pe = 0; ld_clear = 0; ld_we = 0;
    ld_meta = 0; ld_col_we = 0; ld_addr = 0; ld_data = 0; ld_col = 0; ob_clear = 0; ob_rd_en = 0;
    ob_rd_bank = 0; ob_rd_row = 0;
    foreach (mech[i]) mech[i] = 0;
    // A: about a third nonzero, row 2 empty; B: at most four nonzeros per column
    foreach (A[r, k]) A[r][k] = (r != 2 && $urandom_range(2) == 0) ? $urandom_range(1, 50) : 0;
    A[0][0] = 9; A[M-1][K-1] = 4;
    foreach (B[k, c]) B[k][c] = 0;
    for (int c = 0; c < N; c++) for (int i = 0; i < 4; i++) B[$urandom_range(K-1)][c] = $urandom_range(1, 30);
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); while (ob_busy) @(negedge clk);

    // ---- 1. RLC A -> COO (MINT), stream COO A against dense B
    load_b_dense();
    prev = -1; runs.delete(); vals.delete();
    for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) if (A[r][k] != 0) begin
      runs.push_back(r * K + k - prev - 1); vals.push_back(A[r][k]); prev = r * K + k;
    end
    nnz_a = vals.size();
    conv = CONV_RLC_COO; k_dim = K;
    @(negedge clk); conv_start = 1; @(negedge clk); conv_start = 0;
    for (int p = 0; p < nnz_a; p += 8) begin
      @(negedge clk);
      in_valid = 1; in_first = (p == 0); in_last = (p + 8 >= nnz_a); in_keep = '0; in_data = '0;
      for (int i = 0; i < 8 && p + i < nnz_a; i++) begin
        in_data[2*i] = runs[p+i]; in_data[2*i+1] = vals[p+i]; in_keep[2*i] = 1; in_keep[2*i+1] = 1;
      end
    end
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    while (!mint_done) @(negedge clk);
    @(negedge clk);
    expect_eq("rlc nnz", 0, mint_nnz, nnz_a);
    if (mint_nnz == nnz_a) mech[MC_RLC]++;
    clear_ob();
    stream(A_COO, BK_OVAL, BK_OIDX1, BK_OIDX0, nnz_a);
    expect_eq("coo beats", 0, acc_beats, nnz_a);   // one triple per beat at five lanes
    check_ob(1, "COO A x dense B", ok);
    if (ok) begin mech[MC_A_COO]++; mech[MC_B_DENSE]++; end

    // ---- 2. CSR B -> CSC (MINT), load CSC B; CSR A by bypass
    write_csr(0);
    n_rows = K; n_cols = N;
    conv_run(CONV_CSR_CSC);
    ok = 1;
    for (int c = 0; c <= N; c++) rd(BK_OPTR0, c, cp[c]);
    for (int c = 0; c < N; c++) begin
      int e;
      e = 0;
      @(negedge clk); ld_pe = c; ld_clear = 1; ld_col_we = 1; ld_col = c;
      @(negedge clk); ld_clear = 0; ld_col_we = 0;
      for (int k = 0; k < K; k++) if (B[k][c] != 0) begin
        logic [DW-1:0] rid, bv;
        rd(BK_OIDX0, cp[c] + e, rid); rd(BK_OVAL, cp[c] + e, bv);
        checks++;
        if (rid != k || bv != B[k][c]) begin failures++; ok = 0; $display("CSC B col %0d entry %0d wrong", c, e); end
        @(negedge clk); ld_we = 1; ld_addr = e; ld_meta = 1; ld_data = rid;
        @(negedge clk); ld_we = 1; ld_addr = 4 + e; ld_meta = 0; ld_data = bv;
        @(negedge clk); ld_we = 0;
        e++;
      end
      checks++;
      if (cp[c+1] - cp[c] != e) begin failures++; ok = 0; $display("CSC col_ptr %0d", c); end
    end
    if (ok) mech[MC_CSC]++;
    b_fmt = B_CSC; meta_cnt = 4;
    write_csr(1);
    clear_ob();
    stream(A_CSR, BK_VAL, BK_IDX, BK_PTR, 0);
    check_ob(1, "CSR A x CSC B", ok);
    if (ok) begin mech[MC_A_CSR]++; mech[MC_B_CSC]++; mech[MC_BYPASS]++; end

    // ---- 3. dense A twice, the second pass accumulates
    for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) wr(BK_OVAL, r * K + k, A[r][k]);
    clear_ob();
    stream(A_DENSE, BK_OVAL, BK_IDX, BK_PTR, 0);
    expect_eq("dense beats", 0, acc_beats, M * K / 4);
    check_ob(1, "dense A x CSC B", ok);
    if (ok) mech[MC_A_DENSE]++;
    stream(A_DENSE, BK_OVAL, BK_IDX, BK_PTR, 0);
    check_ob(2, "accumulated", ok);
    if (ok) mech[MC_ACCUM]++;

    // ---- 4. CSR A -> 2 x 2 BSR, dense tensor -> CSF
    bsz = 2; n_rows = M;
    conv_run(CONV_CSR_BSR);
    begin
      int nb;
      bit seen [M/2][K/2];
      nb = 0;
      foreach (seen[i, j]) seen[i][j] = 0;
      foreach (A[r, k]) if (A[r][k] != 0 && !seen[r/2][k/2]) begin seen[r/2][k/2] = 1; nb++; end
      expect_eq("bsr blocks", 0, mint_nnz, nb);
      rd(BK_OPTR0, M / 2, v);
      expect_eq("bsr row_ptr end", 0, v, nb);
      if (mint_nnz == nb && v == nb) mech[MC_BSR]++;
    end
    begin
      int t[24], nz, nxe, nye, px, pxy;
      foreach (t[i]) t[i] = ($urandom_range(1) == 0) ? $urandom_range(1, 99) : 0;
      t[23] = 5;
      nz = 0; nxe = 0; nye = 0; px = -1; pxy = -1;
      foreach (t[i]) if (t[i] != 0) begin
        nz++;
        if (i / 12 != px) begin nxe++; px = i / 12; end
        if (i / 4 != pxy) begin nye++; pxy = i / 4; end
      end
      y_dim = 3; z_dim = 4; conv = CONV_DENSE_CSF;
      @(negedge clk); conv_start = 1; @(negedge clk); conv_start = 0;
      for (int p = 0; p < 24; p += 4) begin
        @(negedge clk);
        in_valid = 1; in_first = (p == 0); in_last = (p + 4 >= 24); in_keep = '0; in_data = '0;
        for (int i = 0; i < 4; i++) begin in_keep[i] = 1; in_data[i] = t[p+i]; end
      end
      @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
      while (!mint_done) @(negedge clk);
      @(negedge clk);
      expect_eq("csf nnz", 0, mint_nnz, nz);
      expect_eq("csf nx", 0, mint_nx, nxe);
      expect_eq("csf ny", 0, mint_ny, nye);
      if (mint_nnz == nz && mint_nx == nxe && mint_ny == nye) mech[MC_CSF]++;
    end

    for (int i = 0; i < MC_NUM; i++) begin
      checks++;
      $display("mechanism %-22s count %0d", mech_name[i], mech[i]);
      if (mech[i] == 0) begin failures++; $display("mechanism %s never happened", mech_name[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
