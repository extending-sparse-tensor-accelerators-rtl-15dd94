// tb_sta_full: end-to-end test of the accelerator at the paper's full size
// (2048 PEs of eight multipliers, 16-lane 512-bit
// bus, 128-word PE buffers) with no parameter overrides. Every PE gets its
// column id; PEs 0, 1, 2 and 2047 are loaded with columns of a random
// 32 x 4 matrix B. Pass 1: B dense, a random 5 x 32 matrix A written by the
// host in CSR and streamed. Pass 2: B in CSC (metadata in the first half of
// each buffer), A given as RLC, converted to COO by MINT and streamed. The
// loaded columns of the output buffer must equal A x B, and an unloaded
// PE (1000) must hold zero.
module tb_sta_full;
  import sta_pkg::*;
  localparam int NUM_PE = 2048, BUF = 128, OB_ROWS = 256;
  localparam int M = 5, K = 32;
  localparam int PES [4] = '{0, 1, 2, 2047};
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

  sta_top dut (.*);

  int A [M][K], B [K][4];

  task automatic wr(input int b, input int a, input logic [DW-1:0] v);
    @(negedge clk); host_req = '0; host_req[b].we = 1; host_req[b].waddr = SP_AW'(a);
    host_req[b].wmask = 1; host_req[b].wdata[0] = v;
    @(negedge clk); host_req = '0;
  endtask
  task automatic load_b(input bit csc);
    for (int j = 0; j < 4; j++) begin
      int e;
      @(negedge clk); ld_pe = PES[j]; ld_clear = 1; ld_col_we = 1; ld_col = PES[j];
      @(negedge clk); ld_clear = 0; ld_col_we = 0;
      e = 0;
      for (int k = 0; k < K; k++)
        if (!csc) begin @(negedge clk); ld_we = 1; ld_addr = k; ld_meta = 0; ld_data = B[k][j]; end
        else if (B[k][j] != 0) begin
          @(negedge clk); ld_we = 1; ld_addr = e; ld_meta = 1; ld_data = k;
          @(negedge clk); ld_we = 1; ld_addr = BUF / 2 + e; ld_meta = 0; ld_data = B[k][j];
          e++;
        end
      @(negedge clk); ld_we = 0;
    end
    b_fmt = csc ? B_CSC : B_DENSE; meta_cnt = csc ? BUF / 2 : 0;
  endtask
  task automatic stream(input a_fmt_e f, input int vb, input int ib, input int rb, input int nnz);
    @(negedge clk); ob_clear = 1; @(negedge clk); ob_clear = 0;
    while (ob_busy) @(negedge clk);
    a_fmt = f; m_rows = M; k_cols = K; a_nnz = nnz;
    val_bank = 3'(vb); idx_bank = 3'(ib); row_bank = 3'(rb);
    @(negedge clk); acc_start = 1; @(negedge clk); acc_start = 0;
    while (!acc_done) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask
  task automatic check_ob(input string what);
    for (int r = 0; r < M; r++) for (int j = 0; j < 5; j++) begin
      int ex, bank;
      ex = 0;
      bank = (j < 4) ? PES[j] : 1000;    // PE 1000 holds nothing
      if (j < 4) for (int k = 0; k < K; k++) ex += A[r][k] * B[k][j];
      @(negedge clk); ob_rd_en = 1; ob_rd_bank = bank; ob_rd_row = r;
      @(negedge clk); ob_rd_en = 0;
      checks++;
      if (ob_rd_data != ex) begin failures++; $display("%s: O[%0d][PE %0d] = %0d, want %0d", what, r, bank, ob_rd_data, ex); end
    end
  endtask

  initial begin
    int runs[$], vals[$], prev, e;
    host_req = '0; conv = CONV_NONE; conv_start = 0; in_valid = 0; in_first = 0; in_last = 0;
    in_keep = '0; in_data = '0; k_dim = K; n_rows = 0; n_cols = 0; bsz = 2; y_dim = 1; z_dim = 1;
    a_fmt = A_DENSE; b_fmt = B_DENSE; meta_cnt = 0; m_rows = 0; k_cols = 0; a_nnz = 0;
    val_bank = 0; idx_bank = 0; row_bank = 0; acc_start = 0; ld_pe = 0; ld_clear = 0; ld_we = 0;
    ld_meta = 0; ld_col_we = 0; ld_addr = 0; ld_data = 0; ld_col = 0; ob_clear = 0; ob_rd_en = 0;
    ob_rd_bank = 0; ob_rd_row = 0;
    foreach (A[r, k]) A[r][k] = ($urandom_range(3) == 0) ? $urandom_range(1, 50) : 0;
    A[0][0] = 3; A[M-1][K-1] = 8;
    foreach (B[k, j]) B[k][j] = ($urandom_range(2) == 0) ? $urandom_range(1, 30) : 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // every PE learns its column; buffers start empty
    for (int p = 0; p < NUM_PE; p++) begin
      @(negedge clk); ld_pe = p; ld_clear = 1; ld_col_we = 1; ld_col = p;
    end
    @(negedge clk); ld_clear = 0; ld_col_we = 0;

    // pass 1: CSR A (host written) x dense B
    e = 0;
    for (int r = 0; r < M; r++) begin
      wr(BK_PTR, r, e);
      for (int k = 0; k < K; k++) if (A[r][k] != 0) begin wr(BK_VAL, e, A[r][k]); wr(BK_IDX, e, k); e++; end
    end
    wr(BK_PTR, M, e);
    load_b(0);
    stream(A_CSR, BK_VAL, BK_IDX, BK_PTR, 0);
    check_ob("CSR A x dense B");

    // pass 2: RLC A -> COO by MINT, x CSC B
    prev = -1;
    for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) if (A[r][k] != 0) begin
      runs.push_back(r * K + k - prev - 1); vals.push_back(A[r][k]); prev = r * K + k;
    end
    conv = CONV_RLC_COO; k_dim = K;
    @(negedge clk); conv_start = 1; @(negedge clk); conv_start = 0;
    for (int p = 0; p < vals.size(); p += 8) begin
      @(negedge clk);
      in_valid = 1; in_first = (p == 0); in_last = (p + 8 >= vals.size()); in_keep = '0; in_data = '0;
      for (int i = 0; i < 8 && p + i < vals.size(); i++) begin
        in_data[2*i] = runs[p+i]; in_data[2*i+1] = vals[p+i]; in_keep[2*i] = 1; in_keep[2*i+1] = 1;
      end
    end
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    while (!mint_done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (mint_nnz != vals.size()) begin failures++; $display("rlc nnz %0d", mint_nnz); end
    load_b(1);
    stream(A_COO, BK_OVAL, BK_OIDX1, BK_OIDX0, vals.size());
    check_ob("COO A x CSC B");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
