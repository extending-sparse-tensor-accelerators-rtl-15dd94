// tb_mint: runs all four conversions of the merged converter back to back
// on one scratchpad, so each conversion uses the one shared prefix-sum
// unit and the one shared div/mod unit through mint's multiplexers.
//   RLC->COO : the paper's 8 x 8 RLC example; COO row/col/value checked.
//   CSR->CSC : the same matrix in CSR; CSC col_ptr, row_id, value checked.
//   CSR->BSR : the same matrix with 2 x 2 blocks; row_ptr and the number
//              of blocks are checked against a reference, and every value
//              must appear in its block at (r mod 2, c mod 2).
//   Dense->CSF : a random 3 x 4 x 5 tensor; nnz, number of x and (x,y)
//              fibres and the COO staging (x, y, z, value) are checked.
// Each conversion must raise busy and end with one done pulse.
module tb_mint;
  import sta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  conv_e conv;
  logic start, in_valid, in_first, in_last, busy, done;
  logic [DW-1:0] k_dim, n_rows, n_cols, bsz, y_dim, z_dim, nnz, nx, ny;
  logic [IN_W-1:0] in_keep;
  in_vec_t in_data;
  sp_req_t [NBANK-1:0] dut_req, tb_req, req;
  sp_vec_t [NBANK-1:0] rdata;
  logic tb_own;
  int ndone;

  mint dut (.*, .sp_req(dut_req), .sp_rdata(rdata));
  assign req = tb_own ? tb_req : dut_req;
  scratchpad #(.DEPTH(1024)) u_sp (.clk, .req, .rdata);

  always @(negedge clk) if (rst_n && done) ndone++;

  task automatic wr(input int b, input int a, input logic [DW-1:0] v);
    @(negedge clk); tb_own = 1; tb_req = '0; tb_req[b].we = 1; tb_req[b].waddr = SP_AW'(a);
    tb_req[b].wmask = 1; tb_req[b].wdata[0] = v;
    @(negedge clk); tb_own = 0; tb_req = '0;
  endtask
  task automatic rd(input int b, input int a, output logic [DW-1:0] v);
    @(negedge clk); tb_own = 1; tb_req = '0; tb_req[b].re = 1; tb_req[b].raddr = SP_AW'(a);
    @(negedge clk); v = rdata[b][0]; tb_own = 0; tb_req = '0;
  endtask
  task automatic expect_eq(input string what, input int i, input logic [DW-1:0] got, input int want);
    checks++;
    if (got != want) begin failures++; $display("%s[%0d] = %0d, want %0d", what, i, got, want); end
  endtask
  task automatic run(input conv_e c);
    int saw_busy;
    ndone = 0; saw_busy = 0;
    conv = c;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin if (busy) saw_busy = 1; @(negedge clk); end
    @(negedge clk);
    expect_eq("busy seen", c, saw_busy, 1);
    expect_eq("done pulses", c, ndone, 1);
  endtask

  // the paper's example matrix, values a..j = 1..10
  int val[$] = '{1, 2, 3, 4, 5, 6, 7, 8, 9, 10};
  int row[$] = '{0, 0, 1, 1, 2, 2, 3, 4, 4, 5};
  int col[$] = '{2, 3, 2, 3, 6, 7, 6, 0, 1, 1};
  int rp[$]  = '{0, 2, 4, 6, 7, 9, 10, 10, 10};

  initial begin
    logic [DW-1:0] v;
    int runs[$], prev, n;
    tb_own = 0; tb_req = '0; start = 0; in_valid = 0; in_first = 0; in_last = 0; in_keep = '0; in_data = '0;
    conv = CONV_NONE; k_dim = 8; n_rows = 8; n_cols = 8; bsz = 2; y_dim = 1; z_dim = 1;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- RLC -> COO: runs of zeros before each nonzero, row-major
    prev = -1;
    foreach (val[i]) begin runs.push_back(row[i] * 8 + col[i] - prev - 1); prev = row[i] * 8 + col[i]; end
    conv = CONV_RLC_COO;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int p = 0; p < 10; p += 4) begin
      @(negedge clk);
      in_valid = 1; in_first = (p == 0); in_last = (p + 4 >= 10); in_keep = '0; in_data = '0;
      for (int i = 0; i < 4 && p + i < 10; i++) begin
        in_data[2*i] = runs[p+i]; in_data[2*i+1] = val[p+i]; in_keep[2*i] = 1; in_keep[2*i+1] = 1;
      end
    end
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    expect_eq("rlc nnz", 0, nnz, 10);
    foreach (val[i]) begin
      rd(BK_OVAL, i, v);  expect_eq("coo val", i, v, val[i]);
      rd(BK_OIDX0, i, v); expect_eq("coo row", i, v, row[i]);
      rd(BK_OIDX1, i, v); expect_eq("coo col", i, v, col[i]);
    end

    // ---- CSR -> CSC
    foreach (val[i]) begin wr(BK_VAL, i, val[i]); wr(BK_IDX, i, col[i]); end
    foreach (rp[i]) wr(BK_PTR, i, rp[i]);
    n_rows = 8; n_cols = 8;
    run(CONV_CSR_CSC);
    begin
      int cp[9], pos[8], ev[10], er[10];
      cp = '{default: 0};
      foreach (col[i]) cp[col[i] + 1]++;
      for (int c = 0; c < 8; c++) cp[c+1] += cp[c];
      for (int c = 0; c < 8; c++) pos[c] = cp[c];
      foreach (val[i]) begin ev[pos[col[i]]] = val[i]; er[pos[col[i]]] = row[i]; pos[col[i]]++; end
      for (int c = 0; c <= 8; c++) begin rd(BK_OPTR0, c, v); expect_eq("csc col_ptr", c, v, cp[c]); end
      for (int i = 0; i < 10; i++) begin
        rd(BK_OVAL, i, v);  expect_eq("csc val", i, v, ev[i]);
        rd(BK_OIDX0, i, v); expect_eq("csc row", i, v, er[i]);
      end
    end

    // ---- CSR -> BSR, 2 x 2 blocks (input CSR still in place)
    bsz = 2;
    run(CONV_CSR_BSR);
    begin
      int bp[5], bcols[$], blk_of[$], found;
      logic [DW-1:0] bc;
      bp[0] = 0;
      for (int rb = 0; rb < 4; rb++) begin
        bcols.delete();
        foreach (val[i]) if (row[i] / 2 == rb) begin
          found = 0;
          foreach (bcols[j]) if (bcols[j] == col[i] / 2) found = 1;
          if (!found) bcols.push_back(col[i] / 2);
        end
        bp[rb+1] = bp[rb] + bcols.size();
      end
      expect_eq("bsr blocks", 0, nnz, bp[4]);
      for (int rb = 0; rb <= 4; rb++) begin rd(BK_OPTR0, rb, v); expect_eq("bsr row_ptr", rb, v, bp[rb]); end
      // every value sits in a block of its row block with its block column
      foreach (val[i]) begin
        found = 0;
        for (int b = bp[row[i] / 2]; b < bp[row[i] / 2 + 1]; b++) begin
          rd(BK_OIDX1, b, bc);
          if (bc == col[i] / 2) begin
            rd(BK_OVAL, b * 4 + (row[i] % 2) * 2 + col[i] % 2, v);
            if (v == val[i]) found = 1;
          end
        end
        expect_eq("bsr value placed", i, found, 1);
      end
    end

    // ---- Dense -> CSF staging, random 3 x 4 x 5
    begin
      int t[60], xs[$], ys[$], zs[$], vs[$], ex_nx, ex_ny, px, pxy;
      foreach (t[i]) t[i] = ($urandom_range(2) == 0) ? $urandom_range(1, 99) : 0;
      t[0] = 0; t[59] = 7;
      px = -1; pxy = -1; ex_nx = 0; ex_ny = 0;
      foreach (t[i]) if (t[i] != 0) begin
        xs.push_back(i / 20); ys.push_back((i / 5) % 4); zs.push_back(i % 5); vs.push_back(t[i]);
        if (i / 20 != px) begin ex_nx++; px = i / 20; end
        if (i / 5 != pxy) begin ex_ny++; pxy = i / 5; end
      end
      y_dim = 4; z_dim = 5;
      conv = CONV_DENSE_CSF;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int p = 0; p < 60; p += 4) begin
        @(negedge clk);
        in_valid = 1; in_first = (p == 0); in_last = (p + 4 >= 60); in_keep = '0; in_data = '0;
        for (int i = 0; i < 4; i++) begin in_keep[i] = 1; in_data[i] = t[p+i]; end
      end
      @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      expect_eq("csf nnz", 0, nnz, vs.size());
      expect_eq("csf nx", 0, nx, ex_nx);
      expect_eq("csf ny", 0, ny, ex_ny);
      foreach (vs[i]) begin
        rd(BK_VAL, i, v);  expect_eq("csf x", i, v, xs[i]);
        rd(BK_IDX, i, v);  expect_eq("csf y", i, v, ys[i]);
        rd(BK_OIDX1, i, v); expect_eq("csf z", i, v, zs[i]);
        rd(BK_OVAL, i, v); expect_eq("csf v", i, v, vs[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
