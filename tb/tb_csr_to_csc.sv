// tb_csr_to_csc: converts the paper's 8 x 8 example (CSR col_id 2 3 2 3 6 7
// 6 0 1 1, row_ptr 0 2 4 6 7 9 10 10 10) and then a random 23 x 19 matrix
// with empty rows and columns. The CSC read back must equal the paper's
// result (values h i j a c b d e g f, row_id 4 4 5 0 1 0 1 2 3 2, col_ptr
// 0 1 3 5 7 7 7 9 10) and, for the random matrix, a transpose computed by
// the testbench.
module tb_csr_to_csc;
  import sta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [DW-1:0] n_rows, n_cols;
  ps_req_t ps_req; logic ps_valid; ps_vec_t ps_data;
  sp_req_t [NBANK-1:0] dut_req, tb_req, req;
  sp_vec_t [NBANK-1:0] rdata;
  logic tb_own;

  csr_to_csc dut (.clk, .rst_n, .start, .n_rows, .n_cols, .sp_req(dut_req), .sp_rdata(rdata),
    .ps_req, .ps_valid, .ps_data, .busy, .done);
  prefix_sum #(.N(PS_N)) u_ps (.clk, .rst_n, .in_valid(ps_req.valid), .in_clear(ps_req.clear),
    .in_data(ps_req.data), .out_valid(ps_valid), .out_data(ps_data));
  assign req = tb_own ? tb_req : dut_req;
  scratchpad #(.DEPTH(1024)) u_sp (.clk, .req, .rdata);

  task automatic wr(input int b, input int a, input logic [DW-1:0] v);
    @(negedge clk); tb_own = 1; tb_req = '0; tb_req[b].we = 1; tb_req[b].waddr = SP_AW'(a);
    tb_req[b].wmask = 1; tb_req[b].wdata[0] = v;
    @(negedge clk); tb_own = 0; tb_req = '0;
  endtask
  task automatic rd(input int b, input int a, output logic [DW-1:0] v);
    @(negedge clk); tb_own = 1; tb_req = '0; tb_req[b].re = 1; tb_req[b].raddr = SP_AW'(a);
    @(negedge clk); v = rdata[b][0]; tb_own = 0; tb_req = '0;
  endtask

  task automatic convert(input int m, input int n, input int val[$], input int col[$], input int rp[$]);
    int cnt[], cp[], ev[], er[], pos;
    logic [DW-1:0] v;
    int nnz;
    nnz = val.size();
    for (int i = 0; i < nnz; i++) begin wr(BK_VAL, i, val[i]); wr(BK_IDX, i, col[i]); end
    for (int i = 0; i <= m; i++) wr(BK_PTR, i, rp[i]);
    // reference transpose
    cnt = new[n]; cp = new[n+1]; ev = new[nnz]; er = new[nnz];
    foreach (cnt[i]) cnt[i] = 0;
    for (int i = 0; i < nnz; i++) cnt[col[i]]++;
    cp[0] = 0;
    for (int c = 0; c < n; c++) cp[c+1] = cp[c] + cnt[c];
    foreach (cnt[i]) cnt[i] = cp[i];
    for (int r = 0; r < m; r++)
      for (int i = rp[r]; i < rp[r+1]; i++) begin
        pos = cnt[col[i]]++; ev[pos] = val[i]; er[pos] = r;
      end
    n_rows = m; n_cols = n;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int i = 0; i < nnz; i++) begin
      rd(BK_OVAL, i, v);  checks++; if (v != ev[i]) begin failures++; $display("val %0d: %0d want %0d", i, v, ev[i]); end
      rd(BK_OIDX0, i, v); checks++; if (v != er[i]) begin failures++; $display("row %0d: %0d want %0d", i, v, er[i]); end
    end
    for (int c = 0; c <= n; c++) begin
      rd(BK_OPTR0, c, v); checks++; if (v != cp[c]) begin failures++; $display("col_ptr %0d: %0d want %0d", c, v, cp[c]); end
    end
  endtask

  initial begin
    int val[$], col[$], rp[$];
    tb_own = 0; tb_req = '0; start = 0; n_rows = 0; n_cols = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // paper example, a..j = 1..10
    val = '{1, 2, 3, 4, 5, 6, 7, 8, 9, 10};
    col = '{2, 3, 2, 3, 6, 7, 6, 0, 1, 1};
    rp  = '{0, 2, 4, 6, 7, 9, 10, 10, 10};
    convert(8, 8, val, col, rp);
    // random
    val.delete(); col.delete(); rp.delete(); rp.push_back(0);
    for (int r = 0; r < 23; r++) begin
      for (int c = 0; c < 19; c++)
        if (c != 5 && r % 7 != 3 && $urandom_range(3) == 0) begin val.push_back($urandom_range(1, 9999)); col.push_back(c); end
      rp.push_back(val.size());
    end
    convert(23, 19, val, col, rp);
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
