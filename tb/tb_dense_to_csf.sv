// tb_dense_to_csf: streams the paper's 4 x 4 x 4 example tensor (nonzeros
// a..f at linear positions 0, 1, 26, 36, 39, 51) and a random 3 x 5 x 6
// tensor through dense_to_csf with the shared prefix-sum and div/mod units.
// For the example the CSF must equal the printed one: x_idx 0 1 2 3,
// x_ptr 0 1 2 3 4, y_idx 0 2 1 0, y_ptr 0 2 3 5 6, z_idx 0 1 2 0 3 3; the
// random tensor is checked against a reference built by the testbench.
module tb_dense_to_csf;
  import sta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [DW-1:0] y_dim, z_dim, nnz, nx, ny;
  logic in_valid, in_first, in_last, busy, done;
  logic [IN_W-1:0] in_keep;
  in_vec_t in_data;
  ps_req_t ps_req; logic ps_valid; ps_vec_t ps_data;
  dm_req_t dm_req; logic dm_valid; dm_vec_t dm_quo, dm_rem;
  sp_req_t [NBANK-1:0] dut_req, tb_req, req;
  sp_vec_t [NBANK-1:0] rdata;
  logic tb_own;

  dense_to_csf dut (.*, .sp_req(dut_req), .sp_rdata(rdata));
  prefix_sum #(.N(PS_N)) u_ps (.clk, .rst_n, .in_valid(ps_req.valid), .in_clear(ps_req.clear),
    .in_data(ps_req.data), .out_valid(ps_valid), .out_data(ps_data));
  par_divmod #(.N(DM_N)) u_dm (.clk, .rst_n, .in_valid(dm_req.valid), .dividend(dm_req.dividend),
    .divisor(dm_req.divisor), .out_valid(dm_valid), .quotient(dm_quo), .remainder(dm_rem));
  assign req = tb_own ? tb_req : dut_req;
  scratchpad #(.DEPTH(1024)) u_sp (.clk, .req, .rdata);

  task automatic rd(input int b, input int a, output logic [DW-1:0] v);
    @(negedge clk); tb_own = 1; tb_req = '0; tb_req[b].re = 1; tb_req[b].raddr = SP_AW'(a);
    @(negedge clk); v = rdata[b][0]; tb_own = 0; tb_req = '0;
  endtask

  task automatic cmp(input string nm, input int b, input int e[$]);
    logic [DW-1:0] v;
    for (int i = 0; i < e.size(); i++) begin
      rd(b, i, v); checks++;
      if (v != e[i]) begin failures++; $display("%s[%0d] = %0d want %0d", nm, i, v, e[i]); end
    end
  endtask

  task automatic run(input int X, input int Y, input int Z, input int t[$]);
    int xi[$], xp[$], yi[$], yp[$], zi[$], vv[$], px, py, n;
    n = X * Y * Z;
    // reference CSF
    px = -1; py = -1;
    for (int p = 0; p < n; p++)
      if (t[p] != 0) begin
        int x, y, z;
        x = p / (Y * Z); y = (p / Z) % Y; z = p % Z;
        if (x != px) begin xi.push_back(x); xp.push_back(yi.size()); end
        if (x != px || y != py) begin yi.push_back(y); yp.push_back(zi.size()); end
        zi.push_back(z); vv.push_back(t[p]); px = x; py = y;
      end
    xp.push_back(yi.size()); yp.push_back(zi.size());
    y_dim = Y; z_dim = Z;
    for (int p = 0; p < n; p += 4) begin
      @(negedge clk);
      in_valid = 1; in_first = (p == 0); in_last = (p + 4 >= n);
      in_keep = '0; in_data = '0;
      for (int i = 0; i < 4 && p + i < n; i++) begin in_keep[i] = 1; in_data[i] = t[p+i]; end
    end
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    while (!done) @(negedge clk);
    checks++;
    if (nnz != vv.size() || nx != xi.size() || ny != yi.size()) begin
      failures++; $display("sizes %0d %0d %0d", nnz, nx, ny);
    end
    cmp("x_idx", BK_OIDX0, xi); cmp("x_ptr", BK_OPTR0, xp);
    cmp("y_idx", BK_PTR, yi);   cmp("y_ptr", BK_OPTR1, yp);
    cmp("z_idx", BK_OIDX1, zi); cmp("value", BK_OVAL, vv);
  endtask

  initial begin
    int t[$], ex[$];
    tb_own = 0; tb_req = '0; in_valid = 0; in_first = 0; in_last = 0; in_keep = '0; in_data = '0;
    y_dim = 4; z_dim = 4;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (64) t.push_back(0);
    t[0] = 1; t[1] = 2; t[26] = 3; t[36] = 4; t[39] = 5; t[51] = 6;
    run(4, 4, 4, t);
    // the printed CSF of the example
    ex = '{0, 1, 2, 3};       cmp("x_idx(paper)", BK_OIDX0, ex);
    ex = '{0, 1, 2, 3, 4};    cmp("x_ptr(paper)", BK_OPTR0, ex);
    ex = '{0, 2, 1, 0};       cmp("y_idx(paper)", BK_PTR, ex);
    ex = '{0, 2, 3, 5, 6};    cmp("y_ptr(paper)", BK_OPTR1, ex);
    ex = '{0, 1, 2, 0, 3, 3}; cmp("z_idx(paper)", BK_OIDX1, ex);
    t.delete();
    for (int p = 0; p < 90; p++) t.push_back(($urandom_range(3) == 0) ? $urandom_range(1, 500) : 0);
    run(3, 5, 6, t);
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
