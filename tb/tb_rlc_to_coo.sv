// tb_rlc_to_coo: streams the paper's RLC example (an 8 x 8 matrix, K = 8,
// ten nonzeros a..j, four pairs per beat as drawn) and then a random
// 20 x 13 matrix with eight pairs per beat, through rlc_to_coo with the
// shared prefix-sum and div/mod units and a scratchpad. The COO arrays
// read back must match the expected coordinates (for the example, the
// table printed in the paper: rows 0 0 1 1 2 2 3 4 4 5, cols 2 3 2 3 6 7
// 6 0 1 1). The pipeline must deliver `done` PS_LAT+DM_LAT+1 cycles after
// the last beat.
module tb_rlc_to_coo;
  import sta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [DW-1:0] k_dim, nnz;
  logic in_valid, in_first, in_last, done;
  logic [IN_W-1:0] in_keep;
  in_vec_t in_data;
  ps_req_t ps_req; logic ps_valid; ps_vec_t ps_data;
  dm_req_t dm_req; logic dm_valid; dm_vec_t dm_quo, dm_rem;
  sp_req_t [NBANK-1:0] dut_req, tb_req, req;
  sp_vec_t [NBANK-1:0] rdata;
  logic tb_own;

  rlc_to_coo dut (.*, .sp_req(dut_req));
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

  // stream pairs, np per beat; measure done latency
  task automatic stream(input int runs[$], input int lv[$], input int np, input int k);
    int n, t_last, t_done;
    n = runs.size();
    k_dim = k;
    for (int p = 0; p < n; p += np) begin
      @(negedge clk);
      in_valid = 1; in_first = (p == 0); in_last = (p + np >= n);
      in_keep = '0; in_data = '0;
      for (int i = 0; i < np && p + i < n; i++) begin
        in_data[2*i] = runs[p+i]; in_data[2*i+1] = lv[p+i];
        in_keep[2*i] = 1; in_keep[2*i+1] = 1;
      end
    end
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    t_last = $time;
    while (!done) @(negedge clk);
    t_done = $time;
    checks++;
    if ((t_done - t_last) / 10 != PS_LAT + DM_LAT) begin
      failures++; $display("done latency %0d", (t_done - t_last) / 10);
    end
    @(negedge clk);
    checks++;
    if (nnz != n) begin failures++; $display("nnz %0d want %0d", nnz, n); end
  endtask

  task automatic check(input int lv[$], input int rr[$], input int cc[$]);
    logic [DW-1:0] v;
    for (int i = 0; i < lv.size(); i++) begin
      rd(BK_OVAL, i, v);  checks++; if (v != lv[i]) begin failures++; $display("val %0d: %0d", i, v); end
      rd(BK_OIDX0, i, v); checks++; if (v != rr[i]) begin failures++; $display("row %0d: %0d want %0d", i, v, rr[i]); end
      rd(BK_OIDX1, i, v); checks++; if (v != cc[i]) begin failures++; $display("col %0d: %0d want %0d", i, v, cc[i]); end
    end
  endtask

  initial begin
    int runs[$], lv[$], rr[$], cc[$], z;
    tb_own = 0; tb_req = '0; in_valid = 0; in_first = 0; in_last = 0; in_keep = '0; in_data = '0; k_dim = 8;
    repeat (3) @(posedge clk); rst_n = 1;
    // paper example
    runs = '{2, 0, 6, 0, 10, 0, 6, 1, 0, 7};
    lv   = '{1, 2, 3, 4, 5, 6, 7, 8, 9, 10};
    rr   = '{0, 0, 1, 1, 2, 2, 3, 4, 4, 5};
    cc   = '{2, 3, 2, 3, 6, 7, 6, 0, 1, 1};
    stream(runs, lv, 4, 8);
    check(lv, rr, cc);
    // random matrix 20 x 13
    runs.delete(); lv.delete(); rr.delete(); cc.delete(); z = 0;
    for (int r = 0; r < 20; r++)
      for (int c = 0; c < 13; c++)
        if ($urandom_range(3) == 0) begin
          runs.push_back(z); lv.push_back($urandom_range(1, 999)); rr.push_back(r); cc.push_back(c); z = 0;
        end else z++;
    stream(runs, lv, 8, 13);
    check(lv, rr, cc);
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
