// tb_csr_to_bsr: converts the paper's 8 x 8 example to 2 x 2 BSR (expected,
// as printed: values a b c d e f g 0 h i 0 j, col_id 1 3 0, row_ptr
// 0 1 2 3 3) and a random 13 x 12 matrix to 3 x 3 BSR with a ragged last
// row block, checked against a reference conversion with blocks numbered
// in first-touch order.
module tb_csr_to_bsr;
  import sta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [DW-1:0] nblocks;
  logic [DW-1:0] n_rows, bsz;
  ps_req_t ps_req; logic ps_valid; ps_vec_t ps_data;
  dm_req_t dm_req; logic dm_valid; dm_vec_t dm_quo, dm_rem;
  sp_req_t [NBANK-1:0] dut_req, tb_req, req;
  sp_vec_t [NBANK-1:0] rdata;
  logic tb_own;

  csr_to_bsr dut (.clk, .rst_n, .start, .n_rows, .bsz, .sp_req(dut_req), .sp_rdata(rdata),
    .ps_req, .ps_valid, .ps_data, .dm_req, .dm_valid, .dm_quo, .dm_rem, .busy, .done, .nblocks);
  prefix_sum #(.N(PS_N)) u_ps (.clk, .rst_n, .in_valid(ps_req.valid), .in_clear(ps_req.clear),
    .in_data(ps_req.data), .out_valid(ps_valid), .out_data(ps_data));
  par_divmod #(.N(DM_N)) u_dm (.clk, .rst_n, .in_valid(dm_req.valid), .dividend(dm_req.dividend),
    .divisor(dm_req.divisor), .out_valid(dm_valid), .quotient(dm_quo), .remainder(dm_rem));
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

  task automatic convert(input int m, input int b, input int val[$], input int col[$], input int rp[$]);
    int bval[$], bcol[$], brp[$], idx[int], nb, cnt;
    logic [DW-1:0] v;
    // reference
    nb = 0; brp.push_back(0);
    for (int r0 = 0; r0 < m; r0 += b) begin
      idx.delete(); cnt = 0;
      for (int r = r0; r < r0 + b && r < m; r++)
        for (int i = rp[r]; i < rp[r+1]; i++) begin
          if (!idx.exists(col[i] / b)) begin
            idx[col[i] / b] = nb; nb++; cnt++; bcol.push_back(col[i] / b);
            repeat (b * b) bval.push_back(0);
          end
          bval[idx[col[i] / b] * b * b + (r - r0) * b + col[i] % b] = val[i];
        end
      brp.push_back(brp[$] + cnt);
    end
    for (int i = 0; i < val.size(); i++) begin wr(BK_VAL, i, val[i]); wr(BK_IDX, i, col[i]); end
    for (int i = 0; i <= m; i++) wr(BK_PTR, i, rp[i]);
    // stale data in the output bank must be overwritten by the zero fill
    for (int i = 0; i < bval.size(); i++) wr(BK_OVAL, i, 32'hdead);
    n_rows = m; bsz = b;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int i = 0; i < bval.size(); i++) begin
      rd(BK_OVAL, i, v); checks++; if (v != bval[i]) begin failures++; $display("val %0d: %0d want %0d", i, v, bval[i]); end
    end
    for (int i = 0; i < bcol.size(); i++) begin
      rd(BK_OIDX1, i, v); checks++; if (v != bcol[i]) begin failures++; $display("col %0d: %0d want %0d", i, v, bcol[i]); end
    end
    for (int i = 0; i < brp.size(); i++) begin
      rd(BK_OPTR0, i, v); checks++; if (v != brp[i]) begin failures++; $display("row_ptr %0d: %0d want %0d", i, v, brp[i]); end
    end
  endtask

  initial begin
    int val[$], col[$], rp[$];
    tb_own = 0; tb_req = '0; start = 0; n_rows = 0; bsz = 2;
    repeat (3) @(posedge clk); rst_n = 1;
    val = '{1, 2, 3, 4, 5, 6, 7, 8, 9, 10};
    col = '{2, 3, 2, 3, 6, 7, 6, 0, 1, 1};
    rp  = '{0, 2, 4, 6, 7, 9, 10, 10, 10};
    convert(8, 2, val, col, rp);
    val.delete(); col.delete(); rp.delete(); rp.push_back(0);
    for (int r = 0; r < 13; r++) begin
      for (int c = 0; c < 12; c++)
        if ($urandom_range(4) == 0) begin val.push_back($urandom_range(1, 9999)); col.push_back(c); end
      rp.push_back(val.size());
    end
    convert(13, 3, val, col, rp);
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
