// tb_acc_streamer: the paper's walkthrough setting (bus of five lanes,
// four multipliers per PE) with its 4 x 8 matrix A (nonzeros A, B, C in
// row 0 at columns 0, 2, 4 and H in row 3 at column 5). A is placed in the
// scratchpad as dense, CSR and COO and streamed; the beat counts must be
// the paper's 8, 3 and 4, and the beats, decoded back by the testbench,
// must rebuild A. A second round streams a random 7 x 19 A on the
// 16-lane, 8-wide bus and checks the rebuilt matrix and the beat count.
module tb_acc_streamer;
  import sta_pkg::*;
  localparam int LANES = 5, VEC = 4;
  localparam int L2 = 16, V2 = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, start2, bus_valid, bus_valid2, flush, flush2, busy, busy2, done, done2;
  a_fmt_e a_fmt;
  logic [DW-1:0] m_rows, k_cols, a_nnz, beats, beats2;
  lane_t [LANES-1:0] bus_lane;
  lane_t [L2-1:0] bus_lane2;
  sp_req_t [NBANK-1:0] s_req, s_req2, tb_req, req;
  sp_vec_t [NBANK-1:0] rdata;
  logic tb_own;

  acc_streamer #(.LANES(LANES), .VEC(VEC)) dut (.clk, .rst_n, .start, .a_fmt, .m_rows, .k_cols, .a_nnz,
    .val_bank(3'(BK_VAL)), .idx_bank(3'(BK_IDX)), .row_bank(3'(BK_PTR)), .sp_req(s_req), .sp_rdata(rdata),
    .bus_valid, .bus_lane, .flush, .busy, .done, .beats);
  acc_streamer #(.LANES(L2), .VEC(V2)) dut2 (.clk, .rst_n, .start(start2), .a_fmt, .m_rows, .k_cols, .a_nnz,
    .val_bank(3'(BK_VAL)), .idx_bank(3'(BK_IDX)), .row_bank(3'(BK_PTR)), .sp_req(s_req2), .sp_rdata(rdata),
    .bus_valid(bus_valid2), .bus_lane(bus_lane2), .flush(flush2), .busy(busy2), .done(done2), .beats(beats2));
  always_comb begin
    req = tb_own ? tb_req : (busy2 ? s_req2 : s_req);
  end
  scratchpad #(.DEPTH(1024)) u_sp (.clk, .req, .rdata);

  task automatic wr(input int b, input int a, input logic [DW-1:0] v);
    @(negedge clk); tb_own = 1; tb_req = '0; tb_req[b].we = 1; tb_req[b].waddr = SP_AW'(a);
    tb_req[b].wmask = 1; tb_req[b].wdata[0] = v;
    @(negedge clk); tb_own = 0; tb_req = '0;
  endtask

  int A [32][32];
  int R [32][32];
  int nb;

  // decode beats (either streamer) back into R
  int kacc, lastrow;
  task automatic decode(input lane_t l [], input a_fmt_e f);
    int row, nd;
    row = -1; nd = 0;
    foreach (l[j]) if (l[j].tag == TAG_ROW) row = l[j].val;
    if (row != lastrow) kacc = 0;
    foreach (l[j]) if (l[j].tag == TAG_DATA) begin
      if (f == A_DENSE) R[row][kacc + nd] = l[j].val;
      else R[row][l[j+1].val] = l[j].val;
      nd++;
    end
    kacc += nd; lastrow = row;
  endtask

  always @(negedge clk) if (rst_n && bus_valid) begin
    lane_t l [];
    l = new[LANES];
    foreach (l[j]) l[j] = bus_lane[j];
    decode(l, a_fmt); nb++;
  end
  always @(negedge clk) if (rst_n && bus_valid2) begin
    lane_t l [];
    l = new[L2];
    foreach (l[j]) l[j] = bus_lane2[j];
    decode(l, a_fmt); nb++;
  end

  task automatic run(input int M, input int K, input int want_beats, input bit wide);
    for (int f = 0; f < 3; f++) begin
      int e, expb;
      a_fmt = a_fmt_e'(f);
      // place A
      e = 0;
      for (int r = 0; r < M; r++) begin
        if (f == 1) wr(BK_PTR, r, e);
        for (int k = 0; k < K; k++) begin
          if (f == 0) wr(BK_VAL, r * K + k, A[r][k]);
          else if (A[r][k] != 0) begin
            wr(BK_VAL, e, A[r][k]); wr(BK_IDX, e, k);
            if (f == 2) wr(BK_PTR, e, r);
            e++;
          end
        end
      end
      if (f == 1) wr(BK_PTR, M, e);
      m_rows = M; k_cols = K; a_nnz = e;
      for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) R[r][k] = 0;
      nb = 0; lastrow = -1; kacc = 0;
      @(negedge clk); if (wide) start2 = 1; else start = 1;
      @(negedge clk); start = 0; start2 = 0;
      while (!(wide ? done2 : done)) @(negedge clk);
      @(negedge clk);
      for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) begin
        checks++;
        if (R[r][k] != A[r][k]) begin failures++; $display("fmt %0d A[%0d][%0d] %0d want %0d", f, r, k, R[r][k], A[r][k]); end
      end
      if (!wide) begin
        expb = (f == 0) ? 8 : (f == 1) ? 3 : 4;   // paper: 8, 3 and 4 cycles
        checks++;
        if (nb != expb || beats != expb) begin failures++; $display("fmt %0d beats %0d want %0d", f, nb, expb); end
      end else begin
        int P, T, cnt;
        P = 7; T = 5;
        expb = 0;
        for (int r = 0; r < M; r++) begin
          cnt = 0;
          for (int k = 0; k < K; k++) if (A[r][k] != 0) cnt++;
          expb += (f == 0) ? (K + 7) / 8 : (f == 1) ? (cnt + P - 1) / P : (cnt + T - 1) / T;
        end
        checks++;
        if (nb != expb) begin failures++; $display("wide fmt %0d beats %0d want %0d", f, nb, expb); end
      end
    end
  endtask

  initial begin
    tb_own = 0; tb_req = '0; start = 0; start2 = 0; a_fmt = A_DENSE; m_rows = 0; k_cols = 0; a_nnz = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 32; r++) for (int k = 0; k < 32; k++) A[r][k] = 0;
    A[0][0] = 'hA; A[0][2] = 'hB; A[0][4] = 'hC; A[3][5] = 'h11;
    run(4, 8, 0, 0);
    for (int r = 0; r < 7; r++) for (int k = 0; k < 19; k++)
      A[r][k] = (r == 4 || $urandom_range(2) != 0) ? 0 : $urandom_range(1, 99);
    run(7, 19, 0, 1);
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
