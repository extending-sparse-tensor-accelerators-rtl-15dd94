// csr_to_csc: CSR to CSC conversion (a transpose of the compressed matrix).
//
// Input CSR of an M x N matrix in the scratchpad: values in BK_VAL, col_ids
// in BK_IDX, row_ptr (M+1 words) in BK_PTR. Output CSC: values in BK_OVAL,
// row_ids in BK_OIDX0, col_ptr (N+1 words) in BK_OPTR0. The controller walks
// the paper's ten steps:
//   1-3  read col_ids SPL at a time, sort each chunk in the pipelined
//        sorting network and count every distinct column in the cluster
//        counter;
//   4    in-place accumulation: col_ptr[c+1] += count (read, then write);
//   5    prefix sum of col_ptr through the shared prefix-sum unit;
//   6-7  iterate the CSR entries: col_ptr[col_id] gives the CSC slot, which
//        receives the value, and col_ptr[col_id] is incremented;
//   8    row-id logic: a row counter advanced against row_ptr gives the
//        row of every entry;
//   9-10 after the walk col_ptr[c] holds the start of column c+1, so it is
//        shifted up by one word and col_ptr[0] cleared.
// `done` pulses when the CSC is complete. Memory reads take one cycle, so
// step 4 costs 2 cycles per distinct column of a chunk, steps 6-8 3 cycles
// per nonzero plus 2 per row, step 10 2 cycles per column. The sequencing
// and these costs are this design's; the steps follow the paper.
module csr_to_csc
  import sta_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [DW-1:0]       n_rows,
  input  logic [DW-1:0]       n_cols,
  output sp_req_t [NBANK-1:0] sp_req,
  input  sp_vec_t [NBANK-1:0] sp_rdata,
  output ps_req_t             ps_req,
  input  logic                ps_valid,
  input  ps_vec_t             ps_data,
  output logic                busy,
  output logic                done
);
  typedef enum logic [4:0] {
    S_IDLE, S_NNZ_RD, S_NNZ_W, S_CLR, S_CNT_RD, S_CNT_FEED, S_CNT_WAIT,
    S_ACC, S_ACC_W, S_SCAN, S_SCAN_W, S_ROW_RD, S_ROW_W, S_ROW_CHK,
    S_EL_RD, S_EL_W, S_PTR_W, S_FIX_RD, S_FIX_W, S_FIX0
  } state_e;

  state_e        st;
  logic [DW-1:0] nnz, c0, clr_ptr, row, row_end, idx, col, val, fix_c;

  // sorting network and cluster counter (steps 2, 3)
  logic                  srt_in_v, srt_out_v, cc_out_v;
  logic [SPL-1:0]        srt_keep_in, srt_keep, cc_uv;
  sp_vec_t               srt_key, cc_key;
  logic [SPL-1:0][$clog2(SPL):0] cc_cnt;
  logic [SPL-1:0]        uv;
  sp_vec_t               uk;
  logic [SPL-1:0][$clog2(SPL):0] ucnt;

  always_comb
    for (int i = 0; i < SPL; i++) srt_keep_in[i] = (c0 + DW'(i) < nnz);
  assign srt_in_v = (st == S_CNT_FEED);

  sort_network #(.N(SPL), .W(DW)) u_sort (
    .clk, .rst_n, .in_valid(srt_in_v), .in_keep(srt_keep_in),
    .in_key(sp_rdata[BK_IDX]), .out_valid(srt_out_v), .out_keep(srt_keep),
    .out_key(srt_key));

  cluster_counter #(.N(SPL), .W(DW)) u_cc (
    .clk, .rst_n, .in_valid(srt_out_v), .in_keep(srt_keep), .in_key(srt_key),
    .out_valid(cc_out_v), .uniq_valid(cc_uv), .uniq_key(cc_key),
    .uniq_cnt(cc_cnt));

  // next distinct column of the chunk still to accumulate
  logic            has_u;
  logic [$clog2(SPL)-1:0] uj;
  always_comb begin
    has_u = 1'b0;
    uj    = '0;
    for (int i = SPL-1; i >= 0; i--)
      if (uv[i]) begin has_u = 1'b1; uj = i[$clog2(SPL)-1:0]; end
  end

  // prefix sum of col_ptr (step 5)
  logic    scan_start, scan_busy, scan_done;
  sp_req_t scan_req;
  ptr_scan #(.BANK(BK_OPTR0)) u_scan (
    .clk, .rst_n, .start(scan_start), .len(n_cols + 1'b1),
    .rdata(sp_rdata[BK_OPTR0]), .req(scan_req), .ps_req, .ps_valid,
    .ps_data, .busy(scan_busy), .done(scan_done));
  assign scan_start = (st == S_SCAN);

  always_comb begin
    sp_req = '0;
    unique case (st)
      S_NNZ_RD: begin
        sp_req[BK_PTR].re    = 1'b1;
        sp_req[BK_PTR].raddr = SP_AW'(n_rows);
      end
      S_CLR: begin
        sp_req[BK_OPTR0].we    = 1'b1;
        sp_req[BK_OPTR0].waddr = SP_AW'(clr_ptr);
        for (int i = 0; i < SPL; i++)
          sp_req[BK_OPTR0].wmask[i] = (clr_ptr + DW'(i) <= n_cols);
      end
      S_CNT_RD: begin
        sp_req[BK_IDX].re    = 1'b1;
        sp_req[BK_IDX].raddr = SP_AW'(c0);
      end
      S_ACC: if (has_u) begin
        sp_req[BK_OPTR0].re    = 1'b1;
        sp_req[BK_OPTR0].raddr = SP_AW'(uk[uj] + 1'b1);
      end
      S_ACC_W: begin
        sp_req[BK_OPTR0].we       = 1'b1;
        sp_req[BK_OPTR0].waddr    = SP_AW'(uk[uj] + 1'b1);
        sp_req[BK_OPTR0].wmask[0] = 1'b1;
        sp_req[BK_OPTR0].wdata[0] = sp_rdata[BK_OPTR0][0] + DW'(ucnt[uj]);
      end
      S_SCAN, S_SCAN_W: sp_req[BK_OPTR0] = scan_req;
      S_ROW_RD: begin
        sp_req[BK_PTR].re    = 1'b1;
        sp_req[BK_PTR].raddr = SP_AW'(row + 1'b1);
      end
      S_EL_RD: begin
        sp_req[BK_IDX].re    = 1'b1;
        sp_req[BK_IDX].raddr = SP_AW'(idx);
        sp_req[BK_VAL].re    = 1'b1;
        sp_req[BK_VAL].raddr = SP_AW'(idx);
      end
      S_EL_W: begin
        sp_req[BK_OPTR0].re    = 1'b1;
        sp_req[BK_OPTR0].raddr = SP_AW'(sp_rdata[BK_IDX][0]);
      end
      S_PTR_W: begin
        sp_req[BK_OVAL].we        = 1'b1;
        sp_req[BK_OVAL].waddr     = SP_AW'(sp_rdata[BK_OPTR0][0]);
        sp_req[BK_OVAL].wmask[0]  = 1'b1;
        sp_req[BK_OVAL].wdata[0]  = val;
        sp_req[BK_OIDX0].we       = 1'b1;
        sp_req[BK_OIDX0].waddr    = SP_AW'(sp_rdata[BK_OPTR0][0]);
        sp_req[BK_OIDX0].wmask[0] = 1'b1;
        sp_req[BK_OIDX0].wdata[0] = row;
        sp_req[BK_OPTR0].we       = 1'b1;
        sp_req[BK_OPTR0].waddr    = SP_AW'(col);
        sp_req[BK_OPTR0].wmask[0] = 1'b1;
        sp_req[BK_OPTR0].wdata[0] = sp_rdata[BK_OPTR0][0] + 1'b1;
      end
      S_FIX_RD: begin
        sp_req[BK_OPTR0].re    = 1'b1;
        sp_req[BK_OPTR0].raddr = SP_AW'(fix_c);
      end
      S_FIX_W: begin
        sp_req[BK_OPTR0].we       = 1'b1;
        sp_req[BK_OPTR0].waddr    = SP_AW'(fix_c + 1'b1);
        sp_req[BK_OPTR0].wmask[0] = 1'b1;
        sp_req[BK_OPTR0].wdata[0] = sp_rdata[BK_OPTR0][0];
      end
      S_FIX0: begin
        sp_req[BK_OPTR0].we       = 1'b1;
        sp_req[BK_OPTR0].waddr    = '0;
        sp_req[BK_OPTR0].wmask[0] = 1'b1;
        sp_req[BK_OPTR0].wdata[0] = '0;
      end
      default: ;
    endcase
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; nnz <= '0; c0 <= '0; clr_ptr <= '0; row <= '0;
      row_end <= '0; idx <= '0; col <= '0; val <= '0; fix_c <= '0;
      uv <= '0; uk <= '0; ucnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE:   if (start) st <= S_NNZ_RD;
        S_NNZ_RD: st <= S_NNZ_W;
        S_NNZ_W: begin
          nnz     <= sp_rdata[BK_PTR][0];
          clr_ptr <= '0;
          st      <= S_CLR;
        end
        S_CLR: begin
          clr_ptr <= clr_ptr + SPL;
          if (clr_ptr + SPL > n_cols) begin
            c0 <= '0;
            st <= (nnz == 0) ? S_SCAN : S_CNT_RD;
          end
        end
        S_CNT_RD:   st <= S_CNT_FEED;
        S_CNT_FEED: st <= S_CNT_WAIT;
        S_CNT_WAIT: if (cc_out_v) begin
          uv <= cc_uv; uk <= cc_key; ucnt <= cc_cnt;
          st <= S_ACC;
        end
        S_ACC: begin
          if (has_u) st <= S_ACC_W;
          else begin
            c0 <= c0 + SPL;
            st <= (c0 + SPL >= nnz) ? S_SCAN : S_CNT_RD;
          end
        end
        S_ACC_W: begin
          uv[uj] <= 1'b0;
          st     <= S_ACC;
        end
        S_SCAN:   st <= S_SCAN_W;
        S_SCAN_W: if (scan_done) begin
          row <= '0; idx <= '0;
          st  <= S_ROW_RD;
        end
        S_ROW_RD: st <= S_ROW_W;
        S_ROW_W: begin
          row_end <= sp_rdata[BK_PTR][0];
          st      <= S_ROW_CHK;
        end
        S_ROW_CHK: begin
          if (idx >= nnz) begin
            fix_c <= n_cols - 1'b1;
            st    <= S_FIX_RD;
          end else if (idx >= row_end) begin
            row <= row + 1'b1;
            st  <= S_ROW_RD;
          end else st <= S_EL_RD;
        end
        S_EL_RD: st <= S_EL_W;
        S_EL_W: begin
          col <= sp_rdata[BK_IDX][0];
          val <= sp_rdata[BK_VAL][0];
          st  <= S_PTR_W;
        end
        S_PTR_W: begin
          idx <= idx + 1'b1;
          st  <= S_ROW_CHK;
        end
        S_FIX_RD: st <= S_FIX_W;
        S_FIX_W: begin
          if (fix_c == 0) st <= S_FIX0;
          else begin
            fix_c <= fix_c - 1'b1;
            st    <= S_FIX_RD;
          end
        end
        S_FIX0: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
