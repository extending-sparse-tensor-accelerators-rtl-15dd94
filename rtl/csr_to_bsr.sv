// csr_to_bsr: CSR to BSR (block CSR, B x B blocks) conversion.
//
// Input CSR in BK_VAL / BK_IDX / BK_PTR as for csr_to_csc. Output BSR:
// block values (B*B words per block, row-major inside the block, zeros where
// the block is incomplete) in BK_OVAL, block column ids in BK_OIDX1 and the
// block-row pointer in BK_OPTR0. The controller follows the paper:
//   1  iterate through the B rows of one row block;
//   2  the shared div/mod unit gives block column col/B and offset col%B;
//      a register flag per block column tells whether the block has
//      already been initialised in this row block;
//   3  a new block gets the next block number, its block column is appended
//      to col_id, its B*B values are zero-filled and the block count of the
//      row block is incremented; the element is then written to its place;
//   4  repeat for the next row block;
//   5  the per-row-block counts in row_ptr go through the shared prefix sum.
// Blocks within a row block are numbered in the order they are first met
// (which reproduces the paper's example); this is this design's choice, as
// are MAX_BCOLS and the sequencing (one element per about DM_LAT+6 cycles,
// as each element waits for its div/mod result).
module csr_to_bsr
  import sta_pkg::*;
#(
  parameter int unsigned MAX_BCOLS = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [DW-1:0]       n_rows,
  input  logic [DW-1:0]       bsz,
  output sp_req_t [NBANK-1:0] sp_req,
  input  sp_vec_t [NBANK-1:0] sp_rdata,
  output ps_req_t             ps_req,
  input  logic                ps_valid,
  input  ps_vec_t             ps_data,
  output dm_req_t             dm_req,
  input  logic                dm_valid,
  input  dm_vec_t             dm_quo,
  input  dm_vec_t             dm_rem,
  output logic                busy,
  output logic                done,
  output logic [DW-1:0]       nblocks
);
  localparam int unsigned BCW = $clog2(MAX_BCOLS);

  typedef enum logic [3:0] {
    S_IDLE, S_RB_START, S_ROW_RD, S_ROW_W, S_EL_CHK, S_EL_RD, S_EL_W,
    S_DM_WAIT, S_FLAG, S_ZFILL, S_VAL_WR, S_RB_END, S_FINAL, S_SCAN, S_SCAN_W
  } state_e;

  state_e        st;
  logic [DW-1:0] rb, rb_row0, r, e, e_end, val, bc, cm, blk, nblk, blk_cnt;
  logic [DW-1:0] zf_ptr, zf_end, bb;
  logic [MAX_BCOLS-1:0]          flag;
  logic [MAX_BCOLS-1:0][DW-1:0]  bidx;

  logic    scan_start, scan_busy, scan_done;
  sp_req_t scan_req;
  ptr_scan #(.BANK(BK_OPTR0)) u_scan (
    .clk, .rst_n, .start(scan_start), .len(rb + 1'b1),
    .rdata(sp_rdata[BK_OPTR0]), .req(scan_req), .ps_req, .ps_valid,
    .ps_data, .busy(scan_busy), .done(scan_done));
  assign scan_start = (st == S_SCAN);

  always_comb begin
    dm_req = '0;
    dm_req.valid       = (st == S_EL_W);
    dm_req.dividend[0] = sp_rdata[BK_IDX][0];
    dm_req.divisor[0]  = bsz;
  end

  always_comb begin
    sp_req = '0;
    unique case (st)
      S_ROW_RD: begin
        sp_req[BK_PTR].re    = 1'b1;
        sp_req[BK_PTR].raddr = SP_AW'(r);
      end
      S_EL_RD: begin
        sp_req[BK_IDX].re    = 1'b1;
        sp_req[BK_IDX].raddr = SP_AW'(e);
        sp_req[BK_VAL].re    = 1'b1;
        sp_req[BK_VAL].raddr = SP_AW'(e);
      end
      S_FLAG: if (!flag[BCW'(bc)]) begin
        sp_req[BK_OIDX1].we       = 1'b1;
        sp_req[BK_OIDX1].waddr    = SP_AW'(nblk);
        sp_req[BK_OIDX1].wmask[0] = 1'b1;
        sp_req[BK_OIDX1].wdata[0] = bc;
      end
      S_ZFILL: begin
        sp_req[BK_OVAL].we    = 1'b1;
        sp_req[BK_OVAL].waddr = SP_AW'(zf_ptr);
        for (int i = 0; i < SPL; i++)
          sp_req[BK_OVAL].wmask[i] = (zf_ptr + DW'(i) < zf_end);
      end
      S_VAL_WR: begin
        sp_req[BK_OVAL].we       = 1'b1;
        sp_req[BK_OVAL].waddr    = SP_AW'(blk * bb + (r - rb_row0) * bsz + cm);
        sp_req[BK_OVAL].wmask[0] = 1'b1;
        sp_req[BK_OVAL].wdata[0] = val;
      end
      S_RB_END: begin
        sp_req[BK_OPTR0].we       = 1'b1;
        sp_req[BK_OPTR0].waddr    = SP_AW'(rb + 1'b1);
        sp_req[BK_OPTR0].wmask[0] = 1'b1;
        sp_req[BK_OPTR0].wdata[0] = blk_cnt;
      end
      S_FINAL: begin
        sp_req[BK_OPTR0].we       = 1'b1;
        sp_req[BK_OPTR0].waddr    = '0;
        sp_req[BK_OPTR0].wmask[0] = 1'b1;
      end
      S_SCAN, S_SCAN_W: sp_req[BK_OPTR0] = scan_req;
      default: ;
    endcase
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; rb <= '0; rb_row0 <= '0; r <= '0; e <= '0; e_end <= '0;
      val <= '0; bc <= '0; cm <= '0; blk <= '0; nblk <= '0; blk_cnt <= '0;
      zf_ptr <= '0; zf_end <= '0; bb <= '0; flag <= '0; bidx <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          rb <= '0; rb_row0 <= '0; nblk <= '0; bb <= bsz * bsz;
          st <= S_RB_START;
        end
        S_RB_START: begin
          if (rb_row0 >= n_rows) st <= S_FINAL;
          else begin
            flag    <= '0;
            blk_cnt <= '0;
            r       <= rb_row0;
            st      <= S_ROW_RD;
          end
        end
        S_ROW_RD: st <= S_ROW_W;
        S_ROW_W: begin
          e     <= sp_rdata[BK_PTR][0];
          e_end <= sp_rdata[BK_PTR][1];
          st    <= S_EL_CHK;
        end
        S_EL_CHK: begin
          if (e >= e_end) begin
            r <= r + 1'b1;
            if (r + 1'b1 >= rb_row0 + bsz || r + 1'b1 >= n_rows) st <= S_RB_END;
            else st <= S_ROW_RD;
          end else st <= S_EL_RD;
        end
        S_EL_RD: st <= S_EL_W;
        S_EL_W: begin
          val <= sp_rdata[BK_VAL][0];
          st  <= S_DM_WAIT;
        end
        S_DM_WAIT: if (dm_valid) begin
          bc <= dm_quo[0];
          cm <= dm_rem[0];
          st <= S_FLAG;
        end
        S_FLAG: begin
          if (flag[BCW'(bc)]) begin
            blk <= bidx[BCW'(bc)];
            st  <= S_VAL_WR;
          end else begin
            flag[BCW'(bc)] <= 1'b1;
            bidx[BCW'(bc)] <= nblk;
            blk     <= nblk;
            nblk    <= nblk + 1'b1;
            blk_cnt <= blk_cnt + 1'b1;
            zf_ptr  <= nblk * bb;
            zf_end  <= nblk * bb + bb;
            st      <= S_ZFILL;
          end
        end
        S_ZFILL: begin
          zf_ptr <= zf_ptr + SPL;
          if (zf_ptr + SPL >= zf_end) st <= S_VAL_WR;
        end
        S_VAL_WR: begin
          e  <= e + 1'b1;
          st <= S_EL_CHK;
        end
        S_RB_END: begin
          rb      <= rb + 1'b1;
          rb_row0 <= rb_row0 + bsz;
          st      <= S_RB_START;
        end
        S_FINAL:  st <= S_SCAN;
        S_SCAN:   st <= S_SCAN_W;
        S_SCAN_W: if (scan_done) begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_bcol_range: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_FLAG) |-> (bc < MAX_BCOLS));
  assign nblocks = nblk;
endmodule
