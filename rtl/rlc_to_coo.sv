// rlc_to_coo: streaming RLC to COO conversion of an M x K matrix.
//
// RLC alternates a run (the number of zeros before a nonzero) with a level
// (the nonzero). A 512-bit beat carries up to IN_W/2 = 8 (run, level) pairs
// in words (2i, 2i+1). The pipeline follows the paper step by step:
//   1. +1 adders add one to every run except the very first one of the
//      matrix, so each entry becomes the distance to the previous nonzero;
//   2. the shared prefix-sum unit turns the distances into linear positions
//      (it carries the running total from beat to beat);
//   3. the shared parallel div/mod units give row_id = pos / K and
//      col_id = pos % K;
//   4. the levels, delayed to meet their coordinates, and the coordinates
//      are written to the value, row_id and col_id banks.
// One beat is accepted every cycle; a beat's results are written
// PS_LAT + DM_LAT + 1 cycles after it enters. `done` pulses once the beat
// flagged `in_last` has been written; `nnz` is then the element count.
//
// Interface choices of this design: kept pairs must form a prefix of the
// beat (checked by an assertion); outputs go to BK_OVAL, BK_OIDX0 (row_id)
// and BK_OIDX1 (col_id) starting at address 0.
module rlc_to_coo
  import sta_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DW-1:0]       k_dim,
  // RLC stream
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic [IN_W-1:0]     in_keep,
  input  in_vec_t             in_data,
  // shared prefix sum and div/mod
  output ps_req_t             ps_req,
  input  logic                ps_valid,
  input  ps_vec_t             ps_data,
  output dm_req_t             dm_req,
  input  logic                dm_valid,
  input  dm_vec_t             dm_quo,
  input  dm_vec_t             dm_rem,
  // scratchpad
  output sp_req_t [NBANK-1:0] sp_req,
  output logic                done,
  output logic [DW-1:0]       nnz
);
  localparam int unsigned NP  = IN_W / 2;      // pairs per beat
  localparam int unsigned DLY = PS_LAT + DM_LAT;

  typedef struct packed {
    logic                valid;
    logic                last;
    logic [NP-1:0]       keep;
    logic [NP-1:0][DW-1:0] level;
  } side_t;

  side_t side_q [DLY+1];
  side_t side_in;

  // step 1: +1 adders, step 2 request
  always_comb begin
    ps_req       = '0;
    ps_req.valid = in_valid;
    ps_req.clear = in_first;
    side_in       = '0;
    side_in.valid = in_valid;
    side_in.last  = in_last;
    for (int i = 0; i < NP; i++) begin
      side_in.keep[i]  = in_keep[2*i+1];
      side_in.level[i] = in_data[2*i+1];
      if (in_keep[2*i+1])
        ps_req.data[i] = in_data[2*i] + ((in_first && i == 0) ? DW'(0) : DW'(1));
    end
  end

  assign side_q[0] = side_in;
  for (genvar d = 0; d < DLY; d++) begin : g_dly
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) side_q[d+1] <= '0;
      else        side_q[d+1] <= side_q[d];
    end
  end

  // step 3: positions into div/mod
  always_comb begin
    dm_req       = '0;
    dm_req.valid = ps_valid;
    for (int i = 0; i < DM_N; i++) begin
      dm_req.dividend[i] = (i < NP) ? ps_data[i] : '0;
      dm_req.divisor[i]  = k_dim;
    end
  end

  // step 4: write value / row_id / col_id
  side_t        s_out;
  logic [DW-1:0] wptr;
  logic [$clog2(NP):0] cnt;
  assign s_out = side_q[DLY];

  always_comb begin
    cnt = '0;
    for (int i = 0; i < NP; i++) cnt = cnt + s_out.keep[i];
    sp_req = '0;
    for (int i = 0; i < SPL; i++) begin
      if (i < NP) begin
        sp_req[BK_OVAL].wdata[i]  = s_out.level[i];
        sp_req[BK_OIDX0].wdata[i] = dm_quo[i];
        sp_req[BK_OIDX1].wdata[i] = dm_rem[i];
        sp_req[BK_OVAL].wmask[i]  = s_out.keep[i];
        sp_req[BK_OIDX0].wmask[i] = s_out.keep[i];
        sp_req[BK_OIDX1].wmask[i] = s_out.keep[i];
      end
    end
    for (int b = 0; b < NBANK; b++) begin
      if (b == BK_OVAL || b == BK_OIDX0 || b == BK_OIDX1) begin
        sp_req[b].we    = s_out.valid && dm_valid;
        sp_req[b].waddr = SP_AW'(wptr);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (in_valid && in_first) wptr <= '0;
      else if (s_out.valid) begin
        wptr <= wptr + DW'(cnt);
        done <= s_out.last;
      end
    end
  end
  assign nnz = wptr;

  // the pairs kept in a beat must be a prefix
  a_keep_prefix: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> ((side_in.keep & (side_in.keep + 1'b1)) == '0));
  // the side path must meet the div/mod results (the shared units may also
  // carry another converter's work, so only this direction is required)
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    s_out.valid |-> dm_valid);
endmodule
