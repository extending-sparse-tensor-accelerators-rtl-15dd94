// mint: merged format converter (MCF to ACF) placed next to the accelerator.
//
// The four conversion controllers of this design (RLC->COO, CSR->CSC,
// CSR->BSR, Dense->CSF) share one copy of each expensive building block: the
// 32-input highly parallel prefix-sum unit and the eight pipelined div/mod
// units. Only one conversion runs at a time, chosen by `conv`; the selected
// controller drives the shared units and the scratchpad bank ports, the
// others are idle. This is the paper's "merge" organisation (MINT_m):
// building blocks common to several conversions are built once.
//
// Streaming conversions (RLC->COO, Dense->CSF) start with the beat flagged
// in_first and convert while the data arrives from memory; the CSR sourced
// conversions start with `start` and read their input from the scratchpad.
// `done` pulses when the selected conversion has finished. The bank map is
// given in sta_pkg. Scratchpad reads have one cycle of latency.
module mint
  import sta_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  conv_e               conv,
  input  logic                start,
  // dimensions: k_dim (RLC row length), n_rows / n_cols (CSR), bsz (BSR),
  // y_dim / z_dim (dense tensor)
  input  logic [DW-1:0]       k_dim,
  input  logic [DW-1:0]       n_rows,
  input  logic [DW-1:0]       n_cols,
  input  logic [DW-1:0]       bsz,
  input  logic [DW-1:0]       y_dim,
  input  logic [DW-1:0]       z_dim,
  // MCF stream from memory
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic [IN_W-1:0]     in_keep,
  input  in_vec_t             in_data,
  // scratchpad
  output sp_req_t [NBANK-1:0] sp_req,
  input  sp_vec_t [NBANK-1:0] sp_rdata,
  output logic                busy,
  output logic                done,
  output logic [DW-1:0]       nnz,
  output logic [DW-1:0]       nx,
  output logic [DW-1:0]       ny
);
  // ---------------- shared building blocks ----------------
  ps_req_t ps_req, ps_rlc, ps_csc, ps_bsr, ps_csf;
  logic    ps_valid;
  ps_vec_t ps_data;
  dm_req_t dm_req, dm_rlc, dm_bsr, dm_csf;
  logic    dm_valid;
  dm_vec_t dm_quo, dm_rem;

  prefix_sum #(.N(PS_N), .W(DW)) u_ps (
    .clk, .rst_n, .in_valid(ps_req.valid), .in_clear(ps_req.clear),
    .in_data(ps_req.data), .out_valid(ps_valid), .out_data(ps_data));

  par_divmod #(.N(DM_N), .W(DW)) u_dm (
    .clk, .rst_n, .in_valid(dm_req.valid), .dividend(dm_req.dividend),
    .divisor(dm_req.divisor), .out_valid(dm_valid), .quotient(dm_quo),
    .remainder(dm_rem));

  // ---------------- conversion controllers ----------------
  sp_req_t [NBANK-1:0] sp_rlc, sp_csc, sp_bsr, sp_csf;
  logic [DW-1:0] bsr_nblk;
  logic rlc_done, csc_busy, csc_done, bsr_busy, bsr_done, csf_busy, csf_done;
  logic [DW-1:0] rlc_nnz, csf_nnz;
  logic sel_rlc, sel_csf;

  assign sel_rlc = (conv == CONV_RLC_COO);
  assign sel_csf = (conv == CONV_DENSE_CSF);

  rlc_to_coo u_rlc (
    .clk, .rst_n, .k_dim,
    .in_valid(in_valid && sel_rlc), .in_first, .in_last, .in_keep, .in_data,
    .ps_req(ps_rlc), .ps_valid, .ps_data,
    .dm_req(dm_rlc), .dm_valid, .dm_quo, .dm_rem,
    .sp_req(sp_rlc), .done(rlc_done), .nnz(rlc_nnz));

  csr_to_csc u_csc (
    .clk, .rst_n, .start(start && conv == CONV_CSR_CSC), .n_rows, .n_cols,
    .sp_req(sp_csc), .sp_rdata, .ps_req(ps_csc), .ps_valid, .ps_data,
    .busy(csc_busy), .done(csc_done));

  csr_to_bsr u_bsr (
    .clk, .rst_n, .start(start && conv == CONV_CSR_BSR), .n_rows, .bsz,
    .sp_req(sp_bsr), .sp_rdata, .ps_req(ps_bsr), .ps_valid, .ps_data,
    .dm_req(dm_bsr), .dm_valid, .dm_quo, .dm_rem,
    .busy(bsr_busy), .done(bsr_done), .nblocks(bsr_nblk));

  dense_to_csf u_csf (
    .clk, .rst_n, .y_dim, .z_dim,
    .in_valid(in_valid && sel_csf), .in_first, .in_last, .in_keep, .in_data,
    .ps_req(ps_csf), .ps_valid, .ps_data,
    .dm_req(dm_csf), .dm_valid, .dm_quo, .dm_rem,
    .sp_req(sp_csf), .sp_rdata, .busy(csf_busy), .done(csf_done),
    .nnz(csf_nnz), .nx, .ny);

  // ---------------- selection of the active conversion ----------------
  logic rlc_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                             rlc_busy <= 1'b0;
    else if (sel_rlc && in_valid && in_first) rlc_busy <= 1'b1;
    else if (rlc_done)                      rlc_busy <= 1'b0;
  end

  always_comb begin
    ps_req = '0;
    dm_req = '0;
    sp_req = '0;
    busy   = 1'b0;
    done   = 1'b0;
    nnz    = '0;
    unique case (conv)
      CONV_RLC_COO: begin
        ps_req = ps_rlc; dm_req = dm_rlc; sp_req = sp_rlc;
        busy = rlc_busy; done = rlc_done; nnz = rlc_nnz;
      end
      CONV_CSR_CSC: begin
        ps_req = ps_csc; sp_req = sp_csc; busy = csc_busy; done = csc_done;
      end
      CONV_CSR_BSR: begin
        ps_req = ps_bsr; dm_req = dm_bsr; sp_req = sp_bsr;
        busy = bsr_busy; done = bsr_done; nnz = bsr_nblk;
      end
      CONV_DENSE_CSF: begin
        ps_req = ps_csf; dm_req = dm_csf; sp_req = sp_csf;
        busy = csf_busy; done = csf_done; nnz = csf_nnz;
      end
      default: ;
    endcase
  end

  // the conversion type may only change while MINT is idle
  a_conv_stable: assert property (@(posedge clk) disable iff (!rst_n)
    busy |=> $stable(conv));
endmodule
