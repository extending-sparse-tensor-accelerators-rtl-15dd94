// sta_top: sparse tensor accelerator with flexible ACFs and the MINT
// format converter next to it.
//
// Data path (matrix multiply O = A x B, weight stationary):
//   memory --(MCF stream)--> MINT --> global scratchpad
//   memory --(host port, bypass when MCF = ACF)------> global scratchpad
//   scratchpad --(A in its ACF)--> streamer --(tagged bus)--> PE array
//   host --(columns of B in their ACF)--> PE buffers
//   PE array --(Rreg, Creg, Oreg)--> global output buffer --> host
// The scratchpad is shared: the host port, MINT and the streamer each reach
// every bank; per bank and per port direction MINT has priority over the
// streamer, and the streamer over the host. Software (or the host) runs the
// phases one after another: load/convert, load B, stream A, read O.
//
// Sizes follow the paper's evaluated system: 16384 MAC units as 2048 PEs
// of eight 32-bit multipliers, 512 B of PE buffer (128 words), a 512-bit
// bus (16 lanes). The scratchpad and output-buffer depths are this design's
// choices (the paper gives none).
module sta_top
  import sta_pkg::*;
#(
  parameter int unsigned NUM_PE   = 2048,
  parameter int unsigned LANES    = 16,
  parameter int unsigned VEC      = 8,
  parameter int unsigned BUF      = 128,
  parameter int unsigned SP_DEPTH = 4096,
  parameter int unsigned OB_ROWS  = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // host / memory port into the scratchpad
  input  sp_req_t [NBANK-1:0]        host_req,
  output sp_vec_t [NBANK-1:0]        host_rdata,
  // MINT
  input  conv_e                      conv,
  input  logic                       conv_start,
  input  logic [DW-1:0]              k_dim,
  input  logic [DW-1:0]              n_rows,
  input  logic [DW-1:0]              n_cols,
  input  logic [DW-1:0]              bsz,
  input  logic [DW-1:0]              y_dim,
  input  logic [DW-1:0]              z_dim,
  input  logic                       in_valid,
  input  logic                       in_first,
  input  logic                       in_last,
  input  logic [IN_W-1:0]            in_keep,
  input  in_vec_t                    in_data,
  output logic                       mint_busy,
  output logic                       mint_done,
  output logic [DW-1:0]              mint_nnz,
  output logic [DW-1:0]              mint_nx,
  output logic [DW-1:0]              mint_ny,
  // accelerator
  input  a_fmt_e                     a_fmt,
  input  b_fmt_e                     b_fmt,
  input  logic [$clog2(BUF):0]       meta_cnt,
  input  logic [DW-1:0]              m_rows,
  input  logic [DW-1:0]              k_cols,
  input  logic [DW-1:0]              a_nnz,
  input  logic [2:0]                 val_bank,
  input  logic [2:0]                 idx_bank,
  input  logic [2:0]                 row_bank,
  input  logic                       acc_start,
  output logic                       acc_busy,
  output logic                       acc_done,
  output logic [DW-1:0]              acc_beats,
  // stationary B load
  input  logic [$clog2(NUM_PE)-1:0]  ld_pe,
  input  logic                       ld_clear,
  input  logic                       ld_we,
  input  logic [$clog2(BUF)-1:0]     ld_addr,
  input  logic                       ld_meta,
  input  logic [DW-1:0]              ld_data,
  input  logic                       ld_col_we,
  input  logic [DW-1:0]              ld_col,
  // output buffer
  input  logic                       ob_clear,
  input  logic                       ob_rd_en,
  input  logic [$clog2(NUM_PE)-1:0]  ob_rd_bank,
  input  logic [$clog2(OB_ROWS)-1:0] ob_rd_row,
  output logic [DW-1:0]              ob_rd_data,
  output logic                       ob_busy
);
  sp_req_t [NBANK-1:0] mint_req, str_req, sp_req;
  sp_vec_t [NBANK-1:0] sp_rdata;

  always_comb begin
    for (int b = 0; b < NBANK; b++) begin
      sp_req[b] = host_req[b];
      if (str_req[b].re) begin
        sp_req[b].re    = 1'b1;
        sp_req[b].raddr = str_req[b].raddr;
      end
      if (mint_req[b].re) begin
        sp_req[b].re    = 1'b1;
        sp_req[b].raddr = mint_req[b].raddr;
      end
      if (mint_req[b].we) begin
        sp_req[b].we    = 1'b1;
        sp_req[b].waddr = mint_req[b].waddr;
        sp_req[b].wmask = mint_req[b].wmask;
        sp_req[b].wdata = mint_req[b].wdata;
      end
    end
  end
  assign host_rdata = sp_rdata;

  scratchpad #(.DEPTH(SP_DEPTH)) u_sp (.clk, .req(sp_req), .rdata(sp_rdata));

  mint u_mint (
    .clk, .rst_n, .conv, .start(conv_start), .k_dim, .n_rows, .n_cols, .bsz,
    .y_dim, .z_dim, .in_valid, .in_first, .in_last, .in_keep, .in_data,
    .sp_req(mint_req), .sp_rdata, .busy(mint_busy), .done(mint_done),
    .nnz(mint_nnz), .nx(mint_nx), .ny(mint_ny));

  logic              bus_valid, flush;
  lane_t [LANES-1:0] bus_lane;

  acc_streamer #(.LANES(LANES), .VEC(VEC)) u_str (
    .clk, .rst_n, .start(acc_start), .a_fmt, .m_rows, .k_cols, .a_nnz,
    .val_bank, .idx_bank, .row_bank, .sp_req(str_req), .sp_rdata,
    .bus_valid, .bus_lane, .flush, .busy(acc_busy), .done(acc_done),
    .beats(acc_beats));

  logic [NUM_PE-1:0]         pe_ov;
  logic [NUM_PE-1:0][DW-1:0] pe_or, pe_oc, pe_oval;

  pe_array #(.NUM_PE(NUM_PE), .LANES(LANES), .VEC(VEC), .BUF(BUF)) u_pes (
    .clk, .rst_n, .a_fmt, .b_fmt, .meta_cnt, .ld_pe, .ld_clear, .ld_we,
    .ld_addr, .ld_meta, .ld_data, .ld_col_we, .ld_col, .bus_valid, .bus_lane,
    .flush, .out_valid(pe_ov), .out_row(pe_or), .out_col(pe_oc),
    .out_val(pe_oval));

  output_buffer #(.NUM_PE(NUM_PE), .ROWS(OB_ROWS)) u_ob (
    .clk, .rst_n, .clear(ob_clear), .wr_valid(pe_ov), .wr_row(pe_or),
    .wr_col(pe_oc), .wr_val(pe_oval), .rd_en(ob_rd_en), .rd_bank(ob_rd_bank),
    .rd_row(ob_rd_row), .rd_data(ob_rd_data), .busy(ob_busy));
endmodule
