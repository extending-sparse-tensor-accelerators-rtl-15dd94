// acc_streamer: reads the streamed operand A from the global scratchpad in
// its ACF and packs it into tagged bus beats for the PE array.
//
// Lane layouts (LANES lanes; D = min(VEC, LANES-1), P = min(VEC,
// (LANES-1)/2), T = min(VEC, LANES/3)):
//   Dense A: lanes 0..D-1 data of consecutive columns, lane LANES-1 the
//            row_id generated here; a row of K takes ceil(K/D) beats;
//   CSR A:   up to P (data, col_id) pairs in lanes (2i, 2i+1), lane
//            LANES-1 the common row_id; a row is split into ceil(nnz/P)
//            beats and empty rows send nothing;
//   COO A:   up to T (data, col_id, row_id) triples in lanes 3i..3i+2; all
//            triples of a beat share their row, so a change of row ends the
//            beat.
// With LANES = 5 and VEC = 4 these are the layouts of the paper's 4-PE
// walkthrough (four data and a row_id; two pairs and a row_id; one triple).
// After the last beat one `flush` cycle tells the PEs to send their Oreg.
// Timing: the first read is issued the cycle after `start`; from then on one
// beat leaves per cycle, except for the row_ptr read of every CSR row (two
// cycles). `done` pulses with the flush; `beats` counts the beats sent.
// The scratchpad banks holding A are chosen by val_bank, idx_bank (col_id)
// and row_bank (row_ptr for CSR, row_id for COO). The paper says the row_id
// is generated by a controller and gives the three layouts; the read
// sequencing is this design's.
module acc_streamer
  import sta_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned VEC   = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  a_fmt_e              a_fmt,
  input  logic [DW-1:0]       m_rows,
  input  logic [DW-1:0]       k_cols,
  input  logic [DW-1:0]       a_nnz,      // COO element count
  input  logic [2:0]          val_bank,
  input  logic [2:0]          idx_bank,
  input  logic [2:0]          row_bank,
  output sp_req_t [NBANK-1:0] sp_req,
  input  sp_vec_t [NBANK-1:0] sp_rdata,
  output logic                bus_valid,
  output lane_t [LANES-1:0]   bus_lane,
  output logic                flush,
  output logic                busy,
  output logic                done,
  output logic [DW-1:0]       beats
);
  localparam int unsigned D = (VEC < LANES-1) ? VEC : LANES-1;
  localparam int unsigned P = (VEC < (LANES-1)/2) ? VEC : (LANES-1)/2;
  localparam int unsigned T = (VEC < LANES/3) ? VEC : LANES/3;

  typedef enum logic [2:0] {S_IDLE, S_FIRST, S_PTR_W, S_EMIT, S_FLUSH} state_e;
  state_e st;

  logic [DW-1:0] row, k0, e, e_end;
  sp_vec_t rv, ri, rr;
  assign rv = sp_rdata[val_bank];
  assign ri = sp_rdata[idx_bank];
  assign rr = sp_rdata[row_bank];

  // ---------------- beat formation (state S_EMIT) ----------------
  logic [DW-1:0] n_el;      // elements in this beat
  always_comb begin
    bus_lane = '0;
    n_el     = '0;
    unique case (a_fmt)
      A_DENSE: begin
        n_el = ((k_cols - k0) < D) ? (k_cols - k0) : D;
        for (int i = 0; i < D; i++)
          if (DW'(i) < n_el) bus_lane[i] = '{TAG_DATA, rv[i]};
        bus_lane[LANES-1] = '{TAG_ROW, row};
      end
      A_CSR: begin
        n_el = ((e_end - e) < P) ? (e_end - e) : P;
        for (int i = 0; i < P; i++)
          if (DW'(i) < n_el) begin
            bus_lane[2*i]   = '{TAG_DATA, rv[i]};
            bus_lane[2*i+1] = '{TAG_COL, ri[i]};
          end
        bus_lane[LANES-1] = '{TAG_ROW, row};
      end
      default: begin  // A_COO
        logic stop;
        stop = 1'b0;
        for (int i = 0; i < T; i++) begin
          if (!stop && (e + DW'(i) < a_nnz) && rr[i] == rr[0]) begin
            bus_lane[3*i]   = '{TAG_DATA, rv[i]};
            bus_lane[3*i+1] = '{TAG_COL, ri[i]};
            bus_lane[3*i+2] = '{TAG_ROW, rr[i]};
            n_el = n_el + 1'b1;
          end else stop = 1'b1;
        end
      end
    endcase
  end

  // next position after this beat
  logic [DW-1:0] nrow, nk0, ne;
  logic          last_beat, need_ptr;
  always_comb begin
    nrow = row; nk0 = k0; ne = e + n_el;
    last_beat = 1'b0;
    need_ptr  = 1'b0;
    unique case (a_fmt)
      A_DENSE: begin
        nk0 = k0 + n_el;
        if (nk0 >= k_cols) begin
          nk0  = '0;
          nrow = row + 1'b1;
        end
        last_beat = (nrow >= m_rows);
      end
      A_CSR: begin
        if (ne >= e_end) begin
          nrow      = row + 1'b1;
          need_ptr  = 1'b1;
          last_beat = (nrow >= m_rows);
        end
      end
      default: last_beat = (ne >= a_nnz);
    endcase
  end

  // ---------------- reads ----------------
  always_comb begin
    sp_req = '0;
    if (st == S_FIRST || (st == S_EMIT && !last_beat)) begin
      logic [DW-1:0] r_row, r_k0, r_e;
      logic          r_ptr;
      r_row = (st == S_FIRST) ? '0 : nrow;
      r_k0  = (st == S_FIRST) ? '0 : nk0;
      r_e   = (st == S_FIRST) ? '0 : ne;
      r_ptr = (st == S_FIRST) ? 1'b1 : need_ptr;
      unique case (a_fmt)
        A_DENSE: begin
          sp_req[val_bank].re    = 1'b1;
          sp_req[val_bank].raddr = SP_AW'(r_row * k_cols + r_k0);
        end
        A_CSR: begin
          if (r_ptr) begin
            sp_req[row_bank].re    = 1'b1;
            sp_req[row_bank].raddr = SP_AW'(r_row);
          end else begin
            sp_req[val_bank].re    = 1'b1;
            sp_req[val_bank].raddr = SP_AW'(r_e);
            sp_req[idx_bank].re    = 1'b1;
            sp_req[idx_bank].raddr = SP_AW'(r_e);
          end
        end
        default: begin
          sp_req[val_bank].re    = 1'b1;
          sp_req[val_bank].raddr = SP_AW'(r_e);
          sp_req[idx_bank].re    = 1'b1;
          sp_req[idx_bank].raddr = SP_AW'(r_e);
          sp_req[row_bank].re    = 1'b1;
          sp_req[row_bank].raddr = SP_AW'(r_e);
        end
      endcase
    end else if (st == S_PTR_W && rr[0] != rr[1]) begin
      sp_req[val_bank].re    = 1'b1;
      sp_req[val_bank].raddr = SP_AW'(rr[0]);
      sp_req[idx_bank].re    = 1'b1;
      sp_req[idx_bank].raddr = SP_AW'(rr[0]);
    end else if (st == S_PTR_W && (row + 1'b1) < m_rows) begin
      sp_req[row_bank].re    = 1'b1;          // empty row: next row_ptr
      sp_req[row_bank].raddr = SP_AW'(row + 1'b1);
    end
  end

  assign bus_valid = (st == S_EMIT);
  assign flush     = (st == S_FLUSH);
  assign busy      = (st != S_IDLE);
  assign done      = flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; row <= '0; k0 <= '0; e <= '0; e_end <= '0; beats <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          row <= '0; k0 <= '0; e <= '0; beats <= '0;
          if ((a_fmt == A_COO && a_nnz == 0) || m_rows == 0) st <= S_FLUSH;
          else st <= S_FIRST;
        end
        S_FIRST: st <= (a_fmt == A_CSR) ? S_PTR_W : S_EMIT;
        S_PTR_W: begin
          if (rr[0] != rr[1]) begin
            e     <= rr[0];
            e_end <= rr[1];
            st    <= S_EMIT;
          end else if (row + 1'b1 < m_rows) begin
            row <= row + 1'b1;
          end else st <= S_FLUSH;
        end
        S_EMIT: begin
          beats <= beats + 1'b1;
          row   <= nrow;
          k0    <= nk0;
          e     <= ne;
          if (last_beat)     st <= S_FLUSH;
          else if (need_ptr) st <= S_PTR_W;
        end
        S_FLUSH: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
