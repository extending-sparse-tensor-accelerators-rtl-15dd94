// pe: weight-stationary processing element extended for several ACFs.
//
// The PE keeps a slice of the stationary operand B (one column) in its
// buffer and multiplies it with the elements of A broadcast on the bus.
//  - Buffer: BUF entries of 32 bits, each with a flag that marks it as
//    metadata or data. Dense B fills entries 0..K-1 with data. CSC B keeps
//    the row indices of its nonzeros in a metadata region (entries
//    0..meta_cnt-1) and the values in the data region starting at meta_cnt.
//  - Metadata comparators: every A element has an index k (its column in
//    A, i.e. the row of B). With CSC B each k is compared with every
//    metadata entry; the valid data address generator (a one-hot-to-binary
//    encoder) turns the matching entry e into data address meta_cnt + e.
//    With dense B the index addresses the buffer directly.
//  - Vector unit: VEC multipliers and an adder tree reduce the matched
//    products of one beat.
//  - Rreg/Creg/Oreg: the beat's row is held in Rreg, the column in Creg;
//    Oreg accumulates until the row changes, then (Rreg, Creg, Oreg) is sent
//    to the global output buffer. `flush` sends the last Oreg at the end of
//    the stream.
// Bus rules (set by the streamer, checked here): the m-th data lane feeds
// multiplier m; with sparse A (CSR, COO) every data lane is followed by its
// col_id lane; with dense A the data lanes hold consecutive columns, and k
// continues from the previous beat while the row stays the same; every
// data lane of a beat belongs to one row, given by the ROW lane(s).
// Timing: a beat's product is in Oreg one cycle after the beat; an output
// leaves one cycle after the beat of the next row (or the flush).
// From the paper: buffer with data/metadata flags, comparators, one-hot to
// binary encoder, 8-wide vector MAC, Rreg/Creg/Oreg and the emit-on-change
// rule. This design's choices: int32 arithmetic, the lane rules above, the
// fixed metadata/data boundary meta_cnt and the load port.
module pe
  import sta_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned VEC   = 8,
  parameter int unsigned BUF   = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  a_fmt_e                 a_fmt,
  input  b_fmt_e                 b_fmt,
  input  logic [$clog2(BUF):0]   meta_cnt,
  // stationary load
  input  logic                   ld_clear,   // clear all entry flags
  input  logic                   ld_we,
  input  logic [$clog2(BUF)-1:0] ld_addr,
  input  logic                   ld_meta,
  input  logic [DW-1:0]          ld_data,
  input  logic                   ld_col_we,  // set Creg
  input  logic [DW-1:0]          ld_col,
  // broadcast bus
  input  logic                   bus_valid,
  input  lane_t [LANES-1:0]      bus_lane,
  input  logic                   flush,
  // to the global output buffer
  output logic                   out_valid,
  output logic [DW-1:0]          out_row,
  output logic [DW-1:0]          out_col,
  output logic [DW-1:0]          out_val
);
  localparam int unsigned BW = $clog2(BUF);

  logic [BUF-1:0][DW-1:0] buf_val;  // a register file: every entry is compared
  logic [BUF-1:0] buf_meta;       // 1 = metadata entry
  logic [BUF-1:0] buf_used;       // entry holds something

  logic [DW-1:0]  rreg, creg, oreg, kacc;
  logic           have_row;

  // ---------------- stationary buffer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_meta <= '0;
      buf_used <= '0;
      creg     <= '0;
    end else begin
      if (ld_clear) begin
        buf_meta <= '0;
        buf_used <= '0;
      end else if (ld_we) begin
        buf_meta[ld_addr] <= ld_meta;
        buf_used[ld_addr] <= 1'b1;
      end
      if (ld_col_we) creg <= ld_col;
    end
  end

  always_ff @(posedge clk) begin
    if (ld_we) buf_val[ld_addr] <= ld_data;
  end

  // ---------------- lane decode ----------------
  logic [VEC-1:0]           m_v;
  logic [VEC-1:0][DW-1:0]   m_a, m_k;
  logic [DW-1:0]            beat_row;
  logic [$clog2(VEC+1)-1:0] ndata;
  logic                     same_row;
  logic [DW-1:0]            kbase;

  assign same_row = have_row && (beat_row == rreg);
  assign kbase    = same_row ? kacc : '0;

  always_comb begin
    m_v      = '0;
    m_a      = '0;
    m_k      = '0;
    ndata    = '0;
    beat_row = '0;
    for (int j = 0; j < LANES; j++)
      if (bus_lane[j].tag == TAG_ROW) beat_row = bus_lane[j].val;
    for (int j = 0; j < LANES; j++) begin
      if (bus_lane[j].tag == TAG_DATA && 32'(ndata) < VEC) begin
        m_v[ndata[$clog2(VEC)-1:0]] = 1'b1;
        m_a[ndata[$clog2(VEC)-1:0]] = bus_lane[j].val;
        if (a_fmt == A_DENSE)
          m_k[ndata[$clog2(VEC)-1:0]] = kbase + DW'(ndata);
        else if (j + 1 < LANES)
          m_k[ndata[$clog2(VEC)-1:0]] = bus_lane[(j+1) % LANES].val;
        ndata = ndata + 1'b1;
      end
    end
  end

  // ---------------- metadata comparators + address generator ----------
  logic [VEC-1:0]          hit;
  logic [VEC-1:0][BW-1:0]  daddr;
  logic [VEC-1:0][DW-1:0]  m_b;

  for (genvar m = 0; m < VEC; m++) begin : g_match
    logic [BUF-1:0] onehot;
    logic [BW-1:0]  enc;
    always_comb begin
      for (int e = 0; e < BUF; e++)
        onehot[e] = buf_meta[e] && (e < int'(meta_cnt)) && (buf_val[e] == m_k[m]);
      // one-hot to binary encoder
      enc = '0;
      for (int e = 0; e < BUF; e++)
        if (onehot[e]) enc = enc | BW'(e);
      if (b_fmt == B_CSC) begin
        daddr[m] = BW'(meta_cnt) + enc;
        hit[m]   = m_v[m] && (onehot != '0);
      end else begin
        daddr[m] = m_k[m][BW-1:0];
        hit[m]   = m_v[m] && (m_k[m] < BUF) && buf_used[daddr[m]] && !buf_meta[daddr[m]];
      end
      m_b[m] = buf_val[daddr[m]];
    end
  end

  // ---------------- vector unit ----------------
  logic [DW-1:0] psum;
  always_comb begin
    psum = '0;
    for (int m = 0; m < VEC; m++)
      if (hit[m]) psum = psum + m_a[m] * m_b[m];
  end

  // ---------------- Rreg / Oreg ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rreg <= '0; oreg <= '0; kacc <= '0; have_row <= 1'b0;
      out_valid <= 1'b0; out_row <= '0; out_col <= '0; out_val <= '0;
    end else begin
      out_valid <= 1'b0;
      if (bus_valid) begin
        kacc <= kbase + DW'(ndata);
        if (same_row) oreg <= oreg + psum;
        else begin
          if (have_row) begin
            out_valid <= 1'b1;
            out_row   <= rreg;
            out_col   <= creg;
            out_val   <= oreg;
          end
          rreg     <= beat_row;
          oreg     <= psum;
          have_row <= 1'b1;
        end
      end else if (flush && have_row) begin
        out_valid <= 1'b1;
        out_row   <= rreg;
        out_col   <= creg;
        out_val   <= oreg;
        have_row  <= 1'b0;
      end
    end
  end

  // at most VEC data lanes per beat; flush only between beats
  logic [$clog2(LANES+1)-1:0] ntag;
  always_comb begin
    ntag = '0;
    for (int j = 0; j < LANES; j++) ntag = ntag + (bus_lane[j].tag == TAG_DATA);
  end
  a_vec_fit: assert property (@(posedge clk) disable iff (!rst_n)
    bus_valid |-> (32'(ntag) <= VEC));
  a_flush_idle: assert property (@(posedge clk) disable iff (!rst_n)
    flush |-> !bus_valid);
endmodule
