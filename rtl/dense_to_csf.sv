// dense_to_csf: streaming Dense to CSF conversion of an X x Y x Z tensor.
//
// The dense tensor streams in with z fastest, then y, then x; a beat carries
// DL = DM_N/2 = 4 elements in words 0..3 of the 512-bit beat (the paper's
// eight div/mod units serve two divisions per element). Phase 1 follows the
// paper's steps 1-4:
//   - comparators flag the nonzero elements (=0?);
//   - the shared prefix-sum unit adds one for every element and so gives
//     each element its linear position;
//   - the shared div/mod units compute x = pos/(Y*Z) on lanes 0..3 and
//     pos/Z, pos%Z on lanes 4..7; then z = pos%Z and y = pos/Z - x*Y
//     (one multiplier per element);
//   - the nonzeros are packed and written as COO: x to BK_VAL, y to BK_IDX,
//     z to BK_OIDX1, value to BK_OVAL.
// Phase 2 (steps 5-7, tree construction) iterates the COO entries, one per
// cycle, and compares each (x, y) with the previous one: a new x appends
// x_idx (BK_OIDX0) and x_ptr (BK_OPTR0); a new x or y appends y_idx
// (BK_PTR) and y_ptr (BK_OPTR1). The COO z and value arrays are already the
// CSF z_idx and value arrays. The closing pointers x_ptr[nx] and y_ptr[ny]
// are written last; `done` then pulses and nnz, nx, ny hold the sizes.
//
// The paper's figure prints y_idx = sum % (y_dim*z_dim) / y_dim and
// x_idx = sum / (x_dim*z_dim); for the cubic example both forms agree. This
// design uses the row-major form x = pos/(Y*Z), y = (pos/Z) % Y, z = pos % Z.
// The tree pointers are built with running counters (a serial prefix sum).
module dense_to_csf
  import sta_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DW-1:0]       y_dim,
  input  logic [DW-1:0]       z_dim,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic [IN_W-1:0]     in_keep,
  input  in_vec_t             in_data,
  output ps_req_t             ps_req,
  input  logic                ps_valid,
  input  ps_vec_t             ps_data,
  output dm_req_t             dm_req,
  input  logic                dm_valid,
  input  dm_vec_t             dm_quo,
  input  dm_vec_t             dm_rem,
  output sp_req_t [NBANK-1:0] sp_req,
  input  sp_vec_t [NBANK-1:0] sp_rdata,
  output logic                busy,
  output logic                done,
  output logic [DW-1:0]       nnz,
  output logic [DW-1:0]       nx,
  output logic [DW-1:0]       ny
);
  localparam int unsigned DL  = DM_N / 2;
  localparam int unsigned DLY = PS_LAT + DM_LAT;

  typedef struct packed {
    logic                  valid;
    logic                  last;
    logic [DL-1:0]         nz;
    logic [DL-1:0][DW-1:0] data;
  } side_t;

  side_t side_q [DLY+1];
  side_t s_out;

  // ---------------- phase 1: zero test, positions, coordinates ----------
  always_comb begin
    ps_req       = '0;
    ps_req.valid = in_valid;
    ps_req.clear = in_first;
    side_q[0]       = '0;
    side_q[0].valid = in_valid;
    side_q[0].last  = in_last;
    for (int i = 0; i < DL; i++) begin
      ps_req.data[i]     = {{(DW-1){1'b0}}, in_keep[i]};
      side_q[0].nz[i]    = in_keep[i] && (in_data[i] != '0);
      side_q[0].data[i]  = in_data[i];
    end
  end

  for (genvar d = 0; d < DLY; d++) begin : g_dly
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) side_q[d+1] <= '0;
      else        side_q[d+1] <= side_q[d];
    end
  end
  assign s_out = side_q[DLY];

  logic [DW-1:0] yz;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   yz <= '0;
    else if (in_valid && in_first) yz <= y_dim * z_dim;
  end

  always_comb begin
    dm_req       = '0;
    dm_req.valid = ps_valid;
    for (int i = 0; i < DL; i++) begin
      dm_req.dividend[i]    = ps_data[i] - 1'b1;
      dm_req.divisor[i]     = yz;
      dm_req.dividend[DL+i] = ps_data[i] - 1'b1;
      dm_req.divisor[DL+i]  = z_dim;
    end
  end

  // coordinates and packing of the nonzeros
  logic [DL-1:0][DW-1:0] cx, cy, cz;
  logic [SPL-1:0][DW-1:0] px_w, py_w, pz_w, pv_w;
  logic [SPL-1:0]         pmask;
  logic [$clog2(DL):0]    pcnt;
  always_comb begin
    px_w = '0; py_w = '0; pz_w = '0; pv_w = '0; pmask = '0; pcnt = '0;
    for (int i = 0; i < DL; i++) begin
      cx[i] = dm_quo[i];
      cz[i] = dm_rem[DL+i];
      cy[i] = dm_quo[DL+i] - dm_quo[i] * y_dim;
      if (s_out.nz[i]) begin
        px_w[pcnt] = cx[i];
        py_w[pcnt] = cy[i];
        pz_w[pcnt] = cz[i];
        pv_w[pcnt] = s_out.data[i];
        pmask[pcnt] = 1'b1;
        pcnt = pcnt + 1'b1;
      end
    end
  end

  // ---------------- phase 2: tree construction -------------------------
  typedef enum logic [1:0] {P_STREAM, P_TREE, P_CLOSE} phase_e;
  phase_e        ph;
  logic [DW-1:0] coo_ptr, rd_i, pend_i, pxv, pyv;
  logic          rd_pend, first_el;
  logic [DW-1:0] tx, ty;
  logic          new_x, new_y;

  assign tx    = sp_rdata[BK_VAL][0];
  assign ty    = sp_rdata[BK_IDX][0];
  assign new_x = first_el || (tx != pxv);
  assign new_y = new_x || (ty != pyv);

  always_comb begin
    sp_req = '0;
    if (ph == P_STREAM) begin
      for (int b = 0; b < NBANK; b++) begin
        if (b == BK_VAL || b == BK_IDX || b == BK_OIDX1 || b == BK_OVAL) begin
          sp_req[b].we    = s_out.valid && dm_valid;
          sp_req[b].waddr = SP_AW'(coo_ptr);
          sp_req[b].wmask = pmask;
        end
      end
      sp_req[BK_VAL].wdata   = px_w;
      sp_req[BK_IDX].wdata   = py_w;
      sp_req[BK_OIDX1].wdata = pz_w;
      sp_req[BK_OVAL].wdata  = pv_w;
    end else if (ph == P_TREE) begin
      sp_req[BK_VAL].re    = (rd_i < nnz);
      sp_req[BK_VAL].raddr = SP_AW'(rd_i);
      sp_req[BK_IDX].re    = (rd_i < nnz);
      sp_req[BK_IDX].raddr = SP_AW'(rd_i);
      if (rd_pend && new_x) begin
        sp_req[BK_OIDX0].we       = 1'b1;
        sp_req[BK_OIDX0].waddr    = SP_AW'(nx);
        sp_req[BK_OIDX0].wmask[0] = 1'b1;
        sp_req[BK_OIDX0].wdata[0] = tx;
        sp_req[BK_OPTR0].we       = 1'b1;
        sp_req[BK_OPTR0].waddr    = SP_AW'(nx);
        sp_req[BK_OPTR0].wmask[0] = 1'b1;
        sp_req[BK_OPTR0].wdata[0] = ny;
      end
      if (rd_pend && new_y) begin
        sp_req[BK_PTR].we         = 1'b1;
        sp_req[BK_PTR].waddr      = SP_AW'(ny);
        sp_req[BK_PTR].wmask[0]   = 1'b1;
        sp_req[BK_PTR].wdata[0]   = ty;
        sp_req[BK_OPTR1].we       = 1'b1;
        sp_req[BK_OPTR1].waddr    = SP_AW'(ny);
        sp_req[BK_OPTR1].wmask[0] = 1'b1;
        sp_req[BK_OPTR1].wdata[0] = pend_i;
      end
    end else begin
      sp_req[BK_OPTR0].we       = 1'b1;
      sp_req[BK_OPTR0].waddr    = SP_AW'(nx);
      sp_req[BK_OPTR0].wmask[0] = 1'b1;
      sp_req[BK_OPTR0].wdata[0] = ny;
      sp_req[BK_OPTR1].we       = 1'b1;
      sp_req[BK_OPTR1].waddr    = SP_AW'(ny);
      sp_req[BK_OPTR1].wmask[0] = 1'b1;
      sp_req[BK_OPTR1].wdata[0] = nnz;
    end
  end

  logic streaming;
  assign busy = streaming || (ph != P_STREAM);
  assign nnz  = coo_ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_STREAM; coo_ptr <= '0; rd_i <= '0; pend_i <= '0; pxv <= '0;
      pyv <= '0; rd_pend <= 1'b0; first_el <= 1'b1; nx <= '0; ny <= '0;
      done <= 1'b0; streaming <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (ph)
        P_STREAM: begin
          if (in_valid && in_first) begin
            coo_ptr   <= '0;
            streaming <= 1'b1;
          end
          if (s_out.valid) begin
            coo_ptr <= coo_ptr + DW'(pcnt);
            if (s_out.last) begin
              streaming <= 1'b0;
              ph        <= P_TREE;
              rd_i      <= '0;
              rd_pend   <= 1'b0;
              first_el  <= 1'b1;
              nx        <= '0;
              ny        <= '0;
            end
          end
        end
        P_TREE: begin
          rd_pend <= (rd_i < nnz);
          pend_i  <= rd_i;
          if (rd_i < nnz) rd_i <= rd_i + 1'b1;
          if (rd_pend) begin
            first_el <= 1'b0;
            pxv      <= tx;
            pyv      <= ty;
            if (new_x) nx <= nx + 1'b1;
            if (new_y) ny <= ny + 1'b1;
          end
          if (!rd_pend && rd_i >= nnz) ph <= P_CLOSE;
        end
        default: begin
          done <= 1'b1;
          ph   <= P_STREAM;
        end
      endcase
    end
  end
endmodule
