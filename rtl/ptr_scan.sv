// ptr_scan: runs one bank region through the shared prefix-sum unit and
// writes the inclusive scan back in place.
//
// Used for the pointer arrays of CSC (col_ptr) and BSR (row_ptr): after the
// per-column or per-row-block counts are in words 0..len-1 of a bank, the
// words are read SPL at a time (one read per cycle), sent through the
// prefix-sum unit (the first chunk clears its offset) and written back as
// they return, PS_LAT+1 cycles after their read. `done` pulses when the last
// chunk is written. Words past len are sent as zero and not written.
module ptr_scan
  import sta_pkg::*;
#(
  parameter int unsigned BANK = BK_OPTR0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] len,
  input  sp_vec_t       rdata,
  output sp_req_t       req,
  output ps_req_t       ps_req,
  input  logic          ps_valid,
  input  ps_vec_t       ps_data,
  output logic          busy,
  output logic          done
);
  logic [DW-1:0] rd_ptr, wr_ptr;
  logic          rd_pend;      // read issued last cycle, data in rdata now
  logic [DW-1:0] rd_pend_addr;
  logic          reading;
  logic          active;

  assign busy = active;

  always_comb begin
    req       = '0;
    req.re    = reading;
    req.raddr = SP_AW'(rd_ptr);
    ps_req    = '0;
    ps_req.valid = active && rd_pend;
    ps_req.clear = (rd_pend_addr == '0);
    for (int i = 0; i < SPL; i++)
      if (rd_pend_addr + DW'(i) < len) ps_req.data[i] = rdata[i];
    req.we    = active && ps_valid && (wr_ptr < len);
    req.waddr = SP_AW'(wr_ptr);
    for (int i = 0; i < SPL; i++) begin
      req.wdata[i] = ps_data[i];
      req.wmask[i] = (wr_ptr + DW'(i) < len);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr       <= '0;
      wr_ptr       <= '0;
      rd_pend      <= 1'b0;
      rd_pend_addr <= '0;
      reading      <= 1'b0;
      done         <= 1'b0;
      active       <= 1'b0;
    end else begin
      done    <= 1'b0;
      rd_pend <= reading;
      rd_pend_addr <= rd_ptr;
      if (start) begin
        rd_ptr  <= '0;
        wr_ptr  <= '0;
        reading <= (len != 0);
        done    <= (len == 0);
        rd_pend <= 1'b0;
        active  <= (len != 0);
      end else begin
        if (reading) begin
          rd_ptr <= rd_ptr + SPL;
          if (rd_ptr + SPL >= len) reading <= 1'b0;
        end
        if (active && ps_valid && wr_ptr < len) begin
          wr_ptr <= wr_ptr + SPL;
          if (wr_ptr + SPL >= len) begin
            done   <= 1'b1;
            active <= 1'b0;
          end
        end
      end
    end
  end
endmodule
