// scratchpad: global shared scratchpad buffer, split into NBANK field banks.
//
// Each bank holds DEPTH 32-bit words and has one vector read port and one
// vector write port. A read returns the SPL words starting at raddr
// (addresses wrap at DEPTH) one cycle after the request; a write stores the
// words of wdata whose wmask bit is set at waddr, waddr+1, ... The
// per-word rotation is the crossbar of the memory controller: any SPL
// consecutive words can be read or written in one cycle, without alignment.
//
// The paper describes a global scratchpad with separate spaces for
// pointers, indices and values, reached through a memory controller; the
// bank count, the depth and the port shape are this design's choices.
module scratchpad
  import sta_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic                 clk,
  input  sp_req_t [NBANK-1:0]  req,
  output sp_vec_t [NBANK-1:0]  rdata
);
  localparam int unsigned AW = $clog2(DEPTH);

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [DW-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (req[b].we) begin
        for (int i = 0; i < SPL; i++) begin
          if (req[b].wmask[i]) mem[AW'(req[b].waddr + SP_AW'(i))] <= req[b].wdata[i];
        end
      end
      if (req[b].re) begin
        for (int i = 0; i < SPL; i++) rdata[b][i] <= mem[AW'(req[b].raddr + SP_AW'(i))];
      end
    end
  end
endmodule
