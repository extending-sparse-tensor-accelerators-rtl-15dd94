// prefix_sum: highly parallel (Kogge-Stone style) pipelined inclusive scan.
//
// Each of the log2(N) stages adds to every lane i the lane i-2^s of the stage
// before and is registered, as in the "highly parallel design" drawn with
// forwarding links and registers between adder rows. A last row of adders
// adds the running offset, the largest (last-lane) sum of the previous beat,
// so that a scan longer than N lanes streams at N outputs per cycle. A beat
// with `clear` set starts a new scan with offset 0.
//
// Interface: in_valid/in_clear/in_data enter together; out_valid/out_data
// appear LAT = log2(N)+1 cycles later. One beat may enter every cycle.
// Follows the paper: highly parallel structure, 32 inputs, int32 adders,
// offset adders for blocking. This design's choices: exact adder/register
// placement and the clear flag.
module prefix_sum #(
  parameter int unsigned N = 32,
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_clear,
  input  logic [N-1:0][W-1:0] in_data,
  output logic                out_valid,
  output logic [N-1:0][W-1:0] out_data
);
  localparam int unsigned S = $clog2(N);

  logic [N-1:0][W-1:0] st   [S+1];
  logic [S:0]          st_v;
  logic [S:0]          st_c;
  logic [W-1:0]        offset;

  assign st[0]   = in_data;
  assign st_v[0] = in_valid;
  assign st_c[0] = in_clear;

  for (genvar s = 0; s < S; s++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st[s+1]   <= '0;
        st_v[s+1] <= 1'b0;
        st_c[s+1] <= 1'b0;
      end else begin
        st_v[s+1] <= st_v[s];
        st_c[s+1] <= st_c[s];
        for (int i = 0; i < N; i++) begin
          if (i >= (1 << s)) st[s+1][i] <= st[s][i] + st[s][i-(1<<s)];
          else               st[s+1][i] <= st[s][i];
        end
      end
    end
  end

  // offset row: add the carried maximum of the previous beat
  logic [W-1:0] base;
  assign base = st_c[S] ? '0 : offset;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      offset    <= '0;
    end else begin
      out_valid <= st_v[S];
      if (st_v[S]) begin
        for (int i = 0; i < N; i++) out_data[i] <= st[S][i] + base;
        offset <= st[S][N-1] + base;
      end
    end
  end
endmodule
