// cluster_counter: counts how often each distinct value occurs in a sorted
// chunk.
//
// Input is a sorted chunk whose valid elements form a prefix (the output of
// sort_network). Adjacent comparators find the end of each run of equal
// values; at the last lane of every run the counter reports the value and
// the run length. One chunk is accepted per cycle; results are registered
// (latency 1). Output lanes that end no run have uniq_valid low.
//
// The paper names a cluster counter that counts the occurrences of specific
// values within a sorted chunk; the adjacent-compare structure is this
// design's choice.
module cluster_counter #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [N-1:0]               in_keep,
  input  logic [N-1:0][W-1:0]        in_key,
  output logic                       out_valid,
  output logic [N-1:0]               uniq_valid,
  output logic [N-1:0][W-1:0]        uniq_key,
  output logic [N-1:0][$clog2(N):0]  uniq_cnt
);
  localparam int unsigned CW = $clog2(N) + 1;

  logic [N-1:0]         end_c;
  logic [N-1:0][CW-1:0] run_c;

  always_comb begin
    logic [CW-1:0] run;
    run = '0;
    for (int i = 0; i < N; i++) begin
      if (in_keep[i]) begin
        if (i > 0 && in_keep[i-1] && in_key[i-1] == in_key[i]) run = run + 1'b1;
        else                                                   run = CW'(1);
      end else begin
        run = '0;
      end
      run_c[i] = run;
      end_c[i] = in_keep[i] &&
                 ((i == N-1) || !in_keep[(i+1) % N] || in_key[(i+1) % N] != in_key[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      uniq_valid <= '0;
      uniq_key   <= '0;
      uniq_cnt   <= '0;
    end else begin
      out_valid  <= in_valid;
      uniq_valid <= in_valid ? end_c : '0;
      uniq_key   <= in_key;
      uniq_cnt   <= run_c;
    end
  end
endmodule
