// par_divmod: N parallel pipelined unsigned divide-and-mod units.
//
// Every lane computes quotient and remainder of its own dividend and
// divisor. Each unit is a restoring divider unrolled into W registered
// stages, one quotient bit per stage, so a new set of N operations can enter
// every cycle and the results leave LAT = W cycles later. Division by zero
// gives an all-ones quotient and the dividend as remainder.
//
// The paper limits MINT to eight parallel divide and mod units and states
// they must be pipelined to meet timing; the restoring algorithm and the
// one-bit-per-stage pipeline are this design's choice.
module par_divmod #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][W-1:0] dividend,
  input  logic [N-1:0][W-1:0] divisor,
  output logic                out_valid,
  output logic [N-1:0][W-1:0] quotient,
  output logic [N-1:0][W-1:0] remainder
);
  // per stage: partial remainder, remaining dividend bits, quotient, divisor
  logic [N-1:0][W-1:0] rem_q [W+1];
  logic [N-1:0][W-1:0] dvd_q [W+1];
  logic [N-1:0][W-1:0] quo_q [W+1];
  logic [N-1:0][W-1:0] dvs_q [W+1];
  logic [W:0]          vld_q;

  assign rem_q[0] = '0;
  assign dvd_q[0] = dividend;
  assign quo_q[0] = '0;
  assign dvs_q[0] = divisor;
  assign vld_q[0] = in_valid;

  for (genvar s = 0; s < W; s++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rem_q[s+1] <= '0;
        dvd_q[s+1] <= '0;
        quo_q[s+1] <= '0;
        dvs_q[s+1] <= '0;
        vld_q[s+1] <= 1'b0;
      end else begin
        vld_q[s+1] <= vld_q[s];
        dvs_q[s+1] <= dvs_q[s];
        for (int i = 0; i < N; i++) begin
          logic [W:0] trial;
          trial = {rem_q[s][i], dvd_q[s][i][W-1]};
          dvd_q[s+1][i] <= dvd_q[s][i] << 1;
          if (trial >= {1'b0, dvs_q[s][i]}) begin
            rem_q[s+1][i] <= W'(trial - {1'b0, dvs_q[s][i]});
            quo_q[s+1][i] <= {quo_q[s][i][W-2:0], 1'b1};
          end else begin
            rem_q[s+1][i] <= trial[W-1:0];
            quo_q[s+1][i] <= {quo_q[s][i][W-2:0], 1'b0};
          end
        end
      end
    end
  end

  assign out_valid = vld_q[W];
  assign quotient  = quo_q[W];
  assign remainder = rem_q[W];
endmodule
