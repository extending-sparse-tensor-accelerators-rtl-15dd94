// sort_network: pipelined bitonic sorting network (ascending).
//
// Sorts N keys, each with a valid bit; invalid keys sort to the end, so the
// valid keys come out as a packed, ordered prefix. The network has
// log2(N)*(log2(N)+1)/2 compare-exchange columns; each column is registered,
// so a new chunk can enter every cycle and leaves LAT cycles later.
//
// The paper calls for a pipelined sorting network whose input size equals
// the number of metadata elements arriving per cycle; the bitonic structure
// and the valid-bit handling are this design's choice. N must be a power of 2.
module sort_network #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0]        in_keep,
  input  logic [N-1:0][W-1:0] in_key,
  output logic                out_valid,
  output logic [N-1:0]        out_keep,
  output logic [N-1:0][W-1:0] out_key
);
  localparam int unsigned LG  = $clog2(N);
  localparam int unsigned LAT = LG * (LG + 1) / 2;

  // element = {invalid, key}: invalid elements compare as largest
  typedef logic [W:0] elem_t;

  elem_t [N-1:0] st [LAT+1];
  logic  [LAT:0] st_v;

  always_comb begin
    for (int i = 0; i < N; i++) st[0][i] = {~in_keep[i], in_key[i]};
  end
  assign st_v[0] = in_valid;

  // column c corresponds to the bitonic pair (k, j)
  function automatic int unsigned col_k(int unsigned c);
    int unsigned n = 0;
    for (int unsigned k = 2; k <= N; k = k * 2)
      for (int unsigned j = k / 2; j >= 1; j = j / 2) begin
        if (n == c) return k;
        n++;
      end
    return 2;
  endfunction

  function automatic int unsigned col_j(int unsigned c);
    int unsigned n = 0;
    for (int unsigned k = 2; k <= N; k = k * 2)
      for (int unsigned j = k / 2; j >= 1; j = j / 2) begin
        if (n == c) return j;
        n++;
      end
    return 1;
  endfunction

  for (genvar c = 0; c < LAT; c++) begin : g_col
    localparam int unsigned K = col_k(c);
    localparam int unsigned J = col_j(c);
    elem_t [N-1:0] nxt;
    always_comb begin
      nxt = st[c];
      for (int unsigned i = 0; i < N; i++) begin
        int unsigned l;
        l = i ^ J;
        if (l > i) begin
          logic up;
          up = ((i & K) == 0);
          if ((st[c][i] > st[c][l]) == up) begin
            nxt[i] = st[c][l];
            nxt[l] = st[c][i];
          end
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st[c+1]   <= '0;
        st_v[c+1] <= 1'b0;
      end else begin
        st[c+1]   <= nxt;
        st_v[c+1] <= st_v[c];
      end
    end
  end

  assign out_valid = st_v[LAT];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      out_keep[i] = ~st[LAT][i][W];
      out_key[i]  = st[LAT][i][W-1:0];
    end
  end
endmodule
