// mean_unit: the mean operator of the neighbour encoder,
// e^k = (1/k) * sum over l = 1..k of B(o^l).
//
// It holds one accumulator per element of the B output (N elements). After
// clear, each add_valid pulse adds add_val into accumulator add_idx; the
// vectors of the k neighbours arrive one element at a time as the layer
// engine produces them. mean[rd_idx] is the accumulator divided by K,
// truncated toward zero as integer division in C does, combinationally.
// The averaging is the paper's (Fig. 4); the element-serial accumulation and
// the division by a fixed K are this design's.
module mean_unit
  import nn_pkg::*;
#(
  parameter int N = B_HID,
  parameter int K = K_NEIGH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 add_valid,
  input  logic [$clog2(N)-1:0] add_idx,
  input  fxp_t                 add_val,
  input  logic [$clog2(N)-1:0] rd_idx,
  output fxp_t                 mean,
  output logic [7:0]           count    // vectors fully added so far
);
  localparam int SUM_W = DATA_W + $clog2(K) + 1;
  typedef logic signed [SUM_W-1:0] sum_t;

  sum_t acc [N];
  sum_t quot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) acc[i] <= '0;
      count <= '0;
    end else if (clear) begin
      for (int i = 0; i < N; i++) acc[i] <= '0;
      count <= '0;
    end else if (add_valid) begin
      acc[add_idx] <= acc[add_idx] + sum_t'(add_val);
      if (int'(add_idx) == N - 1) count <= count + 8'd1;
    end
  end

  always_comb begin
    quot = acc[rd_idx] / sum_t'(K);
    mean = fxp_t'(quot);
  end
endmodule
