// adder_tree -- pipelined binary adder tree (the "Adder-Tree
// Interconnection" of the processing engine).
//
// Sums N signed inputs of IN_W bits into one OUT_W-bit result. Level l adds
// pairs of the results of level l-1 (an odd element is passed through), and
// every level is registered, so the latency is LAT = ceil(log2 N) clocks
// (zero for N = 1). A valid bit travels alongside the data. A new set of
// operands can be accepted every clock.
// The tree shape follows the processing-engine drawing of the published
// design; registering every level is this design's choice.
module adder_tree #(
  parameter int unsigned N     = 16,
  parameter int unsigned IN_W  = 24,
  parameter int unsigned OUT_W = 32,
  localparam int unsigned LAT  = (N > 1) ? $clog2(N) : 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data [N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_sum
);

  // number of partial sums left after l levels
  function automatic int unsigned width_at(int unsigned l);
    int unsigned n;
    n = N;
    for (int unsigned j = 0; j < l; j++) n = (n + 1) / 2;
    return n;
  endfunction

  logic signed [OUT_W-1:0] lvl [LAT+1][N];
  logic                    vld [LAT+1];

  for (genvar i = 0; i < N; i++) begin : g_in
    assign lvl[0][i] = OUT_W'(in_data[i]);
  end
  assign vld[0] = in_valid;

  for (genvar l = 1; l <= LAT; l++) begin : g_lvl
    localparam int unsigned NP = width_at(l - 1);
    always_ff @(posedge clk) begin
      for (int unsigned j = 0; j < N; j++) begin
        if (2 * j + 1 < NP)  lvl[l][j] <= lvl[l-1][2*j] + lvl[l-1][2*j+1];
        else if (2 * j < NP) lvl[l][j] <= lvl[l-1][2*j];
        else                 lvl[l][j] <= '0;
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l] <= 1'b0;
      else        vld[l] <= vld[l-1];
    end
  end

  assign out_valid = vld[LAT];
  assign out_sum   = lvl[LAT][0];

endmodule
