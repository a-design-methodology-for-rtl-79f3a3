// processing_engine -- the unrolled multiply-accumulate array of the paper's
// Fig. 10.
//
// The two innermost loops of Algorithm 2 (o_c over T_OC and i_c over T_IC)
// are fully unrolled: T_OC x T_IC multipliers each take one input word
// (shared along o_c: input i_c feeds the multipliers of every output
// channel) and one weight, and for every output channel an adder tree sums
// the T_IC products. One set of operands is accepted per clock.
//
// Timing: products are registered (1 clock), then the adder tree adds
// ceil(log2 T_IC) registered levels, so out_valid follows in_valid after
// LAT = 1 + ceil(log2 T_IC) clocks. The 12 x 12 bit products map onto the
// FPGA's 18-bit DSP multipliers, as the paper notes.
// The array shape (inputs broadcast across output channels, one adder tree
// per output channel) follows the published processing-engine drawing; the
// pipeline registers and accumulator width are this design's choice.
module processing_engine
  import dcnn_pkg::*;
#(
  parameter int unsigned T_OC = 13,
  parameter int unsigned T_IC = 16,
  localparam int unsigned PROD_W = 2 * DATA_W,
  localparam int unsigned LAT    = 1 + ((T_IC > 1) ? $clog2(T_IC) : 0)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t in_data [T_IC],
  input  data_t weight  [T_OC][T_IC],
  output logic  out_valid,
  output acc_t  psum    [T_OC]
);

  logic signed [PROD_W-1:0] prod [T_OC][T_IC];
  logic                     prod_valid;
  logic                     tree_valid [T_OC];

  always_ff @(posedge clk) begin
    for (int o = 0; o < T_OC; o++)
      for (int i = 0; i < T_IC; i++)
        prod[o][i] <= in_data[i] * weight[o][i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prod_valid <= 1'b0;
    else        prod_valid <= in_valid;
  end

  for (genvar o = 0; o < T_OC; o++) begin : g_tree
    adder_tree #(.N(T_IC), .IN_W(PROD_W), .OUT_W(ACC_W)) u_tree (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (prod_valid),
      .in_data  (prod[o]),
      .out_valid(tree_valid[o]),
      .out_sum  (psum[o])
    );
  end

  assign out_valid = tree_valid[0];

endmodule
