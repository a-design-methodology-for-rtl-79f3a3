// weight_buffer -- on-chip kernel buffer for one T_OC x T_IC tile.
//
// Holds kernel[o_c][i_c][k_h][k_w] for the T_OC output and T_IC input
// channels of the current tile (paper: B_w = T_OC * T_IC * K^2). It is
// partitioned into T_OC * T_IC banks of K_MAX^2 words so that every
// multiplier of the processing engine gets its own weight each cycle; the
// read address, k_h * K_MAX + k_w, is shared by all banks because Algorithm 2
// keeps k_h and k_w fixed while the unrolled o_c and i_c loops run.
//
// Interface: a write port (o_c, i_c, kernel index, data) for the loader and
// a shared read address; read data are registered (one clock latency).
// The size follows the published buffer formula; one bank per multiplier and
// the registered read are this design's reading of "memory partitioning".
module weight_buffer
  import dcnn_pkg::*;
#(
  parameter int unsigned T_OC  = 13,
  parameter int unsigned T_IC  = 16,
  parameter int unsigned K_MAX = 5,
  localparam int unsigned DEPTH = K_MAX * K_MAX,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned OW    = (T_OC > 1) ? $clog2(T_OC) : 1,
  localparam int unsigned IW    = (T_IC > 1) ? $clog2(T_IC) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [OW-1:0] woc,
  input  logic [IW-1:0] wic,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output data_t         rdata [T_OC][T_IC]
);

  data_t mem [T_OC][T_IC][DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[woc][wic][waddr] <= wdata;
  end

  for (genvar o = 0; o < T_OC; o++) begin : g_oc
    for (genvar i = 0; i < T_IC; i++) begin : g_ic
      always_ff @(posedge clk) begin
        if (re) rdata[o][i] <= mem[o][i][raddr];
      end
    end
  end

endmodule
