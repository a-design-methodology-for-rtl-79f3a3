// input_buffer -- on-chip input feature-map buffer, partitioned by input
// channel.
//
// The buffer holds the input window that one output tile depends on (the
// "reverse looping" of the paper: the output block decides which inputs are
// loaded). It is split into T_IC banks, one per input channel of the tile, so
// that the unrolled i_c loop of the processing engine reads T_IC words in one
// cycle (memory partitioning). Each bank holds IN_H x IN_W words; the default
// IN_H = IN_W = ceil((T_OH + K)/S) with S = 2 follows the paper's buffer size
// B_in = T_IC * ((T_OH+K)/S) * ((T_OW+K)/S).
//
// Interface: one write port (bank select, address, data) used by the stream
// loader, and one read port whose address is shared by all banks; the
// read data appear one clock after the address (registered, BRAM style).
// The banking follows the published processing-engine drawing; the shared
// read address and registered read are this design's choice.
module input_buffer
  import dcnn_pkg::*;
#(
  parameter int unsigned T_IC  = 16,
  parameter int unsigned DEPTH = 121,  // IN_H * IN_W = 11 * 11
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = (T_IC > 1) ? $clog2(T_IC) : 1
) (
  input  logic           clk,
  input  logic           we,
  input  logic [BW-1:0]  wbank,
  input  logic [AW-1:0]  waddr,
  input  data_t          wdata,
  input  logic           re,
  input  logic [AW-1:0]  raddr,
  output data_t          rdata [T_IC]
);

  data_t mem [T_IC][DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wbank][waddr] <= wdata;
  end

  for (genvar b = 0; b < T_IC; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (re) rdata[b] <= mem[b][raddr];
    end
  end

endmodule
