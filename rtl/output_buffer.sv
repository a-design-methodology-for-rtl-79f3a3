// output_buffer -- on-chip output tile with read-modify-write accumulation.
//
// T_OC banks (one per output channel of the tile) of DEPTH = T_OH * T_OW
// accumulators (paper: B_out = T_OC * T_OH * T_OW). The output tile stays on
// chip while the accelerator sweeps every kernel position and every
// input-channel tile, so partial sums never go back to external memory.
//
// Register insertion (paper Fig. 11): the T_IC products of one output word
// are summed in the processing engine's adder tree, and the local memory is
// read once and written once per output word and kernel position, through a
// read register and a write register:
//   cycle 0  acc_valid: bank words at acc_addr are read into old_q; the
//            partial sums and address are registered beside them;
//   cycle 1  old_q + psum_q is written back to the same address.
// A "written" flag per address replaces clearing the memory: clear (one
// clock) drops all flags, and a word whose flag is low reads as zero both in
// the accumulate path and on the read-out port. Back-to-back accumulations
// to the same address are not allowed (the address generator never issues
// them); an assertion checks this.
//
// Read-out port: rd_en/rd_addr, all T_OC bank words appear on rd_data one
// clock later.
module output_buffer
  import dcnn_pkg::*;
#(
  parameter int unsigned T_OC  = 13,
  parameter int unsigned DEPTH = 256,   // T_OH * T_OW = 16 * 16
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          acc_valid,
  input  logic [AW-1:0] acc_addr,
  input  acc_t          acc_psum [T_OC],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output acc_t          rd_data  [T_OC],
  output logic          busy
);

  acc_t             mem [T_OC][DEPTH];
  logic [DEPTH-1:0] written;

  // read / write registers of the inserted read-modify-write path
  logic             wr_valid_q;
  logic [AW-1:0]    wr_addr_q;
  acc_t             old_q  [T_OC];
  acc_t             psum_q [T_OC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_valid_q <= 1'b0;
      wr_addr_q  <= '0;
      written    <= '0;
    end else begin
      wr_valid_q <= acc_valid;
      if (acc_valid) wr_addr_q <= acc_addr;
      if (clear)           written            <= '0;
      else if (wr_valid_q) written[wr_addr_q] <= 1'b1;
    end
  end

  for (genvar o = 0; o < T_OC; o++) begin : g_bank
    always_ff @(posedge clk) begin
      if (acc_valid) begin
        old_q[o]  <= written[acc_addr] ? mem[o][acc_addr] : '0;
        psum_q[o] <= acc_psum[o];
      end
      if (wr_valid_q) mem[o][wr_addr_q] <= old_q[o] + psum_q[o];
      if (rd_en)      rd_data[o] <= written[rd_addr] ? mem[o][rd_addr] : '0;
    end
  end

  assign busy = wr_valid_q;

  // the inserted registers give no forwarding: the same word may not be
  // accumulated in two consecutive cycles
  a_no_back_to_back: assert property (@(posedge clk) disable iff (!rst_n)
    (acc_valid && wr_valid_q) |-> (acc_addr != wr_addr_q));

endmodule
