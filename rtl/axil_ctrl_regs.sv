// axil_ctrl_regs -- AXI4-Lite register file of the accelerator ("Control &
// Metadata" in the system diagram) and its completion interrupt.
//
// The host processor sets the geometry of one tile job here, starts it and
// is interrupted when it is done. The register map is this design's own:
//   0x00 CTRL    W: bit0 START (self-clearing pulse), bit1 FIRST (start a
//                new output tile: drop the old partial sums), bit2 LAST
//                (stream the finished output tile out after this job)
//                R: FIRST, LAST
//   0x04 STATUS  R: bit0 BUSY, bit1 DONE (sticky; write 1 to clear)
//   0x08 IER     bit0: interrupt enable; irq = DONE & IER
//   0x0C GEOM    [3:0] K, [7:4] S, [11:8] P, [15:12] II, [16] CONV
//   0x10 TILE    [7:0] rows (o_h' trips), [15:8] cols (o_w' trips),
//                [23:16] active input channels, [31:24] active output
//                channels
// A write is taken when AWVALID and WVALID are both high (and no response
// is pending); a read when ARVALID is high and no read data are pending.
// WSTRB is ignored; responses are always OKAY.
module axil_ctrl_regs
  import dcnn_pkg::*;
#(
  parameter int unsigned ADDR_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // to / from the accelerator
  output logic              start,
  output logic              first,
  output logic              last,
  output layer_cfg_t        cfg,
  input  logic              acc_busy,
  input  logic              acc_done,
  output logic              irq
);

  logic        done_q, ie_q;
  logic [16:0] geom_q;
  logic [31:0] tile_q;
  logic        wr_en, rd_en;

  assign wr_en     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_en;
  assign s_wready  = wr_en;
  assign rd_en     = s_arvalid && !s_rvalid;
  assign s_arready = rd_en;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start <= 1'b0; first <= 1'b0; last <= 1'b0;
      done_q <= 1'b0; ie_q <= 1'b0;
      geom_q <= '0; tile_q <= '0;
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
    end else begin
      start <= 1'b0;
      if (acc_done) done_q <= 1'b1;
      if (wr_en) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr[ADDR_W-1:2])
          4'h0: begin
            start <= s_wdata[0] && !acc_busy;
            first <= s_wdata[1];
            last  <= s_wdata[2];
          end
          4'h1: if (s_wdata[1]) done_q <= 1'b0;
          4'h2: ie_q   <= s_wdata[0];
          4'h3: geom_q <= s_wdata[16:0];
          4'h4: tile_q <= s_wdata;
          default: ;
        endcase
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (rd_en) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr[ADDR_W-1:2])
          4'h0:    s_rdata <= {29'd0, last, first, 1'b0};
          4'h1:    s_rdata <= {30'd0, done_q, acc_busy};
          4'h2:    s_rdata <= {31'd0, ie_q};
          4'h3:    s_rdata <= {15'd0, geom_q};
          4'h4:    s_rdata <= tile_q;
          default: s_rdata <= 32'd0;
        endcase
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  assign cfg = '{conv: geom_q[16], k: geom_q[3:0], s: geom_q[7:4], p: geom_q[11:8], ii: geom_q[15:12],
                 rows: tile_q[7:0], cols: tile_q[15:8],
                 ic_active: tile_q[23:16], oc_active: tile_q[31:24]};
  assign irq = done_q && ie_q;

endmodule
