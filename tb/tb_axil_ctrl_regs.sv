// tb_axil_ctrl_regs -- AXI4-Lite register file test: write/read-back of the
// geometry and tile registers and their decoding into the cfg struct, the
// one-clock START pulse with FIRST/LAST, START ignored while the accelerator
// is busy, the sticky DONE bit with write-1-to-clear, and the interrupt
// gated by IER.
module tb_axil_ctrl_regs;
  import dcnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        arvalid, arready, rvalid, rready;
  logic        start, first, last, acc_busy, acc_done, irq;
  layer_cfg_t  cfg;
  int checks = 0, failures = 0, n_start = 0;

  axil_ctrl_regs dut (.clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready),
    .start, .first, .last, .cfg, .acc_busy, .acc_done, .irq);

  always @(posedge clk) if (start) n_start++;

  task automatic wr(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk); awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!awready);
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    checks++;
    if (bresp != 2'b00) begin failures++; $display("FAIL bresp"); end
  endtask

  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
  endtask

  task automatic expect32(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp_v); end
  endtask

  initial begin
    logic [31:0] d;
    awvalid = 0; wvalid = 0; arvalid = 0; bready = 1; rready = 1; wstrb = 4'hF;
    awaddr = 0; araddr = 0; wdata = 0; acc_busy = 0; acc_done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(6'h0C, 32'h0001_2125);      // K=5 S=2 P=1 II=2 CONV
    wr(6'h10, 32'h0D10_0708);      // rows 8, cols 7, ic 16, oc 13
    rd(6'h0C, d); expect32("GEOM", d, 32'h0001_2125);
    expect32("cfg conv", 32'(cfg.conv), 1);
    rd(6'h10, d); expect32("TILE", d, 32'h0D10_0708);
    expect32("cfg", 32'(cfg.k) | (32'(cfg.s) << 4) | (32'(cfg.p) << 8) | (32'(cfg.ii) << 12), 32'h2125);
    expect32("cfg tile", {cfg.oc_active, cfg.ic_active, cfg.cols, cfg.rows}, 32'h0D10_0708);
    // start with FIRST and LAST
    wr(6'h00, 32'h7);
    @(negedge clk);
    expect32("one start pulse", 32'(n_start), 1);
    expect32("first/last", {first, last}, 2'b11);
    rd(6'h00, d); expect32("CTRL", d, 32'h6);
    // busy: start ignored
    acc_busy = 1;
    wr(6'h00, 32'h1);
    @(negedge clk);
    expect32("start while busy", 32'(n_start), 1);
    rd(6'h04, d); expect32("STATUS busy", d, 32'h1);
    // done, no interrupt enabled
    @(negedge clk); acc_busy = 0; acc_done = 1;
    @(negedge clk); acc_done = 0;
    rd(6'h04, d); expect32("STATUS done", d, 32'h2);
    expect32("irq masked", 32'(irq), 0);
    wr(6'h08, 32'h1);
    expect32("irq", 32'(irq), 1);
    wr(6'h04, 32'h2);
    rd(6'h04, d); expect32("DONE cleared", d, 32'h0);
    expect32("irq cleared", 32'(irq), 0);
    rd(6'h08, d); expect32("IER", d, 32'h1);
    rd(6'h3C, d); expect32("unmapped", d, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
