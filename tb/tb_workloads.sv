// tb_workloads -- runs layers shaped like those of the evaluated networks
// through the accelerator at its default parameters and compares every output
// word with a scatter-form reference computed here:
//   * the design-space-exploration layer 10x2x2 -> 64x4x4 (kernel 4, stride
//     2, padding 1; the kernel and stride are assumed);
//   * the last layer of a 28x28 MNIST generator, 64x14x14 -> 1x27x27;
//   * the last layer of a 64x64 CelebA generator, 128x32x32 -> 3x63x63
//     (8 input-channel groups and 16 output tiles);
//   * the latent projection 100 -> 1024x4x4 run as a 1x1-input deconvolution
//     (79 output-channel groups x 7 input-channel groups = 553 jobs).
// Output sizes follow O = S*(I-1) + K - 2P. The host procedure is the same as
// in tb_deconv_accel: geometry over AXI4-Lite, kernels and zero-filled input
// windows on the input stream, output tiles on the output stream, interrupt
// per job, compute time checked against K^2*rows*(PD + II*(cols-1)) + 2.
module tb_workloads;
  import dcnn_pkg::*;

  localparam int T_OH = 16, T_OW = 16, T_OC = 13, T_IC = 16, K_MAX = 5;
  localparam int PD = 4 + 1 + $clog2(T_IC);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        arvalid, arready, rvalid, rready;
  logic [15:0] s_tdata, m_tdata;
  logic        s_tvalid, s_tready, m_tvalid, m_tready, m_tlast, irq;

  deconv_accel dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid),
    .s_axil_wready(wready), .s_axil_bresp(bresp), .s_axil_bvalid(bvalid),
    .s_axil_bready(bready), .s_axil_araddr(araddr), .s_axil_arvalid(arvalid),
    .s_axil_arready(arready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast), .irq
  );

  int checks = 0, failures = 0;

  // mechanism counters
  int n_ic_accum = 0, n_ic_partial = 0, n_oc_partial = 0, n_edge_tile = 0;
  int n_zero_rows = 0, n_in_stall = 0, n_out_bp = 0, n_irq = 0, n_sat = 0;
  int n_stride1 = 0, n_stride2 = 0, n_hole_rows = 0, n_conv = 0;

  // layer storage (sized for the largest layer used)
  int in_fm [];
  int kern [];
  longint ref_out [];

  // --------------------------------------------------------- host helpers
  task automatic axil_write(input logic [5:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!awready);
    #1 awvalid = 0; wvalid = 0;
    while (!bvalid) @(posedge clk);
    @(posedge clk);
  endtask

  task automatic axil_read(input logic [5:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    #1 arvalid = 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(posedge clk);
  endtask

  task automatic send_word(input int v);
    @(posedge clk); #1;
    if ($urandom_range(0, 7) == 0) begin
      s_tvalid = 0;
      n_in_stall++;
      @(posedge clk); #1;
    end
    s_tdata = 16'(v); s_tvalid = 1;
    do @(posedge clk); while (!s_tready);
    #1 s_tvalid = 0;
  endtask

  function automatic int fofs(int k, int s, int p);
    int m;
    m = (p - k) % s; if (m < 0) m += s;
    m = (s - m) % s;
    return m;
  endfunction
  function automatic int dofs(int k, int s, int p);
    return (fofs(k, s, p) + p - k) / s;
  endfunction
  function automatic int rq(longint a);
    longint q;
    q = (a >= 0) ? a / 256 : -((-a + 255) / 256);
    if (q > 2047) begin n_sat++; return 2047; end
    if (q < -2048) begin n_sat++; return -2048; end
    return int'(q);
  endfunction

  // one layer: IC x IH x IW -> OC x OH x OW
  task automatic run_layer(input int IC, OC, IH, IW, K, S, P, II, input int vmax, input int CV = 0);
    int OH, OW, dmax, dmin, rmax, SO;
    OH = CV ? (IH + 2 * P - K) / S + 1 : S * (IH - 1) + K - 2 * P;
    OW = CV ? (IW + 2 * P - K) / S + 1 : S * (IW - 1) + K - 2 * P;
    dmax = dofs(0, S, P);
    dmin = dofs(K - 1, S, P);
    if (S == 1) n_stride1++; else n_stride2++;
    in_fm = new[IC * IH * IW];
    kern = new[OC * IC * K * K];
    ref_out = new[OC * OH * OW];
    $display("layer %0dx%0dx%0d -> %0dx%0dx%0d, K=%0d S=%0d P=%0d", IC, IH, IW, OC, OH, OW, K, S, P);
    for (int c = 0; c < IC; c++) for (int h = 0; h < IH; h++) for (int w = 0; w < IW; w++)
      in_fm[((c) * IH + (h)) * IW + (w)] = $urandom_range(0, 2 * vmax) - vmax;
    for (int o = 0; o < OC; o++) for (int c = 0; c < IC; c++)
      for (int a = 0; a < K; a++) for (int b = 0; b < K; b++)
        kern[(((o) * IC + (c)) * K + (a)) * K + (b)] = $urandom_range(0, 2 * vmax) - vmax;
    for (int o = 0; o < OC; o++) for (int h = 0; h < OH; h++) for (int w = 0; w < OW; w++)
      ref_out[((o) * OH + (h)) * OW + (w)] = 0;
    // Algorithm 1 of the scatter form
    for (int c = 0; c < IC; c++) for (int h = 0; h < IH; h++) for (int w = 0; w < IW; w++)
      for (int o = 0; o < OC; o++) for (int a = 0; a < K; a++) for (int b = 0; b < K; b++) begin
        int oh, ow;
        if (CV) begin
          // convolution: input h feeds output oh with S*oh + a - P = h
          oh = ((h - a + P) >= 0 && (h - a + P) % S == 0) ? (h - a + P) / S : -1;
          ow = ((w - b + P) >= 0 && (w - b + P) % S == 0) ? (w - b + P) / S : -1;
        end else begin
          oh = S * h + a - P; ow = S * w + b - P;
        end
        if (oh >= 0 && oh < OH && ow >= 0 && ow < OW)
          ref_out[((o) * OH + (oh)) * OW + (ow)] += longint'(in_fm[((c) * IH + (h)) * IW + (w)]) * kern[(((o) * IC + (c)) * K + (a)) * K + (b)];
      end

    axil_write(6'h0C, 32'(K) | (32'(S) << 4) | (32'(P) << 8) | (32'(II) << 12) | (32'(CV) << 16));
    // tiles: rows per tile limited by T_OH/S and by the input window size
    rmax = CV ? ((T_OH < (11 - K) / S + 1) ? T_OH : (11 - K) / S + 1)
              : ((T_OH / S < 11 - (dmax - dmin)) ? T_OH / S : 11 - (dmax - dmin));
    SO = CV ? 1 : S;
    if (CV) n_conv++;
    for (int oh0 = 0; oh0 < OH; oh0 += SO * rmax)
    for (int ow0 = 0; ow0 < OW; ow0 += SO * rmax) begin
      int rows, cols, wh, ww;
      rows = (OH - oh0 + SO - 1) / SO; if (rows > rmax) rows = rmax;
      cols = (OW - ow0 + SO - 1) / SO; if (cols > rmax) cols = rmax;
      if (rows < T_OH / S || cols < T_OW / S) n_edge_tile++;
      if (S > 1) n_hole_rows++;
      wh = CV ? S * (rows - 1) + K : rows + dmax - dmin;
      ww = CV ? S * (cols - 1) + K : cols + dmax - dmin;
      for (int oc0 = 0; oc0 < OC; oc0 += T_OC)
      for (int ic0 = 0; ic0 < IC; ic0 += T_IC) begin
        int oca;
        int ica, ctrl;
        logic [31:0] st;
        longint t_start, t_done;
        bit lastj;
        ica = (IC - ic0 < T_IC) ? IC - ic0 : T_IC;
        oca = (OC - oc0 < T_OC) ? OC - oc0 : T_OC;
        lastj = (ic0 + T_IC >= IC);
        if (ica < T_IC) n_ic_partial++;
        if (oca < T_OC) n_oc_partial++;
        if (ic0 > 0) n_ic_accum++;
        axil_write(6'h10, 32'(rows) | (32'(cols) << 8) | (32'(ica) << 16) | (32'(oca) << 24));
        ctrl = 1 | ((ic0 == 0) ? 2 : 0) | (lastj ? 4 : 0);
        axil_write(6'h00, 32'(ctrl));
        // kernels
        for (int o = 0; o < oca; o++) for (int c = 0; c < ica; c++)
          for (int a = 0; a < K; a++) for (int b = 0; b < K; b++)
            send_word(kern[(((oc0 + o) * IC + (ic0 + c)) * K + (a)) * K + (b)]);
        // input window
        for (int c = 0; c < ica; c++) for (int r = 0; r < wh; r++) for (int q = 0; q < ww; q++) begin
          int ih, iw;
          ih = CV ? S * oh0 - P + r : oh0 / S + dmin + r;
          iw = CV ? S * ow0 - P + q : ow0 / S + dmin + q;
          if (ih < 0 || ih >= IH || iw < 0 || iw >= IW) begin
            send_word(0);
            if (c == 0 && q == 0) n_zero_rows++;
          end else send_word(in_fm[((ic0 + c) * IH + (ih)) * IW + (iw)]);
        end
        // time the compute phase
        while (!dut.ag_start) @(posedge clk);
        t_start = $time / 10;
        while (!dut.ag_done) @(posedge clk);
        t_done = $time / 10;
        checks++;
        if (t_done - t_start != 2 + longint'(K * K * rows) * (PD + II * (cols - 1))) begin
          failures++;
          $display("FAIL compute cycles %0d, expected %0d", t_done - t_start,
                   2 + K * K * rows * (PD + II * (cols - 1)));
        end
        // collect the output tile
        if (lastj) begin
          for (int o = 0; o < oca; o++) for (int r = 0; r < rows * SO; r++) for (int q = 0; q < cols * SO; q++) begin
            bit fin;
            int got;
            fin = (o == oca - 1) && (r == rows * SO - 1) && (q == cols * SO - 1);
            @(posedge clk); #1;
            m_tready = ($urandom_range(0, 3) != 0);
            while (!(m_tvalid && m_tready)) begin
              if (m_tvalid && !m_tready) n_out_bp++;
              @(posedge clk); #1;
              m_tready = ($urandom_range(0, 3) != 0);
            end
            got = int'($signed(m_tdata[11:0]));
            if (oh0 + r < OH && ow0 + q < OW) begin
              int exp_v;
              exp_v = rq(ref_out[((oc0 + o) * OH + (oh0 + r)) * OW + (ow0 + q)]);
              checks++;
              if (got != exp_v || m_tdata[15:12] != {4{m_tdata[11]}}) begin
                failures++;
                if (failures < 10)
                  $display("FAIL oc %0d oh %0d ow %0d: got %0d expected %0d", oc0 + o, oh0 + r, ow0 + q, got, exp_v);
              end
            end
            checks++;
            if (m_tlast != fin) begin
              failures++;
              $display("FAIL tlast at oc %0d r %0d c %0d", o, r, q);
            end
            @(posedge clk); #1 m_tready = 0;
          end
        end
        // completion interrupt and sticky DONE
        while (!irq) @(posedge clk);
        n_irq++;
        axil_read(6'h04, st);
        checks++;
        if (st[1] !== 1'b1 || st[0] !== 1'b0) begin
          failures++;
          $display("FAIL status %h", st);
        end
        axil_write(6'h04, 32'h2);
        @(posedge clk);
        checks++;
        if (irq) begin failures++; $display("FAIL irq not cleared"); end
      end
    end
  endtask

  initial begin
    logic [31:0] rb;
    awvalid = 0; wvalid = 0; arvalid = 0; bready = 1; rready = 1; wstrb = 4'hF;
    awaddr = 0; araddr = 0; wdata = 0; s_tdata = 0; s_tvalid = 0; m_tready = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    axil_write(6'h08, 32'h1);
    axil_read(6'h08, rb);
    checks++;
    if (rb != 32'h1) begin failures++; $display("FAIL IER readback %h", rb); end
    // Fig. 16 layer: 10x2x2 -> 64x4x4 (kernel 4, stride 2, padding 1 assumed)
    run_layer(10, 64, 2, 2, 4, 2, 1, 2, 128);
    // last layer of a 28x28 MNIST generator: 64x14x14 -> 1x27x27, K=5 S=2 P=2
    run_layer(64, 1, 14, 14, 5, 2, 2, 2, 128);
    // last layer of a 64x64 CelebA generator: 128x32x32 -> 3x63x63, K=5 S=2 P=2
    run_layer(128, 3, 32, 32, 5, 2, 2, 2, 128);
    // latent projection as a 1x1-input deconvolution: 100x1x1 -> 1024x4x4, K=4 S=1 P=0
    run_layer(100, 1024, 1, 1, 4, 1, 0, 1, 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
