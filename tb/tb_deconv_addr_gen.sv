// tb_deconv_addr_gen -- runs the address generator over two layer shapes
// (K=5 S=2 P=2 II=2 and K=3 S=1 P=1 II=1) against a pipeline model whose
// busy flag stays high for L clocks after each issue. Every issued
// (input, weight, output) address triple is compared, in order, with a list
// built here by brute force: for each kernel row the output phase is found
// by search rather than by the closed formula. Timing checks: inside a row
// issues are exactly II clocks apart; a row starts exactly one clock after
// the pipeline has drained; done follows the drain of the last row. Two
// convolution-mode runs check the direct (no phase) addressing.
module tb_deconv_addr_gen;
  import dcnn_pkg::*;
  localparam int T_OH = 8, T_OW = 8, KM = 5, IN_H = 7, IN_W = 7, L = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, pipe_busy, issue, busy, done;
  logic [5:0] in_addr;
  logic [4:0] w_addr;
  logic [5:0] out_addr;
  layer_cfg_t cfg;
  int checks = 0, failures = 0;
  int cyc = 0;

  deconv_addr_gen #(.T_OH(T_OH), .T_OW(T_OW), .K_MAX(KM), .IN_H(IN_H), .IN_W(IN_W)) dut (
    .clk, .rst_n, .start, .cfg, .pipe_busy, .issue, .in_addr, .w_addr, .out_addr, .busy, .done);

  always @(posedge clk) cyc <= cyc + 1;

  // pipeline model: an issue keeps the pipeline busy for L clocks
  logic [L-1:0] busy_sr;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) busy_sr <= '0;
    else        busy_sr <= {busy_sr[L-2:0], issue};
  assign pipe_busy = |busy_sr;

  function automatic int phase(int k, int s, int p);
    for (int f = 0; f < s; f++) if (((f + p - k) % s + s) % s == 0) return f;
    return -1;
  endfunction


  // issue monitor
  int got_n = 0, row_pos = 0, prev_issue = -1, busy_low_since = -1, cur_cols = 1, cur_ii = 1;
  int q_in [$], q_w [$], q_out [$];
  always @(posedge clk) if (rst_n) begin
    if (issue) begin
      q_in.push_back(in_addr); q_w.push_back(w_addr); q_out.push_back(out_addr);
      if (row_pos != 0) begin
        checks++;
        if (cyc - prev_issue != cur_ii) begin failures++; $display("FAIL II spacing %0d", cyc - prev_issue); end
      end else if (prev_issue >= 0) begin
        checks++;
        if (busy_low_since + 1 != cyc) begin failures++; $display("FAIL row start %0d, drained at %0d", cyc, busy_low_since); end
      end
      prev_issue = cyc;
      row_pos = (row_pos + 1) % cur_cols;
    end
    if (pipe_busy) busy_low_since = cyc + 1;
  end

  task automatic run_check(int K, S, P, rows, cols, II, int CV = 0);
    int exp_in [$], exp_w [$], exp_out [$];
    int dmin, t0;
    dmin = 1000;
    for (int k = 0; k < K; k++) begin
      int d;
      d = (phase(k, S, P) + P - k) / S;
      if (d < dmin) dmin = d;
    end
    for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
      for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
        int oh, ow;
        if (CV) begin
          // convolution: input row S*o_h + k_h relative to the window start
          exp_in.push_back((r * S + kh) * IN_W + c * S + kw);
          exp_out.push_back(r * T_OW + c);
        end else begin
          oh = r * S + phase(kh, S, P);
          ow = c * S + phase(kw, S, P);
          exp_in.push_back(((oh + P - kh) / S - dmin) * IN_W + (ow + P - kw) / S - dmin);
          exp_out.push_back(oh * T_OW + ow);
        end
        exp_w.push_back(kh * KM + kw);
      end
    q_in.delete(); q_w.delete(); q_out.delete();
    cur_cols = cols; cur_ii = II; row_pos = 0; prev_issue = -1;
    cfg = '{conv: CV[0], k: 4'(K), s: 4'(S), p: 4'(P), rows: 8'(rows), cols: 8'(cols), ic_active: 8'd1,
            oc_active: 8'd1, ii: 4'(II)};
    @(negedge clk); start = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (q_in.size() != exp_in.size()) begin
      failures++; $display("FAIL issued %0d expected %0d", q_in.size(), exp_in.size());
    end
    for (int j = 0; j < exp_in.size() && j < q_in.size(); j++) begin
      checks++;
      if (q_in[j] != exp_in[j] || q_w[j] != exp_w[j] || q_out[j] != exp_out[j]) begin
        failures++;
        if (failures < 10) $display("FAIL iter %0d: in %0d/%0d w %0d/%0d out %0d/%0d", j,
                                    q_in[j], exp_in[j], q_w[j], exp_w[j], q_out[j], exp_out[j]);
      end
    end
    // done comes when the last row has drained
    checks++;
    if (pipe_busy) begin failures++; $display("FAIL done while busy"); end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
    @(negedge clk);
  endtask

  initial begin
    start = 0;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_check(5, 2, 2, 4, 4, 2);
    run_check(3, 1, 1, 5, 5, 1);
    run_check(4, 2, 1, 3, 2, 3);
    run_check(3, 2, 1, 3, 2, 2, 1);   // convolution mode
    run_check(5, 1, 2, 3, 3, 1, 1);
    // an empty tile finishes at once
    cfg.rows = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!done) begin failures++; $display("FAIL empty tile done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
