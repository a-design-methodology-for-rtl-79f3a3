// tb_processing_engine -- streams random operand sets (one per clock, with
// occasional idle cycles) through a 3 x 5 processing engine and checks every
// output channel's sum of products, and that each result appears exactly
// LAT = 1 + ceil(log2 5) = 4 clocks after its operands.
module tb_processing_engine;
  import dcnn_pkg::*;
  localparam int NO = 3, NI = 5, LAT = 4, N = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  data_t in_data [NI];
  data_t weight [NO][NI];
  acc_t psum [NO];
  int checks = 0, failures = 0;
  longint exp_q [$];
  int t_in [$];
  int cyc = 0;

  processing_engine #(.T_OC(NO), .T_IC(NI)) dut (.clk, .rst_n, .in_valid, .in_data, .weight, .out_valid, .psum);

  always @(posedge clk) cyc <= cyc + 1;

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int t0;
    t0 = t_in.pop_front();
    checks++;
    if (cyc - t0 != LAT) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    for (int o = 0; o < NO; o++) begin
      longint e;
      e = exp_q.pop_front();
      checks++;
      if (longint'(psum[o]) != e) begin failures++; $display("FAIL oc %0d got %0d exp %0d", o, psum[o], e); end
    end
  end

  initial begin
    int sent;
    in_valid = 0;
    foreach (in_data[i]) in_data[i] = 0;
    foreach (weight[o, i]) weight[o][i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    sent = 0;
    while (sent < N) begin
      @(negedge clk);
      if ($urandom_range(0, 4) == 0) begin in_valid = 0; continue; end
      in_valid = 1;
      foreach (in_data[i]) in_data[i] = data_t'($urandom);
      foreach (weight[o, i]) weight[o][i] = data_t'($urandom);
      if (sent < 3) begin  // extremes
        foreach (in_data[i]) in_data[i] = (sent == 1) ? 12'sh800 : 12'sh7FF;
        foreach (weight[o, i]) weight[o][i] = (sent == 2) ? 12'sh7FF : 12'sh800;
      end
      for (int o = 0; o < NO; o++) begin
        longint s;
        s = 0;
        for (int i = 0; i < NI; i++) s += longint'(in_data[i]) * longint'(weight[o][i]);
        exp_q.push_back(s);
      end
      t_in.push_back(cyc);
      sent++;
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (t_in.size() != 0) begin failures++; $display("FAIL %0d results missing", t_in.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
