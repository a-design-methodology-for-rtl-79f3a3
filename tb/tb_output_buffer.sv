// tb_output_buffer -- accumulates random partial sums into a 2-bank,
// 16-word output buffer in a random address order (never the same address
// twice in a row), with a clear in the middle, and compares the read-out
// port with a model in which a cleared word reads as zero. It also checks
// that one accumulation is written back two clocks after it is presented.
module tb_output_buffer;
  import dcnn_pkg::*;
  localparam int NO = 2, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, acc_valid, rd_en, busy;
  logic [3:0] acc_addr, rd_addr;
  acc_t acc_psum [NO];
  acc_t rd_data [NO];
  int checks = 0, failures = 0;
  longint model [NO][D];

  output_buffer #(.T_OC(NO), .DEPTH(D)) dut (.clk, .rst_n, .clear, .acc_valid, .acc_addr, .acc_psum,
                                             .rd_en, .rd_addr, .rd_data, .busy);

  task automatic check_all();
    for (int a = 0; a < D; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 4'(a);
      @(negedge clk); rd_en = 0;
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (longint'(rd_data[o]) != model[o][a]) begin
          failures++;
          $display("FAIL oc %0d addr %0d got %0d exp %0d", o, a, rd_data[o], model[o][a]);
        end
      end
    end
  endtask

  task automatic accumulate(int n);
    int prev;
    prev = -1;
    for (int j = 0; j < n; j++) begin
      int a;
      do a = $urandom_range(0, D - 1); while (a == prev);
      prev = a;
      @(negedge clk);
      acc_valid = 1; acc_addr = 4'(a);
      for (int o = 0; o < NO; o++) begin
        acc_psum[o] = acc_t'($signed($urandom_range(0, 200000)) - 100000);
        model[o][a] += longint'(acc_psum[o]);
      end
    end
    @(negedge clk); acc_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    clear = 0; acc_valid = 0; rd_en = 0; acc_addr = 0; rd_addr = 0;
    foreach (acc_psum[o]) acc_psum[o] = 0;
    foreach (model[o, a]) model[o][a] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // after reset every word reads as zero
    check_all();
    accumulate(40);
    check_all();
    // clear, then only a few words are touched
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    foreach (model[o, a]) model[o][a] = 0;
    accumulate(5);
    check_all();
    // write-back timing: busy (the write register) is high exactly one clock
    // after the accumulation is presented
    @(negedge clk); acc_valid = 1; acc_addr = 4'd3; acc_psum[0] = 7; acc_psum[1] = -7;
    model[0][3] += 7; model[1][3] -= 7;
    checks++;
    if (busy) begin failures++; $display("FAIL busy early"); end
    @(negedge clk); acc_valid = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy missing"); end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy late"); end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
