// tb_weight_buffer -- fills a 3 x 4 x (3x3) weight buffer with distinct
// values and checks that one read address returns the matching kernel word
// of every (o_c, i_c) bank one clock later.
module tb_weight_buffer;
  import dcnn_pkg::*;
  localparam int NO = 3, NI = 4, KM = 3, D = KM * KM;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [1:0] woc, wic;
  logic [3:0] waddr, raddr;
  data_t wdata, rdata [NO][NI];
  int checks = 0, failures = 0;
  data_t model [NO][NI][D];

  weight_buffer #(.T_OC(NO), .T_IC(NI), .K_MAX(KM)) dut (.clk, .we, .woc, .wic, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    we = 0; re = 0; woc = 0; wic = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int o = 0; o < NO; o++) for (int i = 0; i < NI; i++) for (int a = 0; a < D; a++) begin
      model[o][i][a] = data_t'($urandom);
      @(negedge clk); we = 1; woc = 2'(o); wic = 2'(i); waddr = 4'(a); wdata = model[o][i][a];
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); re = 1; raddr = 4'(a);
      @(negedge clk); re = 0;
      for (int o = 0; o < NO; o++) for (int i = 0; i < NI; i++) begin
        checks++;
        if (rdata[o][i] !== model[o][i][a]) begin
          failures++;
          $display("FAIL oc %0d ic %0d k %0d got %0d exp %0d", o, i, a, rdata[o][i], model[o][i][a]);
        end
      end
    end
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
