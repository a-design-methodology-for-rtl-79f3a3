// tb_input_buffer -- writes every word of every bank of a small input buffer
// (4 banks x 30 words) with distinct values, then reads each address and
// checks that all banks return their own word one clock after the address.
module tb_input_buffer;
  import dcnn_pkg::*;
  localparam int NB = 4, D = 30;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [1:0] wbank;
  logic [4:0] waddr, raddr;
  data_t wdata, rdata [NB];
  int checks = 0, failures = 0;
  data_t model [NB][D];

  input_buffer #(.T_IC(NB), .DEPTH(D)) dut (.clk, .we, .wbank, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    we = 0; re = 0; wbank = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int b = 0; b < NB; b++) for (int a = 0; a < D; a++) begin
      model[b][a] = data_t'($urandom);
      @(negedge clk); we = 1; wbank = 2'(b); waddr = 5'(a); wdata = model[b][a];
    end
    @(negedge clk); we = 0;
    for (int a = D - 1; a >= 0; a--) begin
      @(negedge clk); re = 1; raddr = 5'(a);
      @(negedge clk); re = 0; raddr = 5'((a + 7) % D);
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rdata[b] !== model[b][a]) begin
          failures++;
          $display("FAIL bank %0d addr %0d got %0d exp %0d", b, a, rdata[b], model[b][a]);
        end
      end
      // read data must hold while re is low
      @(negedge clk);
      checks++;
      if (rdata[0] !== model[0][a]) begin failures++; $display("FAIL hold"); end
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
