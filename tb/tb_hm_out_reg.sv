// tb_hm_out_reg: self-checking testbench of the PE output register.
// Drives random load/clear sequences and compares the held found flag and
// value with a reference model kept in the testbench.
module tb_hm_out_reg;
  import hm_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, load = 0, found_d = 0;
  logic [VAL_W-1:0] value_d = '0, value_q;
  logic found_q;
  logic ref_f; logic [VAL_W-1:0] ref_v;
  int checks = 0, failures = 0;

  hm_out_reg dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ref_f = 0; ref_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (found_q !== ref_f || value_q !== ref_v) begin
        failures++; $display("FAIL cycle %0d: got %b/%h expected %b/%h", i, found_q, value_q, ref_f, ref_v);
      end
      clear = ($urandom % 8) == 0; load = ($urandom % 3) == 0;
      found_d = $urandom; value_d = $urandom;
      if (clear) begin ref_f = 0; ref_v = 0; end
      else if (load) begin ref_f = found_d; ref_v = found_d ? value_d : '0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
