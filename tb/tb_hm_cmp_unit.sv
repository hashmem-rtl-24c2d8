// tb_hm_cmp_unit: self-checking testbench of the comparison unit.
// Applies random and equal key pairs with the enable on and off and checks
// hit and the value field against a reference computed here.
module tb_hm_cmp_unit;
  import hm_pkg::*;
  logic [KEY_W-1:0] key;
  logic [KV_W-1:0]  slot;
  logic             en, hit;
  logic [VAL_W-1:0] value;
  int checks = 0, failures = 0;

  hm_cmp_unit dut (.key, .slot, .en, .hit, .value);

  task automatic check(logic [KEY_W-1:0] k, logic [KEY_W-1:0] sk, logic [VAL_W-1:0] sv, logic e);
    key = k; slot = {sk, sv}; en = e;
    #1;
    checks++;
    if (hit !== (e && (k == sk)) || value !== sv) begin
      failures++;
      $display("FAIL key=%h slot_key=%h en=%b hit=%b value=%h", k, sk, e, hit, value);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] a, v;
    for (int i = 0; i < 500; i++) begin
      a = $urandom; v = $urandom;
      check(a, a, v, 1'b1);                 // equal, enabled
      check(a, a, v, 1'b0);                 // equal, masked
      check(a, a ^ (32'd1 << (i % 32)), v, 1'b1);  // one bit off
      check(a, $urandom, v, 1'b1);          // random
    end
    check(32'h0, 32'h0, 32'h5, 1'b1);
    check(32'hffff_ffff, 32'hffff_ffff, 32'h7, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
