// tb_hashmem_top: end-to-end testbench of the HashMem engine at a reduced
// size (2 banks, 4 subarrays, 16-slot rows, short DRAM timing). Runs the
// same hashmap scenario on the area-optimised and the performance-optimised
// variant (see hm_top_harness) and sums their checks.
module tb_hashmem_top;
  logic clk = 0;
  int c0, f0, c1, f1;
  logic d0, d1;
  always #5 clk = ~clk;

  hm_top_harness #(.MODE(hm_pkg::PE_AREA)) u_area (.clk, .checks(c0), .failures(f0), .finished(d0));
  hm_top_harness #(.MODE(hm_pkg::PE_PERF)) u_perf (.clk, .checks(c1), .failures(f1), .finished(d1));

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
  initial begin
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
