// tb_hm_pe_area: self-checking testbench of the area-optimised PE.
// Two subarray row buffers of 64 slots are filled with distinct random keys;
// probes hit, miss, fall outside the page range or hit duplicated keys.
// Result and latency (one cycle per compared slot) are checked against a
// reference search done in the testbench.
module tb_hm_pe_area;
  import hm_pkg::*;
  localparam int RB = 4096, NS = RB / KV_W, SPP = 2;
  logic clk = 0, rst_n = 0, start = 0;
  logic [KEY_W-1:0] key;
  logic [SLOT_W-1:0] start_slot, end_slot;
  logic [0:0] sa_sel;
  logic [RB-1:0] rowbuf [SPP];
  logic busy, done, found;
  logic [VAL_W-1:0] value;
  int checks = 0, failures = 0;

  hm_pe_area #(.ROW_BITS(RB), .SA_PER_PE(SPP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] kof(int s, int i); return rowbuf[s][i*KV_W+32 +: 32]; endfunction
  function automatic logic [31:0] vof(int s, int i); return rowbuf[s][i*KV_W +: 32]; endfunction

  task automatic probe(logic [31:0] k, int s, int lo, int hi);
    int exp_i, cyc; logic ef; logic [31:0] ev;
    exp_i = -1;
    for (int i = lo; i <= hi; i++) if (exp_i < 0 && kof(s, i) == k) exp_i = i;
    ef = exp_i >= 0; ev = ef ? vof(s, exp_i) : 0;
    @(negedge clk);
    key = k; sa_sel = 1'(s); start_slot = 8'(lo); end_slot = 8'(hi); start = 1;
    @(negedge clk); start = 0; cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (found !== ef || value !== ev) begin
      failures++; $display("FAIL key %h sa %0d [%0d,%0d]: got %b/%h exp %b/%h", k, s, lo, hi, found, value, ef, ev);
    end
    if (cyc != (ef ? exp_i - lo + 1 : hi - lo + 1)) begin
      failures++; $display("FAIL latency %0d for key %h exp_i %0d lo %0d hi %0d", cyc, k, exp_i, lo, hi);
    end
  endtask

  initial begin
    int s, a, b;
    for (int r = 0; r < SPP; r++)
      for (int i = 0; i < NS; i++) rowbuf[r][i*KV_W +: KV_W] = {32'(r * 1000 + i * 7 + 1), 32'($urandom)};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      s = $urandom % SPP; a = $urandom % NS; b = a + ($urandom % (NS - a));
      case (t % 4)
        0: probe(kof(s, a + ($urandom % (b - a + 1))), s, a, b);  // hit in range
        1: probe(kof(s, $urandom % NS), s, a, b);                 // maybe outside range
        2: probe(32'hdead_0000 + 32'(t), s, a, b);               // miss
        default: probe(kof(s, b), s, 0, NS - 1);                  // full row
      endcase
    end
    // duplicated key: first copy wins
    rowbuf[1][20*KV_W +: KV_W] = {kof(1, 9), 32'h1234_5678};
    probe(kof(1, 9), 1, 0, NS - 1);
    probe(kof(1, 9), 1, 10, NS - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
