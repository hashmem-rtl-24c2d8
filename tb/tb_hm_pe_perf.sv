// tb_hm_pe_perf: self-checking testbench of the performance-optimised PE.
// Two instances search the same 64-slot row buffer: one with a comparison
// unit per slot (one cycle per probe), one with 8 units stepping through
// the row in groups. Results and cycle counts are checked against a
// reference search done in the testbench.
module tb_hm_pe_perf;
  import hm_pkg::*;
  localparam int RB = 4096, NS = RB / KV_W, CU2 = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic [KEY_W-1:0] key;
  logic [SLOT_W-1:0] start_slot, end_slot;
  logic [RB-1:0] rowbuf;
  logic [1:0] busy, done, found;
  logic [VAL_W-1:0] value [2];
  int checks = 0, failures = 0;

  hm_pe_perf #(.ROW_BITS(RB)) dut_full (.clk, .rst_n, .start, .key, .start_slot, .end_slot, .rowbuf,
    .busy(busy[0]), .done(done[0]), .found(found[0]), .value(value[0]));
  hm_pe_perf #(.ROW_BITS(RB), .CMP_UNITS(CU2)) dut_grp (.clk, .rst_n, .start, .key, .start_slot, .end_slot, .rowbuf,
    .busy(busy[1]), .done(done[1]), .found(found[1]), .value(value[1]));
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] kof(int i); return rowbuf[i*KV_W+32 +: 32]; endfunction
  function automatic logic [31:0] vof(int i); return rowbuf[i*KV_W +: 32]; endfunction

  task automatic probe(logic [31:0] k, int lo, int hi);
    int exp_i, cyc[2], expc[2]; logic ef; logic [31:0] ev;
    exp_i = -1;
    for (int i = lo; i <= hi; i++) if (exp_i < 0 && kof(i) == k) exp_i = i;
    ef = exp_i >= 0; ev = ef ? vof(exp_i) : 0;
    expc[0] = 1;
    expc[1] = (ef ? exp_i / CU2 : hi / CU2) - lo / CU2 + 1;
    @(negedge clk);
    key = k; start_slot = 8'(lo); end_slot = 8'(hi); start = 1;
    @(negedge clk); start = 0; cyc = '{0, 0};
    for (int n = 0; n <= NS + 2; n++) begin
      for (int d = 0; d < 2; d++) if (done[d]) cyc[d] = n;
      if (done == 2'b00 && cyc[0] != 0 && cyc[1] != 0) break;
      @(negedge clk);
    end
    for (int d = 0; d < 2; d++) begin
      checks += 2;
      if (found[d] !== ef || value[d] !== ev) begin
        failures++; $display("FAIL dut%0d key %h [%0d,%0d]: got %b/%h exp %b/%h", d, k, lo, hi, found[d], value[d], ef, ev);
      end
      if (cyc[d] != expc[d]) begin
        failures++; $display("FAIL dut%0d latency %0d exp %0d", d, cyc[d], expc[d]);
      end
    end
  endtask

  initial begin
    int a, b;
    for (int i = 0; i < NS; i++) rowbuf[i*KV_W +: KV_W] = {32'(i * 13 + 5), 32'($urandom)};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      a = $urandom % NS; b = a + ($urandom % (NS - a));
      case (t % 4)
        0: probe(kof(a + ($urandom % (b - a + 1))), a, b);
        1: probe(kof($urandom % NS), a, b);
        2: probe(32'hbeef_0000 + 32'(t), a, b);
        default: probe(kof($urandom % NS), 0, NS - 1);
      endcase
    end
    // duplicated keys: the lowest-numbered copy inside the range wins
    for (int t = 0; t < 40; t++) begin
      logic [KV_W-1:0] saved;
      a = $urandom % (NS - 1); b = a + 1 + $urandom % (NS - 1 - a);
      saved = rowbuf[b*KV_W +: KV_W];
      rowbuf[b*KV_W +: KV_W] = {kof(a), 32'h1234_0000 + 32'(t)};
      probe(kof(a), 0, NS - 1);
      probe(kof(a), a, b);
      probe(kof(a), a + 1, NS - 1);
      rowbuf[b*KV_W +: KV_W] = saved;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
