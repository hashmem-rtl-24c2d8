// tb_hm_bank: self-checking testbench of a bank's PE array, both variants.
// 8 subarrays with 16-slot rows; the area variant has 4 PEs (two subarrays
// each), the performance variant one PE per subarray with 4 comparison
// units. Random probes to random subarrays are checked for value, found
// flag and latency against a reference search in the testbench.
module tb_hm_bank;
  import hm_pkg::*;
  localparam int RB = 1024, NS = RB / KV_W, NSA = 8, NPE = 4, CU = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic [SA_W-1:0] subarray;
  logic [KEY_W-1:0] key;
  logic [SLOT_W-1:0] start_slot, end_slot;
  logic [RB-1:0] rowbuf [NSA];
  logic [1:0] busy, done, found;
  logic [VAL_W-1:0] value [2];
  int checks = 0, failures = 0;

  hm_bank #(.ROW_BITS(RB), .SUBARRAYS(NSA), .PE_MODE(PE_AREA), .AREA_PES(NPE)) dut_area (
    .clk, .rst_n, .start, .subarray, .key, .start_slot, .end_slot, .rowbuf,
    .busy(busy[0]), .done(done[0]), .found(found[0]), .value(value[0]));
  hm_bank #(.ROW_BITS(RB), .SUBARRAYS(NSA), .PE_MODE(PE_PERF), .CMP_UNITS(CU)) dut_perf (
    .clk, .rst_n, .start, .subarray, .key, .start_slot, .end_slot, .rowbuf,
    .busy(busy[1]), .done(done[1]), .found(found[1]), .value(value[1]));
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] kof(int s, int i); return rowbuf[s][i*KV_W+32 +: 32]; endfunction
  function automatic logic [31:0] vof(int s, int i); return rowbuf[s][i*KV_W +: 32]; endfunction

  task automatic probe(logic [31:0] k, int s, int lo, int hi);
    int exp_i, cyc[2], expc[2]; logic ef; logic [31:0] ev;
    exp_i = -1;
    for (int i = lo; i <= hi; i++) if (exp_i < 0 && kof(s, i) == k) exp_i = i;
    ef = exp_i >= 0; ev = ef ? vof(s, exp_i) : 0;
    expc[0] = ef ? exp_i - lo + 1 : hi - lo + 1;
    expc[1] = (ef ? exp_i / CU : hi / CU) - lo / CU + 1;
    @(negedge clk);
    key = k; subarray = SA_W'(s); start_slot = 8'(lo); end_slot = 8'(hi); start = 1;
    @(negedge clk); start = 0; cyc = '{0, 0};
    for (int n = 0; n <= NS + 2; n++) begin
      for (int d = 0; d < 2; d++) if (done[d]) cyc[d] = n;
      if (cyc[0] != 0 && cyc[1] != 0) break;
      @(negedge clk);
    end
    @(negedge clk);
    checks++;
    if (busy != 2'b00) begin failures++; $display("FAIL busy after done"); end
    for (int d = 0; d < 2; d++) begin
      checks += 2;
      if (found[d] !== ef || value[d] !== ev) begin
        failures++; $display("FAIL dut%0d key %h sa %0d [%0d,%0d]: got %b/%h exp %b/%h", d, k, s, lo, hi, found[d], value[d], ef, ev);
      end
      if (cyc[d] != expc[d]) begin
        failures++; $display("FAIL dut%0d latency %0d exp %0d", d, cyc[d], expc[d]);
      end
    end
  endtask

  initial begin
    int s, a, b;
    for (int r = 0; r < NSA; r++)
      for (int i = 0; i < NS; i++) rowbuf[r][i*KV_W +: KV_W] = {32'(r * 100 + i * 3 + 1), 32'($urandom)};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      s = $urandom % NSA; a = $urandom % NS; b = a + ($urandom % (NS - a));
      case (t % 4)
        0: probe(kof(s, a + ($urandom % (b - a + 1))), s, a, b);
        1: probe(kof($urandom % NSA, $urandom % NS), s, a, b);   // key of another subarray
        2: probe(32'hcafe_0000 + 32'(t), s, a, b);
        default: probe(kof(s, $urandom % NS), s, 0, NS - 1);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
