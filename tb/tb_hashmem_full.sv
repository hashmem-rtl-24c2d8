// tb_hashmem_full: the HashMem engine at its default size (8 banks x 128
// subarrays, 2 KB rows of 256 key-value slots, 64 area-optimised PEs per
// bank, DDR4-3200 timing) taking a few complete probe operations. Two
// 128-slot pages share one row of bank 5, subarray 77, and a third page
// sits in bank 0, subarray 0. Probes hit at the start, middle and end of a
// page, miss, and look for a key that lies in the other page of the same
// row. Each result line and each ACT-to-valid-response latency (T_RCD +
// slots scanned + 2) is checked. A final burst of four probes to four banks
// must overlap in the DRAM and return in order.
module tb_hashmem_full;
  import hm_pkg::*;
  localparam int NS = SLOTS_DEF, PS = 128;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 1;
  pim_cmd_t cmd;
  logic [LINE_W-1:0] rsp_line;
  logic dram_act, dram_pre;
  logic [BANK_W-1:0] dram_bank;
  logic [SA_W-1:0] dram_subarray;
  logic [ROW_W-1:0] dram_row;
  logic [ROW_BITS_DEF-1:0] rowbuf [BANKS_DEF][SUBARRAYS_DEF];
  logic [BANKS_DEF-1:0] pe_busy;
  int violations, acts, max_open;
  int checks = 0, failures = 0;
  longint cyc = 0, t_act = 0;

  hashmem_top u_top (.*);
  hm_dram_model u_dram (.clk, .rst_n, .act(dram_act), .pre(dram_pre), .bank(dram_bank),
    .subarray(dram_subarray), .row(dram_row), .rowbuf, .violations, .acts, .max_open);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dram_act) t_act <= cyc;
  end

  function automatic void chk(logic ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endfunction

  function automatic logic [31:0] key_at(int b, int s, int r, int i);
    return 32'(b) << 28 ^ 32'(s) << 20 ^ 32'(r) << 12 ^ 32'(i * 7 + 1);
  endfunction

  task automatic probe(logic [31:0] k, int b, int s, int r, int lo, int hi, logic ef, logic [31:0] ev, int scanned);
    pim_cmd_t c; pim_rsp_t e;
    c.key = k; c.bank = BANK_W'(b); c.subarray = SA_W'(s); c.row = ROW_W'(r);
    c.start_slot = SLOT_W'(lo); c.end_slot = SLOT_W'(hi);
    @(negedge clk); cmd_valid = 1; cmd = c;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!rsp_valid) @(posedge clk);
    e.found = ef; e.value = ev;
    chk(rsp_line == rsp_to_line(e), $sformatf("key %h: got %h expected %b/%h", k, rsp_line[32:0], ef, ev));
    // ACT, T_RCD, scan, output register, result buffer
    chk(cyc - t_act == longint'(T_RCD_DEF + scanned + 2), $sformatf("latency %0d expected %0d", cyc - t_act, T_RCD_DEF + scanned + 2));
    @(posedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // bank 5, subarray 77, row 300: two full pages; bank 0, subarray 0, row 0: one page
    for (int i = 0; i < NS; i++) u_dram.write_kv(5, 77, 300, i, key_at(5, 77, 300, i), 32'(i) + 32'h1000);
    for (int i = 0; i < PS; i++) u_dram.write_kv(0, 0, 0, i, key_at(0, 0, 0, i), 32'(i) + 32'h2000);
    repeat (3) @(posedge clk); rst_n = 1;
    probe(key_at(5, 77, 300, 0),   5, 77, 300, 0,  PS - 1, 1, 32'h1000, 1);
    probe(key_at(5, 77, 300, 90),  5, 77, 300, 0,  PS - 1, 1, 32'h1000 + 90, 91);
    probe(key_at(5, 77, 300, 255), 5, 77, 300, PS, NS - 1, 1, 32'h1000 + 255, 128);
    probe(key_at(5, 77, 300, 200), 5, 77, 300, 0,  PS - 1, 0, 0, PS);         // other page of the row
    probe(32'h7777_7777,           5, 77, 300, 0,  NS - 1, 0, 0, NS);         // absent, whole row
    probe(key_at(0, 0, 0, 127),    0, 0, 0,    0,  PS - 1, 1, 32'h2000 + 127, 128);
    // burst: four probes to four banks sent back to back overlap in the
    // DRAM and come back in command order
    for (int b = 1; b <= 4; b++) u_dram.write_kv(b, 3 * b, 10 * b, b, key_at(b, 3 * b, 10 * b, b), 32'h3000 + 32'(b));
    fork
      for (int b = 1; b <= 4; b++) begin
        pim_cmd_t c;
        c.key = key_at(b, 3 * b, 10 * b, b); c.bank = BANK_W'(b); c.subarray = SA_W'(3 * b);
        c.row = ROW_W'(10 * b); c.start_slot = 0; c.end_slot = SLOT_W'(NS - 1);
        @(negedge clk); cmd_valid = 1; cmd = c;
        @(posedge clk); while (!cmd_ready) @(posedge clk);
        @(negedge clk); cmd_valid = 0;
      end
      for (int b = 1; b <= 4; b++) begin
        @(posedge clk); while (!rsp_valid) @(posedge clk);
        chk(rsp_line == rsp_to_line('{found: 1'b1, value: 32'h3000 + 32'(b)}), $sformatf("burst result %0d: %h", b, rsp_line[32:0]));
      end
    join
    repeat (60) @(posedge clk);
    chk(max_open > 1, "burst probes did not overlap");
    chk(violations == 0, "DRAM timing violations");
    chk(acts == 10, "one ACT per probe");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
