// tb_hm_rlu: self-checking testbench of the rank-level unit.
// Behavioural PEs, one per bank, answer each start after a random number of
// cycles with found = key[0] and value = key * 3. The testbench sends
// bursts of commands to four banks, so that probes overlap and the command
// queue fills. It takes results with a ready that sometimes stalls, so the
// reorder buffer fills. It checks:
// * the results, in command order and as zero-padded cache lines;
// * each ACT's address against the oldest pending command of that bank;
// * the PE start fields;
// * the DRAM timing: PE start at least T_RCD after ACT (and at most a few
//   cycles of bus contention later); PRE at least T_RAS after ACT and after
//   the PE finished; a bank's next ACT at least T_RP after its PRE; ACTs at
//   least T_RRD apart; no fifth ACT within T_FAW.
// It also counts the overlap of probes in different banks and ACTs held
// back by tFAW, and fails if either never happens.
module tb_hm_rlu;
  import hm_pkg::*;
  localparam int NB = 4, TRCD = 5, TRAS = 14, TRP = 4, TRRD = 2, TFAW = 26;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0;
  pim_cmd_t cmd;
  logic [LINE_W-1:0] rsp_line;
  logic dram_act, dram_pre, pe_start;
  logic [NB-1:0] pe_done = '0, pe_found = '0;
  logic [VAL_W-1:0] pe_value [NB];
  logic [BANK_W-1:0] dram_bank, pe_bank;
  logic [SA_W-1:0] dram_subarray, pe_subarray;
  logic [ROW_W-1:0] dram_row;
  logic [KEY_W-1:0] pe_key;
  logic [SLOT_W-1:0] pe_start_slot, pe_end_slot;
  int checks = 0, failures = 0;
  int cmd_stalls = 0, rsp_full_cycles = 0, overlap_cycles = 0, faw_holds = 0;

  hm_rlu #(.BANKS(NB), .T_RCD(TRCD), .T_RAS(TRAS), .T_RP(TRP), .T_RRD(TRRD), .T_FAW(TFAW),
           .CMD_DEPTH(4), .RSP_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  pim_cmd_t sent [NB][$];
  pim_cmd_t cur [NB];
  logic [LINE_W-1:0] expected [$];
  longint cyc = 0, last_act = -1000;
  longint t_act [NB], t_pre [NB], t_done [NB], acts4 [4];
  logic open_b [NB];
  int cnt [NB];
  logic [31:0] pkey [NB];
  int n_rsp = 0;
  localparam int N = 80;

  function automatic void chk(logic ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endfunction

  initial begin
    foreach (t_act[b]) begin t_act[b] = -1000; t_pre[b] = -1000; t_done[b] = -1000; open_b[b] = 0; pe_value[b] = 0; cnt[b] = 0; end
    foreach (acts4[i]) acts4[i] = -1000;
    #4000000; failures++; $display("watchdog: n_rsp %0d sent0 %0d st %p used %0d", n_rsp, sent[0].size(), dut.st_q, dut.used_q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // behavioural PEs and protocol monitor
  always @(posedge clk) begin
    int b, nopen;
    b = int'(dram_bank);
    if (dram_act) begin
      chk(sent[b].size() > 0, "ACT without command");
      cur[b] = sent[b].pop_front();
      chk(dram_subarray == cur[b].subarray && dram_row == cur[b].row, "ACT address");
      chk(cyc - t_pre[b] >= TRP, "tRP");
      chk(cyc - last_act >= TRRD, "tRRD");
      chk(cyc - acts4[3] >= TFAW, "tFAW");
      chk(!open_b[b], "ACT to open bank");
      for (int i = 3; i > 0; i--) acts4[i] = acts4[i-1];
      acts4[0] = cyc; last_act = cyc; t_act[b] = cyc; open_b[b] = 1;
    end
    if (dram_pre) begin
      chk(open_b[b], "PRE to closed bank");
      chk(cyc - t_act[b] >= TRAS, "tRAS");
      chk(t_done[b] > t_act[b], "PRE before PE finished");
      t_pre[b] = cyc; open_b[b] = 0;
    end
    if (pe_start) begin
      int pb;
      pb = int'(pe_bank);
      chk(cyc - t_act[pb] >= TRCD && cyc - t_act[pb] <= TRCD + NB, $sformatf("tRCD: start %0d cycles after ACT", cyc - t_act[pb]));
      chk(open_b[pb], "start to closed bank");
      chk(pe_key == cur[pb].key && pe_subarray == cur[pb].subarray &&
          pe_start_slot == cur[pb].start_slot && pe_end_slot == cur[pb].end_slot, "PE fields");
      cnt[pb] = 1 + $urandom % 25; pkey[pb] = pe_key;
    end
    for (int i = 0; i < NB; i++) begin
      pe_done[i] <= 0;
      pe_value[i] <= $urandom; pe_found[i] <= 1'($urandom);
      if (cnt[i] > 0) begin
        cnt[i]--;
        if (cnt[i] == 0) begin
          pe_done[i] <= 1; pe_found[i] <= pkey[i][0]; pe_value[i] <= pkey[i] * 3;
          t_done[i] = cyc;
        end
      end
    end
    nopen = 0;
    foreach (open_b[i]) nopen += int'(open_b[i]);
    if (nopen > 1) overlap_cycles++;
    if (cmd_valid && !cmd_ready) cmd_stalls++;
    if (dut.rb_full) rsp_full_cycles++;
    if (32'(dut.rrd_q) >= TRRD && 32'(dut.faw_q[3]) < TFAW) begin
      for (int i = 0; i < NB; i++) if (dut.st_q[i] == 3'd1) begin faw_holds++; break; end
    end
    cyc++;
  end

  // command driver: bursts
  initial begin
    repeat (3) @(posedge clk); rst_n <= 1;
    for (int i = 0; i < N; i++) begin
      pim_cmd_t c;
      c.key = $urandom; c.bank = BANK_W'($urandom % NB); c.subarray = $urandom; c.row = $urandom;
      c.start_slot = $urandom % 128; c.end_slot = c.start_slot + $urandom % 128;
      @(negedge clk); cmd_valid = 1; cmd = c;
      @(posedge clk); while (!cmd_ready) @(posedge clk);
      sent[c.bank].push_back(c);
      expected.push_back(rsp_to_line('{found: c.key[0], value: c.key[0] ? c.key * 3 : 0}));
      @(negedge clk); cmd_valid = 0;
      if (i % 10 == 9) repeat (200) @(negedge clk);
    end
  end

  // result collector with stalls
  initial begin
    @(posedge rst_n);
    while (n_rsp < N) begin
      @(negedge clk); rsp_ready = ((cyc / 400) % 3 != 0) && (($urandom % 3) != 0);
      @(posedge clk);
      if (rsp_valid && rsp_ready) begin
        chk(expected.size() > 0 && rsp_line == expected.pop_front(), "result line");
        n_rsp++;
      end
    end
    repeat (50) @(negedge clk);
    chk(cmd_stalls > 0, "command queue never filled");
    chk(rsp_full_cycles > 0, "reorder buffer never filled");
    chk(overlap_cycles > 0, "probes never overlapped");
    chk(faw_holds > 0, "tFAW never held an ACT back");
    $display("cmd stalls %0d, rob-full cycles %0d, overlap cycles %0d, tFAW holds %0d",
             cmd_stalls, rsp_full_cycles, overlap_cycles, faw_holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
