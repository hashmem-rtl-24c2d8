// hm_top_harness: end-to-end test bench harness for hashmem_top.
//
// Builds a hashmap in software the way the host library would: keys are
// hashed to buckets, each bucket lives in a chain of PAGE_SLOTS-slot pages,
// a full page gets an overflow page linked behind it, several pages share
// one DRAM row, and deleted keys are overwritten by a tombstone key. The
// pages are written into a DRAM model; then lookups are issued, one probe
// command per page of the key's bucket, through the design's command port,
// and every returned cache line is checked against a search of the
// software copy. It also checks each PE's scan latency (start to done),
// lets the DRAM model check the row timing, and counts the mechanisms
// exercised: hit, miss, hit in an overflow page, key present only in a
// co-located page of the same row, tombstone, command-queue backpressure,
// a full result buffer and probes overlapping in different banks.
module hm_top_harness
  import hm_pkg::*;
#(
  parameter pe_mode_e    MODE       = PE_AREA,
  parameter int unsigned BANKS      = 2,
  parameter int unsigned SUBARRAYS  = 4,
  parameter int unsigned RB         = 1024,
  parameter int unsigned AREA_PES   = 2,
  parameter int unsigned CU         = 4,
  parameter int unsigned TRCD       = 4,
  parameter int unsigned TRAS       = 10,
  parameter int unsigned TRP        = 3,
  parameter int unsigned TRRD       = 2,
  parameter int unsigned TFAW       = 12,
  parameter int unsigned PAGE_SLOTS = 8,
  parameter int unsigned NKEYS      = 120,
  parameter int unsigned NBUCKETS   = 6,
  parameter int unsigned NLOOKUPS   = 80
)(
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int NS = RB / KV_W, PPR = NS / PAGE_SLOTS, MAXP = 256;
  localparam logic [31:0] TOMB = 32'hffff_ffff;

  logic rst_n = 0, cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0;
  pim_cmd_t cmd;
  logic [LINE_W-1:0] rsp_line;
  logic dram_act, dram_pre;
  logic [BANK_W-1:0] dram_bank;
  logic [SA_W-1:0] dram_subarray;
  logic [ROW_W-1:0] dram_row;
  logic [RB-1:0] rowbuf [BANKS][SUBARRAYS];
  logic [BANKS-1:0] pe_busy;
  int violations, acts, max_open;

  hashmem_top #(.BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .ROW_BITS(RB), .PE_MODE(MODE),
    .AREA_PES(AREA_PES), .CMP_UNITS(CU), .T_RCD(TRCD), .T_RAS(TRAS), .T_RP(TRP),
    .T_RRD(TRRD), .T_FAW(TFAW),
    .CMD_DEPTH(4), .RSP_DEPTH(2)) u_top (.*);
  hm_dram_model #(.BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .ROW_BITS(RB),
    .T_RCD(TRCD), .T_RAS(TRAS), .T_RP(TRP), .T_RRD(TRRD), .T_FAW(TFAW)) u_dram (.clk, .rst_n,
    .act(dram_act), .pre(dram_pre), .bank(dram_bank), .subarray(dram_subarray), .row(dram_row),
    .rowbuf, .violations, .acts, .max_open);

  // ---- software copy of the hashmap
  logic [31:0] pk [MAXP][PAGE_SLOTS];
  logic [31:0] pv [MAXP][PAGE_SLOTS];
  int          pcount [MAXP];
  int          chain [NBUCKETS][$];
  int          npages = 0;
  logic [31:0] keys [$], vals [$], deleted [$];

  // mechanism counters
  int n_hit = 0, n_miss = 0, n_ovf_hit = 0, n_coloc = 0, n_tomb = 0, n_cmd_stall = 0, n_rsp_full = 0;

  function automatic int bucket_of(logic [31:0] k);
    logic [63:0] h; h = 64'(k) * 64'h9E37_79B1;
    return int'(h[47:32] % NBUCKETS);
  endfunction
  function automatic void page_addr(int p, output int b, output int s, output int r, output int lo);
    int rg; rg = p / PPR; lo = (p % PPR) * PAGE_SLOTS;
    b = rg % BANKS; s = (rg / BANKS) % SUBARRAYS; r = rg / (BANKS * SUBARRAYS);
  endfunction
  function automatic int find_in_page(int p, logic [31:0] k);
    for (int i = 0; i < PAGE_SLOTS; i++) if (pk[p][i] == k) return i;
    return -1;
  endfunction
  function automatic void chk(logic ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL [%s]: %s", MODE == PE_AREA ? "area" : "perf", msg); end
  endfunction

  task automatic insert(logic [31:0] k, logic [31:0] v);
    int bk, p, b, s, r, lo;
    bk = bucket_of(k);
    if (chain[bk].size() == 0 || pcount[chain[bk][$]] == PAGE_SLOTS) begin
      p = npages++;                       // pim_malloc: fresh page, linked into the chain
      chain[bk].push_back(p);
    end
    p = chain[bk][$];
    pk[p][pcount[p]] = k; pv[p][pcount[p]] = v;
    page_addr(p, b, s, r, lo);
    u_dram.write_kv(b, s, r, lo + pcount[p], k, v);
    pcount[p]++;
  endtask

  task automatic remove(logic [31:0] k);
    int bk, b, s, r, lo, i;
    bk = bucket_of(k);
    foreach (chain[bk][j]) begin
      i = find_in_page(chain[bk][j], k);
      if (i >= 0) begin
        pk[chain[bk][j]][i] = TOMB; pv[chain[bk][j]][i] = 0;
        page_addr(chain[bk][j], b, s, r, lo);
        u_dram.write_kv(b, s, r, lo + i, TOMB, 0);
      end
    end
  endtask

  // ---- probe traffic
  pim_cmd_t    cmdq [$];
  int          exp_page [$];
  logic [31:0] exp_key [$];
  int          lat_q [BANKS][$];
  int          n_sent = 0, n_recv = 0, n_total = 0;
  longint      cyc = 0, t_start [BANKS];

  // PE latency per bank: done high n + 1 cycles after start, sampled in
  // the middle of each cycle
  always @(negedge clk) begin
    if (cmd_valid && !cmd_ready) n_cmd_stall++;
    if (rst_n && u_top.u_rlu.rb_full) n_rsp_full++;
    for (int b = 0; b < BANKS; b++) if (u_top.bank_done[b]) begin
      int n;
      n = lat_q[b].pop_front();
      chk(cyc - t_start[b] == longint'(n + 1), $sformatf("bank %0d scan latency %0d, expected %0d", b, cyc - t_start[b], n + 1));
    end
    if (u_top.pe_start) t_start[u_top.pe_bank] = cyc;
    cyc++;
  end

  // cycles the PE needs on page p for key k
  function automatic int scan_cycles(int p, logic [31:0] k);
    int i, lo, hi, b, s, r;
    page_addr(p, b, s, r, lo); hi = lo + PAGE_SLOTS - 1;
    i = find_in_page(p, k);
    if (MODE == PE_AREA) return (i >= 0) ? i + 1 : PAGE_SLOTS;
    return ((i >= 0 ? lo + i : hi) / CU) - lo / CU + 1;
  endfunction

  task automatic probe_page(logic [31:0] k, int p);
    int b, s, r, lo;
    pim_cmd_t c;
    page_addr(p, b, s, r, lo);
    c.key = k; c.bank = BANK_W'(b); c.subarray = SA_W'(s); c.row = ROW_W'(r);
    c.start_slot = SLOT_W'(lo); c.end_slot = SLOT_W'(lo + PAGE_SLOTS - 1);
    cmdq.push_back(c); exp_page.push_back(p); exp_key.push_back(k);
    lat_q[b].push_back(scan_cycles(p, k));
    n_total++;
  endtask

  // one probe command per page of the key's bucket
  task automatic lookup(logic [31:0] k);
    int bk;
    bk = bucket_of(k);
    foreach (chain[bk][j]) probe_page(k, chain[bk][j]);
  endtask

  // probe the page that shares a row with the page holding k: the key is
  // in the row buffer but outside the probed page's slot range
  task automatic probe_neighbour(logic [31:0] k);
    int bk, q;
    bk = bucket_of(k);
    foreach (chain[bk][j]) if (find_in_page(chain[bk][j], k) >= 0) begin
      q = (chain[bk][j] % PPR == 0) ? chain[bk][j] + 1 : chain[bk][j] - 1;
      probe_page(k, q);
    end
  endtask

  initial begin
    finished = 0; checks = 0; failures = 0;
    foreach (pcount[i]) pcount[i] = 0;
    foreach (pk[i, j]) begin pk[i][j] = 0; pv[i][j] = 0; end
    // dataset: distinct non-zero keys, never the tombstone
    for (int i = 0; i < NKEYS; i++) begin
      logic [31:0] k;
      k = 32'(i) * 32'h0001_0003 + 32'h55 + ($urandom & 32'hff00_0000);
      if (k == TOMB || k == 0) k = 32'h1234 + 32'(i);
      keys.push_back(k); vals.push_back($urandom);
      insert(k, vals[i]);
    end
    for (int i = 0; i < NKEYS; i += 12) begin deleted.push_back(keys[i]); remove(keys[i]); end
    // lookups: present keys, deleted keys, absent keys
    for (int i = 0; i < NLOOKUPS; i++) begin
      case (i % 4)
        0, 1: lookup(keys[$urandom % NKEYS]);
        2:    begin
                lookup(deleted[$urandom % deleted.size()]);
                probe_neighbour(keys[1 + $urandom % (NKEYS - 1)]);
              end
        default: lookup(32'h7000_0000 + 32'(i));
      endcase
    end
    repeat (3) @(posedge clk); rst_n <= 1;
    fork
      // command driver: back to back
      while (n_sent < n_total) begin
        @(negedge clk); cmd_valid = 1; cmd = cmdq[n_sent];
        @(posedge clk); while (!cmd_ready) @(posedge clk);
        n_sent++;
        @(negedge clk); cmd_valid = 0;
      end
      // collector: stalls for a while at the start, then random ready
      while (n_recv < n_total) begin
        int p, i; logic [31:0] k; pim_rsp_t e;
        @(negedge clk); rsp_ready = (cyc > 300) && ($urandom % 3 != 0);
        @(posedge clk);
        if (rsp_valid && rsp_ready) begin
          p = exp_page.pop_front(); k = exp_key.pop_front();
          i = find_in_page(p, k);
          e.found = i >= 0; e.value = i >= 0 ? pv[p][i] : 0;
          chk(rsp_line == rsp_to_line(e), $sformatf("key %h page %0d: got %h expected %b/%h", k, p, rsp_line[32:0], e.found, e.value));
          if (i >= 0) n_hit++; else n_miss++;
          if (i >= 0 && p != chain[bucket_of(k)][0]) n_ovf_hit++;
          if (i < 0) for (int q = (p / PPR) * PPR; q < (p / PPR + 1) * PPR; q++)
            if (q != p && find_in_page(q, k) >= 0) n_coloc++;
          foreach (deleted[d]) if (deleted[d] == k) n_tomb++;
          n_recv++;
        end
      end
    join
    repeat (20) @(negedge clk);
    chk(violations == 0, $sformatf("%0d DRAM timing violations", violations));
    chk(acts == n_total, $sformatf("%0d ACTs for %0d probes", acts, n_total));
    chk(n_hit > 0, "no hit");
    chk(n_miss > 0, "no miss");
    chk(n_ovf_hit > 0, "no hit in an overflow page");
    chk(n_coloc > 0, "no probe masked a co-located page");
    chk(n_tomb > 0, "no tombstoned key probed");
    chk(n_cmd_stall > 0, "command queue never full");
    chk(n_rsp_full > 0, "result buffer never full");
    chk(max_open > 1, "probes to different banks never overlapped");
    $display("[%s] probes %0d: hit %0d miss %0d overflow-page hit %0d co-located masked %0d tombstone %0d cmd-stall cycles %0d rsp-full cycles %0d banks open at once %0d",
             MODE == PE_AREA ? "area" : "perf", n_total, n_hit, n_miss, n_ovf_hit, n_coloc, n_tomb, n_cmd_stall, n_rsp_full, max_open);
    finished = 1;
  end
endmodule
