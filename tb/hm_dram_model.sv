// hm_dram_model: behavioural model of the DRAM subarrays seen by the
// HashMem engine (not synthesizable; testbench use only).
//
// Stores rows sparsely (an associative array keyed by bank, subarray and
// row) and keeps one row buffer per subarray; each bank may have one open
// row. An ACT fills the addressed row buffer with random data and only
// T_RCD cycles later with the row, so a PE that reads the row buffer before
// T_RCD has passed sees garbage. A PRE scrambles the row buffer again. It
// counts timing violations: ACT to a bank with an open row, PRE to a closed
// bank, PRE before T_RAS, ACT sooner than T_RP after that bank's PRE, ACTs
// closer than T_RRD, a fifth ACT inside T_FAW. It also reports the largest
// number of banks open at once. ACT and PRE are ignored while rst_n is low.
// write_kv() lets a testbench place a key-value pair in a slot.
module hm_dram_model
  import hm_pkg::*;
#(
  parameter int unsigned BANKS     = BANKS_DEF,
  parameter int unsigned SUBARRAYS = SUBARRAYS_DEF,
  parameter int unsigned ROW_BITS  = ROW_BITS_DEF,
  parameter int unsigned T_RCD     = T_RCD_DEF,
  parameter int unsigned T_RAS     = T_RAS_DEF,
  parameter int unsigned T_RP      = T_RP_DEF,
  parameter int unsigned T_RRD     = T_RRD_DEF,
  parameter int unsigned T_FAW     = T_FAW_DEF
)(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                act,
  input  logic                pre,
  input  logic [BANK_W-1:0]   bank,
  input  logic [SA_W-1:0]     subarray,
  input  logic [ROW_W-1:0]    row,
  output logic [ROW_BITS-1:0] rowbuf [BANKS][SUBARRAYS],
  output int                  violations,
  output int                  acts,
  output int                  max_open
);
  logic [ROW_BITS-1:0] mem [int];
  longint cyc = 0;
  longint act_cyc [BANKS], pre_cyc [BANKS], last_acts [4];
  logic   open_q  [BANKS];
  logic   pending [BANKS];
  int     os [BANKS], orow [BANKS];

  initial begin
    violations = 0; acts = 0; max_open = 0;
    foreach (pre_cyc[b]) begin
      pre_cyc[b] = -1000; act_cyc[b] = -1000; open_q[b] = 0; pending[b] = 0;
      os[b] = 0; orow[b] = 0;
    end
    foreach (last_acts[i]) last_acts[i] = -1000;
    foreach (rowbuf[b, s]) rowbuf[b][s] = '0;
  end

  function automatic int idx(int b, int s, int r);
    return (b * SUBARRAYS + s) * 512 + r;
  endfunction

  function automatic logic [ROW_BITS-1:0] garbage();
    logic [ROW_BITS-1:0] g;
    for (int i = 0; i < ROW_BITS / 32; i++) g[i*32 +: 32] = $urandom;
    return g;
  endfunction

  task automatic write_kv(int b, int s, int r, int slot, logic [31:0] k, logic [31:0] v);
    logic [ROW_BITS-1:0] d;
    if (mem.exists(idx(b, s, r))) d = mem[idx(b, s, r)];
    else d = '0;
    d[slot*KV_W +: KV_W] = {k, v};
    mem[idx(b, s, r)] = d;
  endtask

  function automatic void violation(string msg);
    violations++;
    $display("DRAM @%0d: %s", cyc, msg);
  endfunction

  always @(posedge clk) begin
    int n, b;
    for (int i = 0; i < BANKS; i++)
      if (pending[i] && cyc == act_cyc[i] + T_RCD) begin
        rowbuf[i][os[i]] <= mem.exists(idx(i, os[i], orow[i])) ? mem[idx(i, os[i], orow[i])] : '0;
        pending[i] = 0;
      end
    b = int'(bank);
    if (act && rst_n) begin
      acts++;
      if (b >= BANKS || 32'(subarray) >= SUBARRAYS) violation("bad address");
      else begin
        if (open_q[b]) violation("ACT to a bank with an open row");
        if (cyc - pre_cyc[b] < T_RP) violation("tRP violated");
        if (cyc - last_acts[0] < T_RRD) violation("tRRD violated");
        if (cyc - last_acts[3] < T_FAW) violation("tFAW violated");
        for (int i = 3; i > 0; i--) last_acts[i] = last_acts[i-1];
        last_acts[0] = cyc;
        rowbuf[b][subarray] <= garbage();
        open_q[b] = 1; os[b] = int'(subarray); orow[b] = int'(row);
        act_cyc[b] = cyc; pending[b] = 1;
      end
    end
    if (pre && rst_n && b < BANKS) begin
      if (!open_q[b]) violation("PRE to a closed bank");
      if (cyc - act_cyc[b] < T_RAS) violation("tRAS violated");
      rowbuf[b][os[b]] <= garbage();
      open_q[b] = 0; pre_cyc[b] = cyc;
    end
    n = 0;
    foreach (open_q[i]) n += int'(open_q[i]);
    if (n > max_open) max_open = n;
    cyc++;
  end
endmodule
