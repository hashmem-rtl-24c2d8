// hm_rlu: rank-level unit (RLU) of HashMem.
//
// A command processor on the DIMM between the memory controller and the
// processing elements inside the DRAM. It accepts probe commands (key plus
// the page to search: bank, subarray, row and slot range), queues them,
// and for each one opens the row, lets the PE at that subarray search the
// bucket, collects the result from the PE's output register, closes the row
// again and returns the result as a zero-padded cache line.
//
// Probes to different banks overlap. Each bank has its own sequencer, and
// a command leaves the queue, in order, as soon as the sequencer of its bank
// is idle and a result slot is free. A probe to a busy bank holds up the
// commands behind it. One sequencer runs this sequence, in memory-clock
// cycles:
//   ACT      dram_act for one cycle with bank, subarray and row
//   tRCD     wait T_RCD cycles so the row buffer holds the row
//   START    pe_start for one cycle with key and slot range
//   SCAN     wait for the bank's pe_done; store {found, value}
//   tRAS     wait until T_RAS cycles have passed since ACT
//   PRE      dram_pre for one cycle
//   tRP      wait T_RP cycles before this bank may be opened again
// The sequencers share one row-command bus (one ACT or PRE per cycle) and
// one PE start bus. The lowest-numbered bank that asks wins each bus. An
// ACT is also held back until T_RRD cycles have passed since the previous
// ACT and T_FAW cycles since the fourth-last one. Each dispatched probe gets
// a slot in a reorder buffer of RSP_DEPTH entries. Results leave that
// buffer in command order, so the memory controller sees them in the order
// it sent the commands.
//
// Interfaces: cmd_valid/cmd_ready and rsp_valid/rsp_ready are valid-ready
// handshakes (a transfer happens in a cycle where both are high; valid must
// stay high with stable data until it does). rsp_line holds the value in
// bits [31:0], the found flag in bit 32 and zeros above. A missing key reads
// as value 0 (NULL). pe_done/pe_found/pe_value come from each bank's PE
// array.
//
// From the paper: the RLU's three jobs (send the key to the subarray,
// sequence the probe within DRAM timing, retrieve and buffer the results
// and return them as zero-padded cache lines), and the use of concurrent
// accesses to many DRAM arrays. This design's own choices: the command
// format, the queue depths, overlap across banks rather than across the
// subarrays of one bank, in-order results, a closed-page policy, fixed
// priority on the shared buses, and the DDR4-3200 timing defaults.
module hm_rlu
  import hm_pkg::*;
#(
  parameter int unsigned BANKS     = BANKS_DEF,
  parameter int unsigned T_RCD     = T_RCD_DEF,
  parameter int unsigned T_RAS     = T_RAS_DEF,
  parameter int unsigned T_RP      = T_RP_DEF,
  parameter int unsigned T_RRD     = T_RRD_DEF,
  parameter int unsigned T_FAW     = T_FAW_DEF,
  parameter int unsigned CMD_DEPTH = 8,
  parameter int unsigned RSP_DEPTH = 8,
  localparam int unsigned TAG_W    = (RSP_DEPTH > 1) ? $clog2(RSP_DEPTH) : 1
)(
  input  logic                clk,
  input  logic                rst_n,
  // memory controller side
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  pim_cmd_t            cmd,
  output logic                rsp_valid,
  input  logic                rsp_ready,
  output logic [LINE_W-1:0]   rsp_line,
  // DRAM row control
  output logic                dram_act,
  output logic                dram_pre,
  output logic [BANK_W-1:0]   dram_bank,
  output logic [SA_W-1:0]     dram_subarray,
  output logic [ROW_W-1:0]    dram_row,
  // processing elements
  output logic                pe_start,
  output logic [BANK_W-1:0]   pe_bank,
  output logic [SA_W-1:0]     pe_subarray,
  output logic [KEY_W-1:0]    pe_key,
  output logic [SLOT_W-1:0]   pe_start_slot,
  output logic [SLOT_W-1:0]   pe_end_slot,
  input  logic [BANKS-1:0]    pe_done,
  input  logic [BANKS-1:0]    pe_found,
  input  logic [VAL_W-1:0]    pe_value [BANKS]
);

  typedef enum logic [2:0] {
    S_IDLE, S_ACT, S_RCD, S_START, S_SCAN, S_RAS, S_PRE, S_RP
  } state_e;

  // ---- per-bank sequencers
  state_e           st_q    [BANKS];
  pim_cmd_t         cur_q   [BANKS];
  logic [TAG_W-1:0] tag_q   [BANKS];
  logic [15:0]      wait_q  [BANKS];
  logic [15:0]      since_q [BANKS];   // cycles since this bank's ACT

  // ---- shared timing: tRRD and tFAW
  logic [15:0]      rrd_q;             // cycles since the last ACT
  logic [15:0]      faw_q [4];         // ages of the last four ACTs
  logic             act_ok;

  // ---- command queue and dispatch
  pim_cmd_t         cq_dout;
  logic             cq_empty, cq_full, cq_pop;
  logic [BANK_W-1:0] disp_bank;

  // ---- reorder buffer
  pim_rsp_t         rob_d [RSP_DEPTH];
  logic [RSP_DEPTH-1:0] rob_v;
  logic [TAG_W-1:0] head_q, tail_q;
  logic [TAG_W:0]   used_q;
  logic             rsp_pop;
  logic             rb_full;           // every result slot is taken
  logic             rb_push;           // some bank delivered a result

  // ---- bus arbitration
  logic [BANKS-1:0] bus_req, start_req;
  logic             bus_gnt_v, start_gnt_v;
  logic [BANK_W-1:0] bus_gnt, start_gnt;

  hm_fifo #(.T(pim_cmd_t), .DEPTH(CMD_DEPTH)) u_cmdq (
    .clk, .rst_n,
    .push  (cmd_valid && !cq_full),
    .din   (cmd),
    .pop   (cq_pop),
    .dout  (cq_dout),
    .full  (cq_full),
    .empty (cq_empty)
  );
  assign cmd_ready = !cq_full;

  function automatic logic [TAG_W-1:0] tag_inc(logic [TAG_W-1:0] t);
    return (32'(t) == RSP_DEPTH - 1) ? '0 : t + 1'b1;
  endfunction

  always_comb begin
    act_ok    = (32'(rrd_q) >= T_RRD) && (32'(faw_q[3]) >= T_FAW);
    rb_full   = (32'(used_q) == RSP_DEPTH);
    disp_bank = cq_dout.bank;
    cq_pop    = !cq_empty && !rb_full && (st_q[disp_bank] == S_IDLE);
    rsp_valid = rob_v[head_q];
    rsp_pop   = rsp_valid && rsp_ready;
    rsp_line  = rsp_to_line(rob_d[head_q]);
    rb_push   = 1'b0;
    for (int b = 0; b < BANKS; b++) begin
      bus_req[b]   = (st_q[b] == S_ACT && act_ok) || (st_q[b] == S_PRE);
      start_req[b] = (st_q[b] == S_START);
      rb_push      = rb_push || (st_q[b] == S_SCAN && pe_done[b]);
    end
    // fixed priority, lowest bank first
    bus_gnt_v = 1'b0; bus_gnt = '0;
    start_gnt_v = 1'b0; start_gnt = '0;
    for (int b = BANKS - 1; b >= 0; b--) begin
      if (bus_req[b])   begin bus_gnt_v = 1'b1;   bus_gnt = BANK_W'(b);   end
      if (start_req[b]) begin start_gnt_v = 1'b1; start_gnt = BANK_W'(b); end
    end
  end

  // ---- sequencers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BANKS; b++) begin
        st_q[b]    <= S_IDLE;
        cur_q[b]   <= '0;
        tag_q[b]   <= '0;
        wait_q[b]  <= '0;
        since_q[b] <= '0;
      end
    end else begin
      for (int b = 0; b < BANKS; b++) begin
        if (since_q[b] != '1) since_q[b] <= since_q[b] + 1'b1;
        if (wait_q[b] != '0)  wait_q[b]  <= wait_q[b] - 1'b1;
        unique case (st_q[b])
          S_IDLE:  if (cq_pop && disp_bank == BANK_W'(b)) begin
                     cur_q[b] <= cq_dout;
                     tag_q[b] <= tail_q;
                     st_q[b]  <= S_ACT;
                   end
          S_ACT:   if (bus_gnt_v && bus_gnt == BANK_W'(b)) begin
                     since_q[b] <= 16'd1;
                     wait_q[b]  <= 16'(T_RCD - 1);
                     st_q[b]    <= S_RCD;
                   end
          S_RCD:   if (wait_q[b] <= 16'd1) st_q[b] <= S_START;
          S_START: if (start_gnt_v && start_gnt == BANK_W'(b)) st_q[b] <= S_SCAN;
          S_SCAN:  if (pe_done[b]) st_q[b] <= S_RAS;
          S_RAS:   if (32'(since_q[b]) >= T_RAS) st_q[b] <= S_PRE;
          S_PRE:   if (bus_gnt_v && bus_gnt == BANK_W'(b)) begin
                     wait_q[b] <= 16'(T_RP - 1);
                     st_q[b]   <= S_RP;
                   end
          S_RP:    if (wait_q[b] <= 16'd1) st_q[b] <= S_IDLE;
          default: st_q[b] <= S_IDLE;
        endcase
      end
    end
  end

  // ---- tRRD / tFAW bookkeeping
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rrd_q <= '1;
      for (int i = 0; i < 4; i++) faw_q[i] <= '1;
    end else if (dram_act) begin
      rrd_q    <= 16'd1;
      faw_q[0] <= 16'd1;
      for (int i = 1; i < 4; i++) faw_q[i] <= (faw_q[i-1] != '1) ? faw_q[i-1] + 1'b1 : faw_q[i-1];
    end else begin
      if (rrd_q != '1) rrd_q <= rrd_q + 1'b1;
      for (int i = 0; i < 4; i++) if (faw_q[i] != '1) faw_q[i] <= faw_q[i] + 1'b1;
    end
  end

  // ---- reorder buffer: tags handed out at dispatch, freed in order
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rob_v  <= '0;
      head_q <= '0;
      tail_q <= '0;
      used_q <= '0;
    end else begin
      for (int b = 0; b < BANKS; b++)
        if (st_q[b] == S_SCAN && pe_done[b]) rob_v[tag_q[b]] <= 1'b1;
      if (rsp_pop) begin
        rob_v[head_q] <= 1'b0;
        head_q        <= tag_inc(head_q);
      end
      if (cq_pop) tail_q <= tag_inc(tail_q);
      used_q <= used_q + (TAG_W+1)'(cq_pop) - (TAG_W+1)'(rsp_pop);
    end
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < BANKS; b++)
      if (st_q[b] == S_SCAN && pe_done[b])
        rob_d[tag_q[b]] <= '{found: pe_found[b], value: pe_found[b] ? pe_value[b] : '0};
  end

  // ---- bus drivers
  always_comb begin
    dram_act      = bus_gnt_v && (st_q[bus_gnt] == S_ACT);
    dram_pre      = bus_gnt_v && (st_q[bus_gnt] == S_PRE);
    dram_bank     = bus_gnt;
    dram_subarray = cur_q[bus_gnt].subarray;
    dram_row      = cur_q[bus_gnt].row;
    pe_start      = start_gnt_v;
    pe_bank       = start_gnt;
    pe_subarray   = cur_q[start_gnt].subarray;
    pe_key        = cur_q[start_gnt].key;
    pe_start_slot = cur_q[start_gnt].start_slot;
    pe_end_slot   = cur_q[start_gnt].end_slot;
  end

  // ---- rules
  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_line));
  a_bank_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    cq_pop |-> 32'(disp_bank) < BANKS);

endmodule
