// hm_pe_area: area-optimised HashMem processing element.
//
// Sits at the edge of SA_PER_PE subarrays and searches the bucket held in
// the row buffer of one of them element-serially and bit-parallel: each
// clock cycle its single comparison unit reads one whole 64-bit key-value
// slot from the row buffer and compares the 32-bit key. The control unit
// walks from start_slot to end_slot (the page's slot range inside the row)
// and stops at the first hit; the output register then holds the value, or
// zero with found = 0 when no slot matched.
//
// Interface: a one-cycle start pulse, sampled in IDLE, latches key, slot
// range and subarray select; the row buffer must stay stable while busy.
// done pulses for one cycle when the output register holds the result.
// Timing: a probe that compares n slots raises done n cycles after the start
// edge (n = hit index - start_slot + 1, or end_slot - start_slot + 1 on a
// miss).
//
// From the paper: the element-serial, bit-parallel scan, the
// comparison unit / control unit / output register split (Fig. 1) and the
// sharing of one PE by two subarrays (64 PEs for 128 subarrays per bank).
// This design's own choices: one slot per cycle, stopping at the first
// match, the slot range encoding and the start/done handshake.
module hm_pe_area
  import hm_pkg::*;
#(
  parameter int unsigned ROW_BITS  = ROW_BITS_DEF,
  parameter int unsigned SA_PER_PE = 2,
  localparam int unsigned SLOTS    = ROW_BITS / KV_W,
  localparam int unsigned SEL_W    = (SA_PER_PE > 1) ? $clog2(SA_PER_PE) : 1
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [KEY_W-1:0]     key,
  input  logic [SLOT_W-1:0]    start_slot,
  input  logic [SLOT_W-1:0]    end_slot,
  input  logic [SEL_W-1:0]     sa_sel,
  input  logic [ROW_BITS-1:0]  rowbuf [SA_PER_PE],
  output logic                 busy,
  output logic                 done,
  output logic                 found,
  output logic [VAL_W-1:0]     value
);

  typedef enum logic { S_IDLE, S_SCAN } state_e;

  state_e            state_q;
  logic [KEY_W-1:0]  key_q;
  logic [SLOT_W-1:0] idx_q, end_q;
  logic [SEL_W-1:0]  sel_q;
  logic              done_q;

  logic [KV_W-1:0]   slot;
  logic              hit, last;
  logic [VAL_W-1:0]  hit_value;
  logic              load, clear;

  // Slot currently addressed in the selected row buffer.
  always_comb begin
    slot = rowbuf[sel_q][idx_q * KV_W +: KV_W];
    last = (idx_q == end_q) || (idx_q == SLOT_W'(SLOTS - 1));
  end

  hm_cmp_unit u_cmp (
    .key   (key_q),
    .slot  (slot),
    .en    (state_q == S_SCAN),
    .hit   (hit),
    .value (hit_value)
  );

  // Control unit.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      key_q   <= '0;
      idx_q   <= '0;
      end_q   <= '0;
      sel_q   <= '0;
      done_q  <= 1'b0;
    end else begin
      done_q <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_SCAN;
          key_q   <= key;
          idx_q   <= start_slot;
          end_q   <= end_slot;
          sel_q   <= sa_sel;
        end
        S_SCAN: begin
          if (hit || last) begin
            state_q <= S_IDLE;
            done_q  <= 1'b1;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
      endcase
    end
  end

  assign clear = (state_q == S_IDLE) && start;
  assign load  = (state_q == S_SCAN) && (hit || last);

  hm_out_reg u_out (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (clear),
    .load    (load),
    .found_d (hit),
    .value_d (hit_value),
    .found_q (found),
    .value_q (value)
  );

  assign busy = (state_q != S_IDLE);
  assign done = done_q;

  // A start while busy would be lost.
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state_q == S_IDLE);

endmodule
