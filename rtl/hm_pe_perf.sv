// hm_pe_perf: performance-optimised HashMem processing element.
//
// Places CMP_UNITS comparison units below one subarray's row buffer, so that
// many key-value slots are compared at once, in the manner of a content-
// addressable memory working on the open DRAM row. With CMP_UNITS equal to
// the number of slots in a row (the default) the whole bucket is searched
// in one clock cycle; with fewer units the control unit steps through the
// row in groups of CMP_UNITS slots, one group per cycle. Slots outside the
// page range [start_slot, end_slot] are masked. When several slots match,
// the lowest-numbered one wins. The output register holds the value, or
// zero with found = 0.
//
// Interface: a one-cycle start pulse, sampled in IDLE, latches key and slot
// range; the row buffer must stay stable while busy. done pulses for one
// cycle when the output register holds the result. Timing: done rises g
// cycles after the start edge, g = number of groups from the one holding
// start_slot up to the one holding the first hit (or end_slot on a miss);
// g = 1 at the default size.
//
// From the paper (Section 2.2, Fig. 3): a row of comparison units fed by
// the row buffer, one PE with control unit and output register per
// subarray, all keys scanned in a single or a few clock ticks. The paper's
// introduction also describes this variant as bit-serial over a
// column-oriented (transposed) layout; this design follows Section 2.2 and
// Fig. 3, which show key-value pairs stored along the row. Group stepping,
// the lowest-index tie-break and the handshake are this design's choices.
module hm_pe_perf
  import hm_pkg::*;
#(
  parameter int unsigned ROW_BITS  = ROW_BITS_DEF,
  parameter int unsigned CMP_UNITS = ROW_BITS / KV_W,
  localparam int unsigned SLOTS    = ROW_BITS / KV_W,
  localparam int unsigned GROUPS   = SLOTS / CMP_UNITS,
  localparam int unsigned GRP_W    = (GROUPS > 1) ? $clog2(GROUPS) : 1
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [KEY_W-1:0]     key,
  input  logic [SLOT_W-1:0]    start_slot,
  input  logic [SLOT_W-1:0]    end_slot,
  input  logic [ROW_BITS-1:0]  rowbuf,
  output logic                 busy,
  output logic                 done,
  output logic                 found,
  output logic [VAL_W-1:0]     value
);

  typedef enum logic { S_IDLE, S_SCAN } state_e;

  state_e            state_q;
  logic [KEY_W-1:0]  key_q;
  logic [SLOT_W-1:0] first_q, end_q;
  logic [GRP_W-1:0]  grp_q;
  logic              done_q;

  logic [CMP_UNITS-1:0] hits;
  logic [VAL_W-1:0]     vals [CMP_UNITS];
  logic                 any_hit, last;
  logic [VAL_W-1:0]     hit_value;

  // One comparison unit per slot of the current group.
  for (genvar u = 0; u < CMP_UNITS; u++) begin : g_cu
    logic [SLOT_W:0] slot_no;
    logic            in_range;
    always_comb begin
      slot_no  = (SLOT_W+1)'(grp_q) * (SLOT_W+1)'(CMP_UNITS) + (SLOT_W+1)'(u);
      in_range = (state_q == S_SCAN) &&
                 (slot_no >= {1'b0, first_q}) && (slot_no <= {1'b0, end_q});
    end
    hm_cmp_unit u_cmp (
      .key   (key_q),
      .slot  (rowbuf[(GROUPS > 1 ? int'(grp_q) : 0) * CMP_UNITS * KV_W + u * KV_W +: KV_W]),
      .en    (in_range),
      .hit   (hits[u]),
      .value (vals[u])
    );
  end

  // Lowest-numbered hit wins.
  always_comb begin
    any_hit   = |hits;
    hit_value = '0;
    for (int i = CMP_UNITS - 1; i >= 0; i--)
      if (hits[i]) hit_value = vals[i];
  end

  assign last = (GROUPS == 1) ||
                (32'(grp_q) == 32'(end_q) / CMP_UNITS) ||
                (32'(grp_q) == GROUPS - 1);

  // Control unit.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      key_q   <= '0;
      first_q <= '0;
      end_q   <= '0;
      grp_q   <= '0;
      done_q  <= 1'b0;
    end else begin
      done_q <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_SCAN;
          key_q   <= key;
          first_q <= start_slot;
          end_q   <= end_slot;
          grp_q   <= GRP_W'(32'(start_slot) / CMP_UNITS);
        end
        S_SCAN: begin
          if (any_hit || last) begin
            state_q <= S_IDLE;
            done_q  <= 1'b1;
          end else begin
            grp_q <= grp_q + 1'b1;
          end
        end
      endcase
    end
  end

  hm_out_reg u_out (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   ((state_q == S_IDLE) && start),
    .load    ((state_q == S_SCAN) && (any_hit || last)),
    .found_d (any_hit),
    .value_d (hit_value),
    .found_q (found),
    .value_q (value)
  );

  assign busy = (state_q != S_IDLE);
  assign done = done_q;

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state_q == S_IDLE);

endmodule
