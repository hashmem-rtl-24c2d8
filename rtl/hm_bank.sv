// hm_bank: the processing elements of one DRAM bank.
//
// Places the PEs along the bank's SUBARRAYS subarrays and routes a probe to
// the PE that serves the addressed subarray. In the area-optimised variant
// (PE_MODE = PE_AREA) AREA_PES element-serial PEs are shared by the
// subarrays, SUBARRAYS / AREA_PES adjacent subarrays per PE; in the
// performance-optimised variant (PE_PERF) every subarray has its own PE
// with a row of CMP_UNITS comparison units under its row buffer.
//
// Interface: start (one cycle) with subarray, key and slot range launches a
// probe; rowbuf carries every subarray's row buffer. done pulses for one
// cycle when the addressed PE has its result; found and value are then
// taken from that PE's output register and stay valid until the next start.
// busy is high while any PE of the bank is scanning.
// Timing: the PE's latency (see hm_pe_area / hm_pe_perf); routing adds no
// cycles.
//
// From the paper: one PE per subarray edge, 64 area-optimised PEs per bank
// of 128 subarrays, comparison units below the row buffer in the
// performance-optimised variant. The routing and the choice of which
// subarrays share a PE (adjacent pairs) are this design's own.
module hm_bank
  import hm_pkg::*;
#(
  parameter int unsigned ROW_BITS  = ROW_BITS_DEF,
  parameter int unsigned SUBARRAYS = SUBARRAYS_DEF,
  parameter pe_mode_e    PE_MODE   = PE_AREA,
  parameter int unsigned AREA_PES  = AREA_PES_PER_BANK_DEF,
  parameter int unsigned CMP_UNITS = ROW_BITS / KV_W,
  localparam int unsigned NPE       = (PE_MODE == PE_AREA) ? AREA_PES : SUBARRAYS,
  localparam int unsigned SA_PER_PE = SUBARRAYS / NPE,
  localparam int unsigned SEL_W     = (SA_PER_PE > 1) ? $clog2(SA_PER_PE) : 1,
  localparam int unsigned PE_W      = (NPE > 1) ? $clog2(NPE) : 1
)(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [SA_W-1:0]     subarray,
  input  logic [KEY_W-1:0]    key,
  input  logic [SLOT_W-1:0]   start_slot,
  input  logic [SLOT_W-1:0]   end_slot,
  input  logic [ROW_BITS-1:0] rowbuf [SUBARRAYS],
  output logic                busy,
  output logic                done,
  output logic                found,
  output logic [VAL_W-1:0]    value
);

  logic [NPE-1:0]   pe_busy, pe_done, pe_found;
  logic [VAL_W-1:0] pe_value [NPE];
  logic [PE_W-1:0]  pe_idx, sel_pe_q;
  logic [SEL_W-1:0] sa_sel;

  always_comb begin
    pe_idx = PE_W'(32'(subarray) / SA_PER_PE);
    sa_sel = SEL_W'(32'(subarray) % SA_PER_PE);
  end

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic pe_start;
    assign pe_start = start && (pe_idx == PE_W'(p));
    if (PE_MODE == PE_AREA) begin : g_area
      logic [ROW_BITS-1:0] rb [SA_PER_PE];
      for (genvar s = 0; s < SA_PER_PE; s++) begin : g_rb
        assign rb[s] = rowbuf[p * SA_PER_PE + s];
      end
      hm_pe_area #(.ROW_BITS(ROW_BITS), .SA_PER_PE(SA_PER_PE)) u_pe (
        .clk, .rst_n,
        .start      (pe_start),
        .key, .start_slot, .end_slot,
        .sa_sel,
        .rowbuf     (rb),
        .busy       (pe_busy[p]),
        .done       (pe_done[p]),
        .found      (pe_found[p]),
        .value      (pe_value[p])
      );
    end else begin : g_perf
      hm_pe_perf #(.ROW_BITS(ROW_BITS), .CMP_UNITS(CMP_UNITS)) u_pe (
        .clk, .rst_n,
        .start      (pe_start),
        .key, .start_slot, .end_slot,
        .rowbuf     (rowbuf[p]),
        .busy       (pe_busy[p]),
        .done       (pe_done[p]),
        .found      (pe_found[p]),
        .value      (pe_value[p])
      );
    end
  end

  // Remember which PE the last probe went to and read its result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sel_pe_q <= '0;
    else if (start) sel_pe_q <= pe_idx;
  end

  assign busy  = |pe_busy;
  assign done  = pe_done[sel_pe_q];
  assign found = pe_found[sel_pe_q];
  assign value = pe_value[sel_pe_q];

  a_subarray_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> 32'(subarray) < SUBARRAYS);

endmodule
