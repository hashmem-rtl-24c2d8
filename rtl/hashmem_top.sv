// hashmem_top: HashMem probe engine of one DRAM rank.
//
// Joins the rank-level unit (RLU) with the processing elements of all
// BANKS banks. The memory controller sends probe commands (key and the page
// holding the key's hash bucket); the RLU opens the page's row, the PE at
// that subarray searches the row buffer for the key, and the value comes
// back as one zero-padded cache line. The DRAM cell arrays and their row
// buffers are not part of this module: the row control (dram_act, dram_pre
// and the address) leaves through ports, and every subarray's row buffer
// enters through rowbuf, which must show the opened row T_RCD cycles after
// the ACT and keep it until the PRE.
//
// PE_MODE selects the variant: PE_AREA places AREA_PES element-serial PEs
// per bank (two subarrays share one at the defaults), PE_PERF gives every
// subarray a PE with CMP_UNITS comparison units.
//
// Timing of one probe: ACT, T_RCD, PE scan (area: one slot per cycle up to
// the hit; performance: one cycle at the defaults), result into the
// reorder buffer, PRE no earlier than T_RAS after ACT, T_RP before the bank
// is opened again. Probes to different banks overlap (ACTs spaced by T_RRD,
// at most four per T_FAW); results return in command order.
//
// From the paper: the split into RLU and subarray PEs, the organisation of
// 8 banks with 128 subarrays, 64 area-optimised PEs per bank, both PE
// variants. This design's own: the row width, the command and response
// formats, the DRAM timing defaults and overlap across banks only.
module hashmem_top
  import hm_pkg::*;
#(
  parameter int unsigned BANKS     = BANKS_DEF,
  parameter int unsigned SUBARRAYS = SUBARRAYS_DEF,
  parameter int unsigned ROW_BITS  = ROW_BITS_DEF,
  parameter pe_mode_e    PE_MODE   = PE_AREA,
  parameter int unsigned AREA_PES  = AREA_PES_PER_BANK_DEF,
  parameter int unsigned CMP_UNITS = ROW_BITS / KV_W,
  parameter int unsigned T_RCD     = T_RCD_DEF,
  parameter int unsigned T_RAS     = T_RAS_DEF,
  parameter int unsigned T_RP      = T_RP_DEF,
  parameter int unsigned T_RRD     = T_RRD_DEF,
  parameter int unsigned T_FAW     = T_FAW_DEF,
  parameter int unsigned CMD_DEPTH = 8,
  parameter int unsigned RSP_DEPTH = 8
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
  // DRAM arrays
  output logic                dram_act,
  output logic                dram_pre,
  output logic [BANK_W-1:0]   dram_bank,
  output logic [SA_W-1:0]     dram_subarray,
  output logic [ROW_W-1:0]    dram_row,
  input  logic [ROW_BITS-1:0] rowbuf [BANKS][SUBARRAYS],
  // status
  output logic [BANKS-1:0]    pe_busy
);

  logic              pe_start;
  logic [BANK_W-1:0] pe_bank;
  logic [SA_W-1:0]   pe_subarray;
  logic [KEY_W-1:0]  pe_key;
  logic [SLOT_W-1:0] pe_start_slot, pe_end_slot;

  logic [BANKS-1:0]  bank_done, bank_found;
  logic [VAL_W-1:0]  bank_value [BANKS];

  hm_rlu #(
    .BANKS(BANKS), .T_RCD(T_RCD), .T_RAS(T_RAS), .T_RP(T_RP),
    .T_RRD(T_RRD), .T_FAW(T_FAW),
    .CMD_DEPTH(CMD_DEPTH), .RSP_DEPTH(RSP_DEPTH)
  ) u_rlu (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .rsp_valid, .rsp_ready, .rsp_line,
    .dram_act, .dram_pre, .dram_bank, .dram_subarray, .dram_row,
    .pe_start, .pe_bank, .pe_subarray, .pe_key, .pe_start_slot, .pe_end_slot,
    .pe_done  (bank_done),
    .pe_found (bank_found),
    .pe_value (bank_value)
  );

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    hm_bank #(
      .ROW_BITS(ROW_BITS), .SUBARRAYS(SUBARRAYS), .PE_MODE(PE_MODE),
      .AREA_PES(AREA_PES), .CMP_UNITS(CMP_UNITS)
    ) u_bank (
      .clk, .rst_n,
      .start      (pe_start && (pe_bank == BANK_W'(b))),
      .subarray   (pe_subarray),
      .key        (pe_key),
      .start_slot (pe_start_slot),
      .end_slot   (pe_end_slot),
      .rowbuf     (rowbuf[b]),
      .busy       (pe_busy[b]),
      .done       (bank_done[b]),
      .found      (bank_found[b]),
      .value      (bank_value[b])
    );
  end

  a_bank_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    dram_act |-> 32'(dram_bank) < BANKS);

endmodule
