// hm_pkg: shared sizes, types and DRAM timing defaults of the HashMem
// probe engine.
//
// HashMem stores one hash bucket per DRAM subarray row as a run of 64-bit
// key-value slots (32-bit key, 32-bit value) and searches the bucket right
// next to the subarray's row buffer, so only the matching value leaves the
// DRAM. The key and value widths (4 bytes each) and the organisation of the
// evaluated device (8 banks, 128 subarrays per bank, 512 rows per subarray)
// follow the paper. The row width (1024 columns of 16 bits, the 2 KB page
// of a DDR4 x16 device), the DDR4-3200 timing values in clock cycles (22-22-22, tRRD and tFAW of a
// 2 KB page), the
// command and response formats and the queue depths are this design's own
// choices within what the paper leaves open.
package hm_pkg;

  // ---- data format (paper: uint32_t key and uint32_t value, 8 bytes a pair)
  localparam int unsigned KEY_W = 32;
  localparam int unsigned VAL_W = 32;
  localparam int unsigned KV_W  = KEY_W + VAL_W;

  // ---- device organisation (paper: 8 banks, 128 subarrays/bank, 512 rows)
  localparam int unsigned BANKS_DEF     = 8;
  localparam int unsigned SUBARRAYS_DEF = 128;
  localparam int unsigned ROWS_DEF      = 512;

  // ---- row width: 1024 columns x 16 bit (paper allows 512-2048 columns of
  // 4, 8 or 16 bits; 2 KB is the page of a DDR4 8Gb x16 device)
  localparam int unsigned COLS_DEF     = 1024;
  localparam int unsigned COL_BITS_DEF = 16;
  localparam int unsigned ROW_BITS_DEF = COLS_DEF * COL_BITS_DEF;   // 16384
  localparam int unsigned SLOTS_DEF    = ROW_BITS_DEF / KV_W;       // 256

  // ---- area-optimised variant: 64 PEs shared by the 128 subarrays of a bank
  localparam int unsigned AREA_PES_PER_BANK_DEF = 64;

  // ---- field widths of the command and response (sized for the defaults)
  localparam int unsigned BANK_W = 3;   // up to 8 banks
  localparam int unsigned SA_W   = 7;   // up to 128 subarrays per bank
  localparam int unsigned ROW_W  = 9;   // up to 512 rows per subarray
  localparam int unsigned SLOT_W = 8;   // up to 256 slots per row

  // ---- host side: one 64-byte cache line per probe result
  localparam int unsigned LINE_W = 512;

  // ---- DDR4-3200 (22-22-22) timing in memory clock cycles
  localparam int unsigned T_RCD_DEF = 22;
  localparam int unsigned T_RAS_DEF = 52;
  localparam int unsigned T_RP_DEF  = 22;
  // ACT-to-ACT spacing of different banks (tRRD_L, 2 KB page) and the
  // four-activate window (tFAW, 2 KB page)
  localparam int unsigned T_RRD_DEF = 11;
  localparam int unsigned T_FAW_DEF = 48;

  // Which processing element sits at the subarrays.
  typedef enum logic {
    PE_AREA = 1'b0,   // element-serial, bit-parallel: one slot per cycle
    PE_PERF = 1'b1    // element-parallel: a comparison unit per slot
  } pe_mode_e;

  // Probe command as the rank-level unit receives it from the memory
  // controller: the key and the page (bank, subarray, row and the slot
  // range the page occupies inside the row).
  typedef struct packed {
    logic [KEY_W-1:0]  key;
    logic [BANK_W-1:0] bank;
    logic [SA_W-1:0]   subarray;
    logic [ROW_W-1:0]  row;
    logic [SLOT_W-1:0] start_slot;
    logic [SLOT_W-1:0] end_slot;
  } pim_cmd_t;

  // Probe result as held in the rank-level unit's reorder buffer.
  typedef struct packed {
    logic             found;
    logic [VAL_W-1:0] value;   // zero (NULL) when the key is not found
  } pim_rsp_t;

  // Cache line sent to the memory controller: value in bits [31:0], the
  // found flag in bit 32, zero padding above.
  function automatic logic [LINE_W-1:0] rsp_to_line(pim_rsp_t r);
    logic [LINE_W-1:0] l;
    l = '0;
    l[VAL_W-1:0] = r.value;
    l[VAL_W]     = r.found;
    return l;
  endfunction

endpackage
