// pimminer_pkg -- types and constants shared by the PIMMiner blocks.
//
// The stack organisation (32 channels, 4 PIM units per channel, so 128 units
// and a 7-bit unit ID) and the 2-bit unit-state code of the stealing scheduler
// (00 idle, 01 executing, 10 stealing, 11 being stolen from) follow the
// published design. The 32-bit physical address layout is the local-first
// mapping: [31:30] bank group, [29:25] channel, [24:10] row, [9:7] col_high,
// [6] bank, [5:3] col_low, [2:0] byte within the 8-byte TSV beat.
//
// The encodings of the filter comparison, the access class, and the layout of
// the steal message are this design's own choices.
package pimminer_pkg;

  // ---------------------------------------------------------------- stack size
  localparam int unsigned NUM_CH        = 32;  // channels in the stack
  localparam int unsigned UNITS_PER_CH  = 4;   // PIM units (= bank groups) per channel
  localparam int unsigned NUM_UNITS     = NUM_CH * UNITS_PER_CH;  // 128
  localparam int unsigned UNIT_ID_W     = 7;   // scheduler field width
  localparam int unsigned CH_W          = 5;
  localparam int unsigned BG_W          = 2;

  // ------------------------------------------------------------ address fields
  localparam int unsigned ADDR_W        = 32;
  localparam int unsigned ROW_W         = 15;
  localparam int unsigned COLH_W        = 3;
  localparam int unsigned BANK_W        = 1;
  localparam int unsigned COLL_W        = 3;
  localparam int unsigned TX_W          = 3;

  typedef struct packed {
    logic [BG_W-1:0]   bank_group;
    logic [CH_W-1:0]   channel;
    logic [ROW_W-1:0]  row;
    logic [COLH_W-1:0] col_high;
    logic [BANK_W-1:0] bank;
    logic [COLL_W-1:0] col_low;
    logic [TX_W-1:0]   tx;
  } dram_addr_t;  // 32 bits, field order equals the local-first bit order

  // Where a PIM unit's access lands, seen from that unit.
  typedef enum logic [1:0] {
    ACC_NEAR  = 2'd0,   // own bank group
    ACC_INTRA = 2'd1,   // other bank group, same channel
    ACC_INTER = 2'd2    // bank group in another channel
  } acc_class_t;

  // ------------------------------------------------------------ access filter
  // Comparison requested with a neighbour-list read: keep v_x when
  // (v_x cmp th) holds. CMP_ALL forwards every word (no restriction).
  typedef enum logic [1:0] {
    CMP_LT  = 2'd0,
    CMP_EQ  = 2'd1,
    CMP_GT  = 2'd2,
    CMP_ALL = 2'd3
  } cmp_t;

  // --------------------------------------------------------- stealing scheduler
  typedef enum logic [1:0] {
    ST_IDLE   = 2'b00,
    ST_EXEC   = 2'b01,
    ST_STEAL  = 2'b10,
    ST_STOLEN = 2'b11
  } unit_state_t;

  // One scheduler entry: 16 bits per PIM unit.
  typedef struct packed {
    logic [UNIT_ID_W-1:0] unit_id;
    unit_state_t          state;
    logic [UNIT_ID_W-1:0] related_id;
  } sched_entry_t;

  // ----------------------------------------------------------- task tables
  localparam int unsigned MAX_LEVELS = 5;   // largest pattern evaluated: 5-clique
  localparam int unsigned IDX_W      = 32;

  // Operations on a unit's Execution / Schedule tables.
  typedef enum logic [1:0] {
    TT_INIT      = 2'd0,   // start a kernel: first root = op_root
    TT_NEXT      = 2'd1,   // Load Task Code followed by Update Sche Tab Code
    TT_STEAL_SRC = 2'd2,   // Steal Source Code: cut a task out for a thief
    TT_STEAL_DST = 2'd3    // Steal Dest Code: take over a stolen task
  } tt_op_t;

  // PIM unit ID of bank group bg in channel ch. Consecutive IDs go to
  // consecutive channels first, so the ID equals address bits [31:25].
  function automatic logic [UNIT_ID_W-1:0] unit_id_of(input logic [CH_W-1:0] ch,
                                                      input logic [BG_W-1:0] bg);
    return {bg, ch};
  endfunction

  function automatic logic [CH_W-1:0] ch_of(input logic [UNIT_ID_W-1:0] id);
    return id[CH_W-1:0];
  endfunction

  function automatic logic [BG_W-1:0] bg_of(input logic [UNIT_ID_W-1:0] id);
    return id[UNIT_ID_W-1:CH_W];
  endfunction

endpackage
