// local_first_addr_map -- PIM-friendly local-first address mapping of the
// HBM-PIM memory controller.
//
// A conventional HBM controller interleaves consecutive addresses across
// channels first (good for a host reading a long stream). With PIM units
// sitting at the bank groups that scatters every neighbour list over all
// channels, so nearly all PIM accesses become inter-channel. The local-first
// mapping puts the bank group and channel in the top address bits instead:
//
//   [31:30] bank group  [29:25] channel  [24:10] row  [9:7] col_high
//   [6] bank  [5:3] col_low  [2:0] tx (byte in the 8-byte beat)
//
// so any 32 MB-aligned region belongs to one PIM unit, and the unit ID is
// simply address bits [31:25] (bank group above channel: consecutive unit IDs
// are spread over channels first, then over the bank groups of a channel).
//
// Besides decoding the address, the block classifies the access relative to a
// requesting PIM unit `req_unit`: near-core (own bank group), intra-channel
// (other bank group of the same channel) or inter-channel. It also composes an
// address from a unit ID and a unit-local offset, which is what allocating in a
// chosen unit's memory needs.
//
// Purely combinational. The field positions are read off the published bit
// diagram; the classifier and the compose port are this design's additions.
module local_first_addr_map
  import pimminer_pkg::*;
(
  input  logic [ADDR_W-1:0]    addr,
  input  logic [UNIT_ID_W-1:0] req_unit,
  output dram_addr_t           fields,
  output logic [UNIT_ID_W-1:0] owner_unit,
  output acc_class_t           acc_class,
  // compose: {unit, local offset} -> physical address
  input  logic [UNIT_ID_W-1:0]        alloc_unit,
  input  logic [ADDR_W-UNIT_ID_W-1:0] alloc_offset,
  output logic [ADDR_W-1:0]           alloc_addr
);

  always_comb begin
    fields.bank_group = addr[31:30];
    fields.channel    = addr[29:25];
    fields.row        = addr[24:10];
    fields.col_high   = addr[9:7];
    fields.bank       = addr[6];
    fields.col_low    = addr[5:3];
    fields.tx         = addr[2:0];
  end

  always_comb owner_unit = unit_id_of(fields.channel, fields.bank_group);

  always_comb begin
    if (owner_unit == req_unit)                    acc_class = ACC_NEAR;
    else if (fields.channel == ch_of(req_unit))    acc_class = ACC_INTRA;
    else                                           acc_class = ACC_INTER;
  end

  always_comb alloc_addr = {bg_of(alloc_unit), ch_of(alloc_unit), alloc_offset};

endmodule
