// tb_local_first_addr_map -- self-checking test of the local-first mapping.
//
// For random addresses, checks each decoded field against shifts and masks of
// the address written out independently, the owner unit (bank group * 32 +
// channel) and the access class seen from a random requesting unit; checks
// that compose followed by decode returns the unit and offset; and that a
// contiguous 32 MB region stays inside one unit.
module tb_local_first_addr_map;
  import pimminer_pkg::*;

  logic [31:0] addr, alloc_addr;
  logic [6:0]  req_unit, owner_unit, alloc_unit;
  logic [24:0] alloc_offset;
  dram_addr_t  fields;
  acc_class_t  acc_class;
  int checks = 0, failures = 0;
  int seen[3] = '{0, 0, 0};

  local_first_addr_map dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s addr=%h", what, addr); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ch, bg, own, rch;
    for (int i = 0; i < 2000; i++) begin
      addr = $urandom;
      req_unit = $urandom_range(0, 127);
      if (i % 3 == 0) req_unit = {addr[31:30], addr[29:25]};
      if (i % 3 == 1) req_unit = {2'($urandom_range(0, 3)), addr[29:25]};
      alloc_unit = $urandom_range(0, 127); alloc_offset = $urandom;
      #1;
      ch = (addr >> 25) % 32; bg = addr >> 30; own = bg * 32 + ch; rch = req_unit % 32;
      chk(fields.bank_group == bg, "bg");
      chk(fields.channel == ch, "channel");
      chk(fields.row == (addr >> 10) % 32768, "row");
      chk(fields.col_high == (addr >> 7) % 8, "col_high");
      chk(fields.bank == (addr >> 6) % 2, "bank");
      chk(fields.col_low == (addr >> 3) % 8, "col_low");
      chk(fields.tx == addr % 8, "tx");
      chk(owner_unit == own, "owner");
      if (own == req_unit)  begin chk(acc_class == ACC_NEAR, "near");  seen[0]++; end
      else if (ch == rch)   begin chk(acc_class == ACC_INTRA, "intra"); seen[1]++; end
      else                  begin chk(acc_class == ACC_INTER, "inter"); seen[2]++; end
      chk(alloc_addr == {alloc_unit[6:5], alloc_unit[4:0], alloc_offset}, "compose");
      addr = alloc_addr; #1;
      chk(owner_unit == alloc_unit, "compose-decode");
    end
    // a contiguous region of a unit never leaves its bank group
    alloc_unit = 7'd37; alloc_offset = 0; #1;
    for (int k = 0; k < 4096; k += 8) begin
      addr = alloc_addr + k * 4096; #1;
      chk(owner_unit == 7'd37, "region");
    end
    chk(seen[0] > 0 && seen[1] > 0 && seen[2] > 0, "all classes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
