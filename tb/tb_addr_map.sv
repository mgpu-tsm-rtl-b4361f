// tb_addr_map: checks the page-interleaving decoder at the default sizes
// (8 L2 banks, 64 DRAM banks in 4 stacks of 16, 4 KB pages) against bit
// slices of the address, for corner and random addresses, and checks that
// consecutive pages land in neighbouring banks.
module tb_addr_map;
  import tsm_pkg::*;
  paddr_t addr;
  logic [ID_W-1:0] l2b, db, stk, bis;
  logic [BANK_ADDR_W-1:0] baddr;
  int checks = 0, failures = 0;

  addr_map dut (.addr(addr), .l2_bank(l2b), .dram_bank(db), .hbm_stack(stk),
                .bank_in_stack(bis), .bank_addr(baddr));

  task automatic check(paddr_t a);
    addr = a;
    #1;
    checks++;
    if (l2b != ID_W'(a[14:12]) || db != ID_W'(a[17:12]) || stk != ID_W'(a[17:16]) ||
        bis != ID_W'(a[15:12]) || baddr != {a[34:18], a[11:0]}) begin
      failures++;
      $display("FAIL addr=%h l2=%0d db=%0d stk=%0d bis=%0d baddr=%h", a, l2b, db, stk, bis, baddr);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0);
    check('1);
    check(35'h0_0000_1000);
    check(35'h7_FFFF_F000);
    for (int i = 0; i < 2000; i++) check({$urandom, $urandom} & 35'h7_FFFF_FFFF);
    // consecutive pages go to consecutive banks, wrapping after 64
    for (int p = 0; p < 130; p++) begin
      addr = paddr_t'(p) << 12;
      #1;
      checks++;
      if (int'(db) != p % 64) begin
        failures++;
        $display("FAIL page %0d -> bank %0d", p, db);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
