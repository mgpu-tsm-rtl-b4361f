// tb_l1_inst: self-checking test of the L1 instruction cache (32 KB, 4-way,
// the published geometry; eight per GPU), an l1_cache instance built read
// only. l1_tb_core issues reads only for this configuration and checks miss,
// hit, 2-cycle hit latency, eviction after five lines of one set and random
// reads against a reference memory. The watchdog is in l1_tb_core.
module tb_l1_inst;
  int  checks, failures;
  bit  done;
  l1_tb_core #(.SIZE_BYTES(32 * 1024), .WAYS(4), .READ_ONLY(1'b1)) u_core (.*);
  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
