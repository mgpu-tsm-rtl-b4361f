// tb_l1_vector: self-checking test of the L1 vector cache, the per-CU data
// cache (16 KB, 4-way, the published geometry). All stimulus and checking
// live in l1_tb_core (read miss/hit, 2-cycle hit latency, write-through with
// byte mask, no write-allocate, eviction, random traffic against a reference
// memory); this wrapper fixes the cache parameters and prints the result.
// The watchdog is in l1_tb_core.
module tb_l1_vector;
  int  checks, failures;
  bit  done;
  l1_tb_core #(.SIZE_BYTES(16 * 1024), .WAYS(4), .READ_ONLY(1'b0)) u_core (.*);
  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
