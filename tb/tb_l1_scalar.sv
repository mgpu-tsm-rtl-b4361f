// tb_l1_scalar: self-checking test of the L1 scalar cache (16 KB, 4-way, the
// published geometry; eight per GPU). The scalar cache is the same
// l1_cache as the vector cache with the same sizes, so the same checks of
// l1_tb_core apply: read miss/hit, 2-cycle hit latency, write-through with
// byte mask, no write-allocate, eviction, random traffic. The watchdog is in
// l1_tb_core.
module tb_l1_scalar;
  int  checks, failures;
  bit  done;
  l1_tb_core #(.SIZE_BYTES(16 * 1024), .WAYS(4), .READ_ONLY(1'b0)) u_core (.*);
  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
