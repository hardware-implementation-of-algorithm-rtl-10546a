// tb_des_cracker_full -- the key search at its full size (256 engines, 56-bit
// keys, default parameters) on the two published example pairs. With the key
// space split by its upper 8 bits, key 00000000000001 is count 1 of engine 0
// and key f0000000000011 is count 17 of engine 240, so both searches end after
// a few hundred cycles. The blocks are used in the roles of a true DES
// decryption: ciphertext 12cf4d587bf4eb08, known plaintexts b6060c26730925bc
// and 91dbf8a0e3f63324. Checks the key reported, the cycle of key_found
// (count c: the cycle after the 18*(c+2)-th edge that follows the first edge
// with reset low) and that the search then halts.
module tb_des_cracker_full;
  import des_pkg::*;

  logic   clk = 0, reset = 1;
  block_t pt = '0, ctref = '0;
  key_t   keyout;
  logic   key_found, done, exhausted;
  int checks = 0, failures = 0;

  des_cracker_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic search(input block_t ct, input block_t p, input key_t k, input int c);
    int cyc, found_cyc;
    @(negedge clk);
    reset = 1;
    pt    = p;
    ctref = ct;
    repeat (2) @(negedge clk);
    reset = 0;
    cyc = 0;
    found_cyc = -1;
    while (!done && !exhausted && cyc < 18 * (c + 10)) begin
      @(negedge clk);
      cyc++;
      if (key_found && found_cyc < 0) found_cyc = cyc;
    end
    check(done && !exhausted, $sformatf("key %h not found", k));
    check(keyout == k, $sformatf("keyout %h, expected %h", keyout, k));
    check(found_cyc == 18 * (c + 2) + 1,
          $sformatf("key_found in cycle %0d, expected %0d", found_cyc, 18 * (c + 2) + 1));
    repeat (3 * 18) @(negedge clk);
    check(done && keyout == k && !key_found, "search did not halt");
    $display("key %h found in cycle %0d", keyout, found_cyc);
  endtask

  initial begin
    search(64'h12cf4d587bf4eb08, 64'hb6060c26730925bc, 56'h00000000000001, 1);
    search(64'h12cf4d587bf4eb08, 64'h91dbf8a0e3f63324, 56'hf0000000000011, 17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
