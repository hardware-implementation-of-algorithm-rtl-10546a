// tb_des_cracker_top -- end-to-end test of the key search with 4 engines and
// a 12-bit key space (keys 0..4095, 1024 counter values per engine).
// Each run holds reset while loading a known plaintext/ciphertext pair, then
// waits for done or exhausted. Runs: keys in different engines and at
// different counts (the reported key and the cycle in which key_found pulses
// are checked: count c is reported in the cycle after the 18*(c+2)-th clock edge that
// follows the first edge at which reset is low); the
// published example pair for key 1; a pair whose key lies outside the space
// (the search must end with exhausted and no key); inputs changed during a
// search (the text registers must hold); the search must halt after a match.
// Each of these mechanisms is counted and must have happened at least once.
module tb_des_cracker_top;
  import des_pkg::*;
  import des_ref_pkg::*;

  localparam int N = 4, KW = 12;

  logic   clk = 0, reset = 1;
  block_t pt = '0, ctref = '0;
  key_t   keyout;
  logic   key_found, done, exhausted;
  int checks = 0, failures = 0;
  int n_found = 0, n_exhausted = 0, n_halted = 0, n_engine_nonzero = 0,
      n_inputs_held = 0, n_restart = 0;

  des_cracker_top #(.N_ENGINES(N), .KEY_W_P(KW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  // Search for the key of the pair (ct, p). expect_key < 0: no key in the space.
  task automatic search(input block_t ct, input block_t p, input longint expect_key,
                        input bit scramble_inputs);
    int cyc, found_cyc;
    @(negedge clk);
    reset = 1;
    pt    = p;
    ctref = ct;
    repeat (2) @(negedge clk);
    reset = 0;
    n_restart++;
    if (scramble_inputs) begin
      pt    = ~p;
      ctref = ~ct;
    end
    cyc = 0;
    found_cyc = -1;
    while (!done && !exhausted && cyc < 18 * 1100) begin
      @(negedge clk);
      cyc++;
      if (key_found && found_cyc < 0) found_cyc = cyc;
    end
    if (expect_key >= 0) begin
      longint c;
      c = expect_key % (1 << (KW - 2));
      check(done && !exhausted, $sformatf("key %h not found", expect_key));
      check(keyout == key_t'(expect_key), $sformatf("keyout %h, expected %h", keyout, expect_key));
      check(found_cyc == 18 * (c + 2) + 1,
            $sformatf("key_found in cycle %0d, expected %0d", found_cyc, 18 * (c + 2) + 1));
      if (done && keyout == key_t'(expect_key)) begin
        n_found++;
        if (expect_key >= (1 << (KW - 2))) n_engine_nonzero++;
        if (scramble_inputs) n_inputs_held++;
      end
      // The search halts: nothing changes and no engine reports again.
      begin
        bit quiet;
        quiet = 1;
        repeat (5 * 18) begin
          @(negedge clk);
          if (key_found || !done || keyout != key_t'(expect_key) || exhausted) quiet = 0;
        end
        check(quiet, "search did not halt after the match");
        if (quiet) n_halted++;
      end
    end else begin
      check(exhausted && !done, "search did not end exhausted");
      check(cyc == 18 * 1025 + 2, $sformatf("exhausted in cycle %0d, expected %0d",
                                            cyc, 18 * 1025 + 2));
      check(keyout == '0, "keyout not 0 after a fruitless search");
      if (exhausted && !done) n_exhausted++;
    end
  endtask

  task automatic search_key(input longint k, input bit scramble);
    block_t p, ct;
    p  = {$urandom, $urandom};
    ct = ref_des(p, ref_key64(key_t'(k)), 1'b0);   // encrypt: ciphertext for key k
    search(ct, p, (k < (1 << KW)) ? k : -1, scramble);
  endtask

  initial begin
    // Published example for key 1 (blocks in the roles this design uses).
    search(64'h12cf4d587bf4eb08, 64'hb6060c26730925bc, 1, 0);
    search_key(12'h805, 0);     // engine 2, count 5
    search_key(12'hc00, 0);     // engine 3, count 0
    search_key(12'h013, 1);     // engine 0, count 19, inputs changed mid-search
    search_key(12'h7ff, 0);     // engine 1, last count
    search_key(56'h1000, 0);    // outside the 12-bit space
    check(n_found >= 1, "no key found");
    check(n_engine_nonzero >= 1, "no match in an engine other than 0");
    check(n_exhausted >= 1, "no exhausted search");
    check(n_halted >= 1, "no halt after a match");
    check(n_inputs_held >= 1, "text registers not exercised");
    check(n_restart >= 2, "no restart by reset");
    $display("mechanisms: found=%0d engine>0=%0d exhausted=%0d halted=%0d inputs_held=%0d restarts=%0d",
             n_found, n_engine_nonzero, n_exhausted, n_halted, n_inputs_held, n_restart);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
