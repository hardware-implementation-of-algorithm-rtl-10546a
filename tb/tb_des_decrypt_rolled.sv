// tb_des_decrypt_rolled -- drives one rolled engine with a start pulse every
// PERIOD cycles (18, the minimum, then 23) and a new key each time, and
// checks every result against the reference DES decryption and that pt_valid
// comes exactly 18 cycles after the start that began the decryption.
// Known answers: the FIPS-46 example (key 133457799bbcdff1, ciphertext
// 85e813540f0ab405 -> 0123456789abcdef) and the two published example keys
// 00000000000001 and f0000000000011, whose pairs decrypt 12cf4d587bf4eb08 to
// b6060c26730925bc and to 91dbf8a0e3f63324 respectively.
module tb_des_decrypt_rolled;
  import des_pkg::*;
  import des_ref_pkg::*;

  logic   clk = 0, rst = 1, start = 0, pt_valid;
  key_t   key = '0;
  block_t ct = '0, pt;
  int checks = 0, failures = 0;
  int cyc = 0;

  des_decrypt_rolled dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NK = 40;
  key_t   keys [NK];
  block_t cts  [NK];
  block_t kat  [NK];   // known answer, or 0 when the reference model decides
  int     start_cyc [NK + 2];
  int     n_res = 0;

  // Results are checked as they appear.
  always @(negedge clk) if (!rst && pt_valid) begin
    block_t exp;
    exp = ref_des(cts[n_res], ref_key64(keys[n_res]), 1'b1);
    checks++;
    if (pt !== exp || (kat[n_res] != 0 && pt !== kat[n_res])) begin
      failures++;
      $display("key %h: pt=%h expected %h", keys[n_res], pt, exp);
    end
    checks++;
    if (cyc - start_cyc[n_res + 1] != CYCLES_PER_KEY) begin
      failures++;
      $display("key %0d: result %0d cycles after its decryption start", n_res,
               cyc - start_cyc[n_res + 1]);
    end
    n_res++;
  end

  initial begin
    keys[0] = 56'h12695bc9b7b7f8; cts[0] = 64'h85e813540f0ab405; kat[0] = 64'h0123456789abcdef;
    keys[1] = 56'h00000000000001; cts[1] = 64'h12cf4d587bf4eb08; kat[1] = 64'hb6060c26730925bc;
    keys[2] = 56'hf0000000000011; cts[2] = 64'h12cf4d587bf4eb08; kat[2] = 64'h91dbf8a0e3f63324;
    for (int i = 3; i < NK; i++) begin
      keys[i] = {$urandom, $urandom};
      cts[i]  = {$urandom, $urandom};
      kat[i]  = '0;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    // Start j hands over key j and begins decrypting key j-1 (ciphertext cts[j-1]).
    for (int j = 0; j <= NK; j++) begin
      @(negedge clk);
      start = 1;
      key   = (j < NK) ? keys[j] : '0;
      start_cyc[j] = cyc;   // number of the cycle in which start is high
      @(negedge clk);
      start = 0;
      if (j > 0) ct = cts[j-1];
      repeat (((j < NK / 2) ? CYCLES_PER_KEY : CYCLES_PER_KEY + 5) - 2) @(negedge clk);
    end
    repeat (2 * CYCLES_PER_KEY) @(negedge clk);
    checks++;
    if (n_res != NK) begin
      failures++;
      $display("%0d results for %0d keys", n_res, NK);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
