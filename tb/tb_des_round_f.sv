// tb_des_round_f -- checks f(R, K) on the FIPS-46 worked example
// (R0 = f0aaf0aa, K1 = 1b02effc7072 gives 234aa9bb) and against the reference
// model on random operands. Combinational block.
module tb_des_round_f;
  import des_pkg::*;
  import des_ref_pkg::*;

  logic [31:0] r, f;
  subkey_t     k;
  int checks = 0, failures = 0;

  des_round_f dut (.r(r), .k(k), .f(f));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] rv, input logic [47:0] kv, input logic [31:0] exp);
    r = rv;
    k = kv;
    #1;
    checks++;
    if (f !== exp) begin
      failures++;
      $display("MISMATCH r=%h k=%h f=%h expected %h", rv, kv, f, exp);
    end
  endtask

  initial begin
    check(32'hf0aaf0aa, 48'h1b02effc7072, 32'h234aa9bb);
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] rv;
      logic [47:0] kv;
      rv = $urandom;
      kv = {$urandom, $urandom};
      check(rv, kv, ref_f(rv, kv));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
