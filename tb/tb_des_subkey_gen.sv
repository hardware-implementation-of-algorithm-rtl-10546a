// tb_des_subkey_gen -- loads keys and steps the schedule sixteen times,
// comparing each round key with the reference schedule; also the FIPS-46
// example key 133457799bbcdff1 (56-bit form 12695bc9b7b7f8), whose Key1 is
// 1b02effc7072 and Key16 cb3d8b0e17f5, and checks that `last` marks Key16.
module tb_des_subkey_gen;
  import des_pkg::*;
  import des_ref_pkg::*;

  logic    clk = 0, rst = 1, load = 0, step = 0, last;
  key_t    key = '0;
  subkey_t subkey;
  int checks = 0, failures = 0;

  des_subkey_gen dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_key(input key_t k, input bit known);
    @(negedge clk);
    key  = k;
    load = 1;
    @(negedge clk);
    load = 0;
    step = 1;
    for (int i = 1; i <= 16; i++) begin
      logic [47:0] exp;
      exp = ref_subkey(ref_key64(k), i);
      checks++;
      if (subkey !== exp) begin
        failures++;
        $display("MISMATCH key=%h round %0d subkey=%h expected %h", k, i, subkey, exp);
      end
      checks++;
      if (last !== (i == 16)) begin
        failures++;
        $display("last=%b in round %0d", last, i);
      end
      if (known && i == 1)  begin checks++; if (subkey !== 48'h1b02effc7072) failures++; end
      if (known && i == 16) begin checks++; if (subkey !== 48'hcb3d8b0e17f5) failures++; end
      @(negedge clk);
    end
    step = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    run_key(56'h12695bc9b7b7f8, 1);
    run_key(56'h0, 0);
    run_key(56'hffffffffffffff, 0);
    for (int i = 0; i < 100; i++) run_key({$urandom, $urandom}, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
