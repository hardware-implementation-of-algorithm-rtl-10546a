// tb_des_sboxes -- checks the eight S-boxes against the reference model on
// every value of each 6-bit group (all other groups random) and on random
// words. Combinational block; a clock paces the stimulus only.
module tb_des_sboxes;
  import des_ref_pkg::*;

  logic [47:0] x;
  logic [31:0] y;
  int checks = 0, failures = 0;

  des_sboxes dut (.x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [47:0] v);
    logic [31:0] exp;
    x = v;
    #1;
    exp = ref_sboxes(v);
    checks++;
    if (y !== exp) begin
      failures++;
      $display("MISMATCH x=%h y=%h expected %h", v, y, exp);
    end
  endtask

  initial begin
    // Published first entries: S1 row 0 col 0 = 14, S8 row 3 col 15 = 11.
    x = 48'h0; #1; checks++; if (y[31:28] !== 4'd14) failures++;
    x = 48'h3f; #1; checks++; if (y[3:0] !== 4'd11) failures++;
    for (int g = 0; g < 8; g++)
      for (int v = 0; v < 64; v++) begin
        logic [47:0] w;
        w = {$urandom, $urandom};
        w[47-6*g -: 6] = 6'(v);
        check(w);
      end
    for (int i = 0; i < 500; i++) check({$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
