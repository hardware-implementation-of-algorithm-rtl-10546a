// tb_key_found_or -- random and one-hot match vectors over 256 engines:
// found must be their OR and idx the lowest set position.
module tb_key_found_or;
  localparam int N = 256;
  logic [N-1:0] match;
  logic         found;
  logic [7:0]   idx;
  int checks = 0, failures = 0;

  key_found_or #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [N-1:0] m);
    int lo;
    match = m;
    #1;
    lo = 0;
    for (int i = 0; i < N; i++) if (m[i]) begin lo = i; break; end
    checks++;
    if (found !== (m != '0) || (m != '0 && idx !== 8'(lo))) begin
      failures++;
      $display("match=%h found=%b idx=%0d expected lowest %0d", m, found, idx, lo);
    end
  endtask

  initial begin
    check('0);
    for (int i = 0; i < N; i++) check(N'(1) << i);
    for (int i = 0; i < N; i++) check({N{1'b1}} << i);
    for (int n = 0; n < 300; n++) begin
      logic [N-1:0] m;
      for (int w = 0; w < N / 32; w++) m[32*w +: 32] = $urandom & $urandom & $urandom;
      check(m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
