// tb_srl16 -- shifts random words into the shift register, with the enable
// toggled at random, and reads every tap against a model of the last sixteen
// words written; also checks that sixteen writes read back from tap 0 up come
// out newest first (the subkey reversal).
module tb_srl16;
  logic        clk = 0, ce = 0;
  logic [47:0] d = '0, q;
  logic [3:0]  addr = '0;
  logic [47:0] model [16];
  int written = 0;
  int checks = 0, failures = 0;

  srl16 #(.WIDTH(48), .DEPTH(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push(input logic [47:0] v);
    @(negedge clk);
    d  = v;
    ce = 1;
    @(negedge clk);
    ce = 0;
    for (int i = 15; i > 0; i--) model[i] = model[i-1];
    model[0] = v;
    written++;
  endtask

  initial begin
    // Key1..Key16 in, read back Key16..Key1.
    for (int i = 1; i <= 16; i++) push(48'(i));
    for (int a = 0; a < 16; a++) begin
      addr = 4'(a);
      #1;
      checks++;
      if (q !== 48'(16 - a)) begin
        failures++;
        $display("reversal: tap %0d = %0d, expected %0d", a, q, 16 - a);
      end
    end
    // Random writes with idle cycles; every tap checked after each step.
    for (int n = 0; n < 400; n++) begin
      if ($urandom_range(0, 2) != 0) push({$urandom, $urandom});
      else @(negedge clk);
      for (int a = 0; a < 16; a++) begin
        addr = 4'(a);
        #1;
        checks++;
        if (q !== model[a]) begin
          failures++;
          $display("tap %0d = %h, expected %h", a, q, model[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
