// tb_des_compare -- equal and unequal blocks (including single-bit
// differences) with valid high and low; match must follow one cycle later.
module tb_des_compare;
  logic        clk = 0, rst = 1, valid = 0, match;
  logic [63:0] dec = '0, known = '0;
  int checks = 0, failures = 0;

  des_compare dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic v, input logic [63:0] a, input logic [63:0] b);
    @(negedge clk);
    valid = v;
    dec   = a;
    known = b;
    @(negedge clk);
    valid = 0;
    checks++;
    if (match !== (v && a == b)) begin
      failures++;
      $display("valid=%b dec=%h known=%h match=%b", v, a, b, match);
    end
    @(negedge clk);
    checks++;
    if (match !== 1'b0) begin
      failures++;
      $display("match not a single-cycle pulse");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 300; i++) begin
      logic [63:0] a;
      a = {$urandom, $urandom};
      case (i % 4)
        0: apply(1, a, a);
        1: apply(1, a, a ^ (64'd1 << $urandom_range(0, 63)));
        2: apply(0, a, a);
        default: apply(1, a, {$urandom, $urandom});
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
