// tb_key_counter -- a 4-bit counter with the 18-cycle period: start pulses
// exactly 18 cycles apart, counts 0..15 in order, count_last on 15, one drain
// pulse with count_valid low, then silence; halt stops the pulses at once and
// reset restarts from 0.
module tb_key_counter;
  localparam int CTR_W = 4, PERIOD = 18;
  logic             clk = 0, rst = 1, halt = 0;
  logic             start, count_valid, count_last;
  logic [CTR_W-1:0] count;
  int checks = 0, failures = 0;
  int cyc = 0, last_start = -1, n_starts = 0, n_drain = 0, expect_cnt = 0;

  key_counter #(.CTR_W(CTR_W), .PERIOD(PERIOD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Observe on negedges, while outputs are stable.
  always @(negedge clk) if (!rst) begin
    cyc++;
    if (start) begin
      if (last_start >= 0) begin
        checks++;
        if (cyc - last_start != PERIOD) begin
          failures++;
          $display("start spacing %0d", cyc - last_start);
        end
      end else begin
        checks++;
        if (cyc != 1) begin failures++; $display("first start in cycle %0d", cyc); end
      end
      last_start = cyc;
      n_starts++;
      if (count_valid) begin
        checks++;
        if (count !== CTR_W'(expect_cnt) || count_last !== (expect_cnt == 15)) begin
          failures++;
          $display("count=%0d last=%b expected %0d", count, count_last, expect_cnt);
        end
        expect_cnt++;
      end else begin
        n_drain++;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (20 * PERIOD) @(negedge clk);
    checks++;
    if (n_starts != 17 || n_drain != 1 || expect_cnt != 16) begin
      failures++;
      $display("starts=%0d drain=%0d counts=%0d", n_starts, n_drain, expect_cnt);
    end
    // Restart, then halt after three keys.
    rst = 1; last_start = -1; n_starts = 0; n_drain = 0; expect_cnt = 0; cyc = 0;
    @(negedge clk);
    rst = 0;
    repeat (3 * PERIOD) @(negedge clk);
    halt = 1;
    repeat (5 * PERIOD) @(negedge clk);
    checks++;
    if (n_starts != 3 || expect_cnt != 3) begin
      failures++;
      $display("halt: starts=%0d", n_starts);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
