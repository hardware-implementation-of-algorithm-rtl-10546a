// key_counter -- the shared key counter of the search: it paces all engines
// and hands out the part of the key that they do not fix themselves.
//
// After reset falls it issues a one-cycle start pulse every PERIOD cycles
// (PERIOD = 18, the time a rolled engine spends on one key), together with
// count = 0, 1, 2, ..., 2^CTR_W - 1. count_valid marks a real count and
// count_last the final one. After the last count one further start is issued
// with count_valid = 0, so that the engines decrypt the last key before the
// counter stops for good. halt stops the pulses immediately (used once the
// key has been found); reset restarts the search from count 0.
// The paper names a reset-driven key counter feeding all engines; the pacing,
// the drain pulse and the halt input are this design's choices.
module key_counter #(
  parameter int unsigned CTR_W  = 48,
  parameter int unsigned PERIOD = 18
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             halt,
  output logic             start,
  output logic [CTR_W-1:0] count,
  output logic             count_valid,
  output logic             count_last
);

  logic [CTR_W-1:0]          ctr_q;
  logic [$clog2(PERIOD)-1:0] ph_q;     // position within the period
  logic                      ended_q;  // last count has been issued
  logic                      running_q;

  assign start       = running_q && !halt && (ph_q == '0);
  assign count       = ctr_q;
  assign count_valid = !ended_q;
  assign count_last  = !ended_q && (ctr_q == '1);

  always_ff @(posedge clk) begin
    if (rst) begin
      ctr_q     <= '0;
      ph_q      <= '0;
      ended_q   <= 1'b0;
      running_q <= 1'b1;
    end else if (running_q && !halt) begin
      ph_q <= (ph_q == $bits(ph_q)'(PERIOD - 1)) ? '0 : ph_q + 1'b1;
      if (start) begin
        if (ended_q) begin
          running_q <= 1'b0;            // drain pulse issued: stop
        end else begin
          ctr_q <= ctr_q + 1'b1;
          if (ctr_q == '1) ended_q <= 1'b1;
        end
      end
    end
  end

endmodule
