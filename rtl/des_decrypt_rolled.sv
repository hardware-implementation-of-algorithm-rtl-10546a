// des_decrypt_rolled -- one rolled DES decryption engine: a single Feistel
// round reused sixteen times, with its own key schedule and subkey reversal.
//
// Datapath. IP(ct) is split into L0 and R0. Two input multiplexers select
// IP(ct) on the first round and the round registers LR/RR on the others. The
// round computes L' = R, R' = L ^ f(R, K) and loads LR/RR. After sixteen
// rounds the output register takes IP^-1 of R16||L16 (the halves are not
// swapped after the last round), which is the decrypted block.
//
// Round keys. des_subkey_gen yields Key1..Key16 one per cycle. They are shifted
// into an srl16 buffer and read back from tap 0 upwards, i.e. Key16 first, as
// decryption requires. Two buffers alternate: while one feeds the rounds for
// key j, the generator fills the other with the round keys of key j+1.
//
// Timing. Every start pulse (one cycle, at least CYCLES_PER_KEY = 18 cycles
// apart) does two things at once: it loads `key` into the key schedule, whose
// sixteen round keys are ready 16 cycles later, and it begins decrypting ct
// with the key given at the previous start. Cycle s is the start, cycles
// s+1..s+16 are rounds 1..16, cycle s+17 registers the result, and pt_valid
// is a one-cycle pulse in cycle s+18, with pt held until the next result. A
// key therefore leaves its result two start periods after it was given; the
// first start after reset yields no result. ct must be stable in cycle s+1.
// Reset clears the control state only; the data registers need none.
//
// The single-round structure, the input multiplexers, the subkey generator and
// the SRL16 reversal follow the rolled architecture this design is based on;
// the 18-cycle period is derived from its reported throughput (64 bits per 18
// cycles); the double buffer and the output register are this design's own.
module des_decrypt_rolled
  import des_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   start,
  input  key_t   key,
  input  block_t ct,
  output block_t pt,
  output logic   pt_valid
);

  // ---------------- key schedule and subkey buffers ----------------
  logic    gen_busy_q;     // generator stepping (16 cycles after a start)
  logic    keys_ready_q;   // write buffer complete, waiting for the next start
  logic    wb_q;           // buffer being written; the other one is read
  logic    gen_last;
  subkey_t gen_subkey;
  subkey_t rd_subkey [2];
  subkey_t round_key;
  logic [3:0] rd_addr;

  des_subkey_gen u_keygen (
    .clk    (clk),
    .rst    (rst),
    .load   (start),
    .key    (key),
    .step   (gen_busy_q),
    .subkey (gen_subkey),
    .last   (gen_last)
  );

  for (genvar b = 0; b < 2; b++) begin : g_srl
    srl16 #(.WIDTH(SUBKEY_W), .DEPTH(ROUNDS)) u_srl (
      .clk  (clk),
      .ce   (gen_busy_q && (wb_q == 1'(b))),
      .d    (gen_subkey),
      .addr (rd_addr),
      .q    (rd_subkey[b])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      gen_busy_q   <= 1'b0;
      keys_ready_q <= 1'b0;
      wb_q         <= 1'b0;
    end else if (start) begin
      gen_busy_q   <= 1'b1;
      keys_ready_q <= 1'b0;
      wb_q         <= ~wb_q;
    end else if (gen_busy_q && gen_last) begin
      gen_busy_q   <= 1'b0;
      keys_ready_q <= 1'b1;
    end
  end

  // ---------------- rolled round ----------------
  logic [4:0]  dph_q;      // 0 idle, 1..16 round number, 17 output cycle
  logic [31:0] lr_q, rr_q; // LR / RR round registers
  logic [31:0] l_in, r_in, f_out;
  block_t      ip_out;

  assign ip_out    = perm_ip(ct);
  assign l_in      = (dph_q == 5'd1) ? ip_out[63:32] : lr_q;
  assign r_in      = (dph_q == 5'd1) ? ip_out[31:0]  : rr_q;
  assign rd_addr   = 4'(dph_q - 5'd1);          // round r reads tap r-1 = Key(17-r)
  assign round_key = rd_subkey[~wb_q];

  des_round_f u_f (.r(r_in), .k(round_key), .f(f_out));

  always_ff @(posedge clk) begin
    if (rst) begin
      dph_q    <= '0;
      pt_valid <= 1'b0;
    end else begin
      pt_valid <= 1'b0;
      if (start) begin
        dph_q <= keys_ready_q ? 5'd1 : 5'd0;
      end else if (dph_q == 5'd17) begin
        dph_q    <= '0;
        pt_valid <= 1'b1;
      end else if (dph_q != 5'd0) begin
        dph_q <= dph_q + 5'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (dph_q >= 5'd1 && dph_q <= 5'd16) begin
      lr_q <= r_in;
      rr_q <= l_in ^ f_out;
    end
    if (dph_q == 5'd17) pt <= perm_fp({rr_q, lr_q});
  end

  // A new key may only be given once the previous one has fully passed.
  assert property (@(posedge clk) disable iff (rst) start |-> dph_q == 5'd0 && !gen_busy_q)
    else $error("des_decrypt_rolled: start less than %0d cycles after the previous one",
                CYCLES_PER_KEY);

endmodule
