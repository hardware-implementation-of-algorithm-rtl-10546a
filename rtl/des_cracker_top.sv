// des_cracker_top -- known-plaintext brute-force search for a DES key with
// N_ENGINES rolled decryption engines working in parallel.
//
// While reset is high the captured ciphertext (ctref) and the known plaintext
// (pt) are loaded into the Cipher Text and Plain text registers. When reset
// falls the key counter starts and every 18 cycles each engine takes a new
// key. The key space is partitioned by its upper bits: engine i tries the keys
// {i, count} whose upper log2(N_ENGINES) bits equal i, while the shared counter
// supplies the lower CTR_W bits, so all engines run in lockstep and together
// try N_ENGINES keys per 18 cycles. Each engine decrypts the ciphertext, its
// compare stage tests the result against the known plaintext, and the OR of
// all compare flags is key_found. The first match latches the key into keyout,
// raises done and halts the search; if the counter runs through the whole
// space without a match, exhausted rises instead. Both stay until reset.
//
// Timing: the first key is taken at the first rising edge at which reset is
// low (edge 0). The key of count c is loaded at edge 18c, decrypted from edge
// 18(c+1), its result registered at edge 18(c+2)-1 and compared at edge
// 18(c+2); key_found is high in the cycle after that edge, and keyout and done
// change at the next edge. Searching all 2^CTR_W counts ends with exhausted
// set at edge 18(2^CTR_W + 1) + 1.
//
// KEY_W is the searched width: 56 for DES. A smaller value searches the keys
// 0 .. 2^KEY_W-1 only (upper key bits zero) and serves short simulations.
// keyout[55] is DES key bit 1 (the most significant of the 56). The engine
// count, the 56-bit key and the block structure follow the published design;
// the partition by upper key bits, the lockstep pacing, the stop at the first
// match and the exhausted flag are this design's choices.
module des_cracker_top
  import des_pkg::*;
#(
  parameter int unsigned N_ENGINES = 256,
  parameter int unsigned KEY_W_P   = 56
) (
  input  logic   clk,
  input  logic   reset,
  input  block_t pt,          // known plaintext
  input  block_t ctref,       // captured ciphertext
  output key_t   keyout,      // key found, 0 until then
  output logic   key_found,   // one-cycle pulse: some engine matched
  output logic   done,        // a key has been found (sticky)
  output logic   exhausted    // whole space searched without a match (sticky)
);

  localparam int unsigned IDX_W = $clog2(N_ENGINES);
  localparam int unsigned CTR_W = KEY_W_P - IDX_W;

  typedef struct packed {
    logic             valid;
    logic             last;
    logic [CTR_W-1:0] count;
  } tag_t;

  // Cipher Text and Plain text registers
  block_t ct_q, pt_q;
  always_ff @(posedge clk)
    if (reset) begin
      ct_q <= ctref;
      pt_q <= pt;
    end

  // Key counter
  logic             start, cnt_valid, cnt_last, halt;
  logic [CTR_W-1:0] cnt;

  key_counter #(.CTR_W(CTR_W), .PERIOD(CYCLES_PER_KEY)) u_key_counter (
    .clk         (clk),
    .rst         (reset),
    .halt        (halt),
    .start       (start),
    .count       (cnt),
    .count_valid (cnt_valid),
    .count_last  (cnt_last)
  );

  // Which count each pipeline stage holds: subkeys being generated, block
  // being decrypted, result being compared.
  tag_t             gen_tag_q, dec_tag_q;
  logic [CTR_W-1:0] cmp_count_q;

  // Engines and compare stages
  logic [N_ENGINES-1:0] pt_valid, match;
  block_t               dec_out [N_ENGINES];

  for (genvar i = 0; i < N_ENGINES; i++) begin : g_engine
    key_t eng_key;
    assign eng_key = key_t'({IDX_W'(i), cnt});

    des_decrypt_rolled u_dec (
      .clk      (clk),
      .rst      (reset),
      .start    (start),
      .key      (eng_key),
      .ct       (ct_q),
      .pt       (dec_out[i]),
      .pt_valid (pt_valid[i])
    );

    des_compare u_cmp (
      .clk   (clk),
      .rst   (reset),
      .valid (pt_valid[i] && dec_tag_q.valid),
      .dec   (dec_out[i]),
      .known (pt_q),
      .match (match[i])
    );
  end

  // Key Found
  logic             found;
  logic [IDX_W-1:0] found_idx;

  key_found_or #(.N(N_ENGINES)) u_or (
    .match (match),
    .found (found),
    .idx   (found_idx)
  );

  logic cmp_last_q;   // the compare stage holds the last key of the space

  always_ff @(posedge clk) begin
    if (reset) begin
      gen_tag_q  <= '0;
      dec_tag_q  <= '0;
      cmp_count_q <= '0;
      cmp_last_q <= 1'b0;
      keyout     <= '0;
      done       <= 1'b0;
      exhausted  <= 1'b0;
    end else begin
      if (start) begin
        gen_tag_q <= '{valid: cnt_valid, last: cnt_last, count: cnt};
        dec_tag_q <= gen_tag_q;
      end
      cmp_last_q <= 1'b0;
      if (pt_valid[0]) begin
        cmp_count_q <= dec_tag_q.count;
        cmp_last_q <= dec_tag_q.valid && dec_tag_q.last;
      end
      if (found && !done) begin
        done   <= 1'b1;
        keyout <= key_t'({found_idx, cmp_count_q});
      end
      if (cmp_last_q && !found && !done) exhausted <= 1'b1;
    end
  end

  assign halt      = done || found;
  assign key_found = found;

  // Engines run in lockstep: all results arrive in the same cycle.
  assert property (@(posedge clk) disable iff (reset) pt_valid[0] |-> &pt_valid)
    else $error("des_cracker_top: engines out of step");

endmodule
