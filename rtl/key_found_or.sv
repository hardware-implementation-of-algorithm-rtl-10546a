// key_found_or -- combines the compare flags of all engines: found is their
// OR (the "Key Found" output of the key search), idx the number of the
// lowest-numbered engine whose flag is set (0 when none is), so the key can be
// rebuilt from the engine number and the shared key counter. Combinational.
// The OR follows the key-search block diagram; the index encoder is this
// design's addition.
module key_found_or #(
  parameter int unsigned N = 256
) (
  input  logic [N-1:0]                  match,
  output logic                          found,
  output logic [(N > 1 ? $clog2(N) : 1)-1:0] idx
);

  always_comb begin
    found = |match;
    idx   = '0;
    for (int i = N - 1; i >= 0; i--)
      if (match[i]) idx = $bits(idx)'(i);
  end

endmodule
