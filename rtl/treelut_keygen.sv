// treelut_keygen -- TreeLUT layer 1, the key generator.
//
// Every decision node of every tree in a TreeLUT model asks one question of the
// form "is input feature f at most threshold t?". The model's software flow
// collects these questions over the whole ensemble and keeps each distinct
// (feature, threshold) pair once; this module answers all of them in parallel
// with one fully unrolled comparator per pair. Output bit k[i] is 1 when
// x[KEYS[i].feature] <= KEYS[i].threshold. A feature may feed several
// comparators, and features that no tree uses feed none.
//
// Interface: x is the array of N_FEATURES unsigned features of W_FEATURE bits
// (already min-max scaled and rounded to W_FEATURE bits, which happens outside
// the circuit); k is the packed vector of N_KEYS key bits.
// Timing: purely combinational. The optional register after this layer (the
// pipelining parameter p0) is placed by treelut_top.
//
// Follows the TreeLUT description: unique keys, fully unrolled comparators, one
// bit per key. The "<=" sense is taken from its example trees. The defaults are
// the key table of its worked example (five 4-bit features, six keys).
module treelut_keygen
  import treelut_pkg::*;
#(
  parameter int unsigned N_FEATURES = 5,
  parameter int unsigned W_FEATURE  = 4,
  parameter int unsigned N_KEYS     = 6,
  parameter key_t [0:N_KEYS-1] KEYS = '{
    '{feature: 16'd0, threshold: 16'd2},
    '{feature: 16'd0, threshold: 16'd7},
    '{feature: 16'd1, threshold: 16'd4},
    '{feature: 16'd2, threshold: 16'd3},
    '{feature: 16'd3, threshold: 16'd8},
    '{feature: 16'd4, threshold: 16'd0}}
) (
  input  logic [W_FEATURE-1:0] x [N_FEATURES],
  output logic [N_KEYS-1:0]    k
);

  if (W_FEATURE > THR_BITS) begin : g_bad_width
    $error("treelut_keygen: W_FEATURE %0d exceeds THR_BITS", W_FEATURE);
  end

  for (genvar i = 0; i < N_KEYS; i++) begin : g_key
    if (int'(KEYS[i].feature) >= N_FEATURES) begin : g_bad_feature
      $error("treelut_keygen: key %0d uses feature %0d of %0d", i,
             KEYS[i].feature, N_FEATURES);
    end
    localparam int unsigned F = int'(KEYS[i].feature);
    localparam logic [W_FEATURE-1:0] T = W_FEATURE'(KEYS[i].threshold);
    assign k[i] = (x[F] <= T);
  end

endmodule
