// trigger_value_matcher: recognises one fixed triggering value on a bundle of host nets.
//
// Both trojan triggers are "triggering value" detectors: a wide bus of ordinary, frequently
// toggling host nets is compared against a secret constant, so an accidental match is as
// unlikely as guessing the constant. The comparison is built from the low transition
// probability gate patterns AND -> NAND and NAND -> NOR:
//   1. every bit is turned into a "bit matches" literal: the net itself where the key bit
//      is 1, its inverse where the key bit is 0 (no gate in a layout, just the right pin);
//   2. AND gates of GROUP literals each;
//   3. NAND gates, each combining two AND outputs (low only when both groups match);
//   4. one wide NOR over all NAND outputs (high only when every NAND is low).
// The result is therefore exactly (value_i == KEY). The split into four-input ANDs and
// pairs per NAND is this design's choice; the paper names the patterns, not the fan-ins.
//
// Interface: value_i (WIDTH bits) in, match_o out. Purely combinational, no clock.
module trigger_value_matcher #(
  parameter int unsigned       WIDTH = 128,
  parameter int unsigned       GROUP = 4,
  parameter logic [WIDTH-1:0]  KEY   = irt_pkg::IRT1_KEY_DEFAULT
) (
  input  logic [WIDTH-1:0] value_i,
  output logic             match_o
);

  localparam int unsigned N_AND  = WIDTH / GROUP;
  localparam int unsigned N_NAND = N_AND / 2;

  // The tree needs whole AND groups, paired up under the NAND gates.
  if ((WIDTH % (2 * GROUP)) != 0) begin : g_bad_width
    $error("trigger_value_matcher: WIDTH must be a multiple of 2*GROUP");
  end

  logic [WIDTH-1:0]  lit;
  logic [N_AND-1:0]  and_q;
  logic [N_NAND-1:0] nand_q;

  // Step 1: per-bit literal, true when the bit equals the key bit.
  assign lit = value_i ~^ KEY;

  // Step 2: AND of GROUP literals.
  for (genvar g = 0; g < N_AND; g++) begin : g_and
    assign and_q[g] = &lit[g*GROUP +: GROUP];
  end

  // Step 3: NAND of two AND outputs (AND -> NAND pattern).
  for (genvar n = 0; n < N_NAND; n++) begin : g_nand
    assign nand_q[n] = ~(and_q[2*n] & and_q[2*n+1]);
  end

  // Step 4: NOR of all NAND outputs (NAND -> NOR pattern).
  assign match_o = ~(|nand_q);

endmodule
