// irt_pkg: types and constants shared by the interrupt-resilient trojan (IRT) blocks.
//
// The trojans tap 64-bit nets of a RISC-V core (two general purpose registers for IRT-1,
// the two integer adder operands for IRT-2) and compare them with 128-bit triggering values.
// XLEN and the 128-bit trigger width follow the paper. The concrete triggering values are
// this design's own choice: the paper does not publish them, so every key below is only a
// default that an integrator overrides through the module parameters.
//
// The privilege encoding is the RISC-V one (U = 0, S = 1, M = 3).
package irt_pkg;

  // Width of the tapped host nets (64-bit GPRs and adder operands).
  localparam int unsigned XLEN = 64;

  // Width of one triggering value: two XLEN-bit nets side by side.
  localparam int unsigned TRIG_BITS = 2 * XLEN;

  // RISC-V privilege level of a load/store.
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_M = 2'b11
  } priv_lvl_e;

  // Which trigger mechanism a trojan instance is built with. The two are inserted in two
  // separate layout versions, never together.
  typedef enum logic {
    IRT1_SELECTIVELY_READY = 1'b0,
    IRT2_ALWAYS_READY      = 1'b1
  } irt_variant_e;

  // Default triggering values. Each 128-bit value is {upper net, lower net}:
  // IRT-1: {second GPR, first GPR}; IRT-2: {adder operand b, adder operand a}.
  localparam logic [TRIG_BITS-1:0] IRT1_KEY_DEFAULT =
      128'h5a3c_96e1_0f2d_b478_c31e_7a69_d2f0_845b;
  localparam logic [TRIG_BITS-1:0] IRT2_ON_KEY_DEFAULT =
      128'h9e37_79b9_7f4a_7c15_f39c_c060_5ced_c834;
  localparam logic [TRIG_BITS-1:0] IRT2_OFF_KEY_DEFAULT =
      128'h2545_f491_4f6c_dd1d_bf58_476d_1ce4_e5b9;

endpackage
