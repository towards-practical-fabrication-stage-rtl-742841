// tb_irt_top: end-to-end test of both trojan variants inside an emulated host.
//
// Two trojans are built, one per variant (in silicon they would be in two different chips),
// each attached to its own model of the host core and operating system (irt_host_model).
// Each runs the kernel-overwrite attack for 0.5, 1, 4, 16 and 32 KB of 64-bit stores while
// the model keeps switching the handling process out and back in. Every cycle the trigger is
// compared with the attack state, every store's page-fault outcome with the expected one,
// and each mechanism (preemption while armed, IRT-1 re-enable on restore, IRT-2 trigger held
// through foreign slices, suppressed faults, faults before arming and after disarming,
// undisturbed kernel stores) must have happened.
module tb_irt_top;
  import irt_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int unsigned n_stores;
  logic        start1 = 1'b0, start2 = 1'b0;
  logic        done1, done2;
  int          checks1, failures1, checks2, failures2;

  logic [63:0] gpr_a1, gpr_b1, op_a1, op_b1, gpr_a2, gpr_b2, op_a2, op_b2;
  logic        st1, st2, u_in1, u_in2, u_out1, u_out2, trig1, trig2;
  priv_lvl_e   priv1, priv2;

  irt_host_model #(.VARIANT(IRT1_SELECTIVELY_READY)) host1 (
    .clk(clk), .start_i(start1), .n_stores_i(n_stores), .done_o(done1),
    .gpr_a_o(gpr_a1), .gpr_b_o(gpr_b1), .op_a_o(op_a1), .op_b_o(op_b1),
    .is_store_o(st1), .priv_o(priv1), .pte_u_o(u_in1), .pte_u_i(u_out1), .trigger_i(trig1),
    .checks_o(checks1), .failures_o(failures1));

  irt_top dut1 (
    .clk_i(clk), .rst_ni(rst_n), .gpr_a_i(gpr_a1), .gpr_b_i(gpr_b1),
    .adder_op_a_i(op_a1), .adder_op_b_i(op_b1), .lsu_is_store_i(st1), .ld_st_priv_i(priv1),
    .pte_u_i(u_in1), .pte_u_o(u_out1), .trigger_o(trig1));

  irt_host_model #(.VARIANT(IRT2_ALWAYS_READY)) host2 (
    .clk(clk), .start_i(start2), .n_stores_i(n_stores), .done_o(done2),
    .gpr_a_o(gpr_a2), .gpr_b_o(gpr_b2), .op_a_o(op_a2), .op_b_o(op_b2),
    .is_store_o(st2), .priv_o(priv2), .pte_u_o(u_in2), .pte_u_i(u_out2), .trigger_i(trig2),
    .checks_o(checks2), .failures_o(failures2));

  irt_top #(.VARIANT(IRT2_ALWAYS_READY)) dut2 (
    .clk_i(clk), .rst_ni(rst_n), .gpr_a_i(gpr_a2), .gpr_b_i(gpr_b2),
    .adder_op_a_i(op_a2), .adder_op_b_i(op_b2), .lsu_is_store_i(st2), .ld_st_priv_i(priv2),
    .pte_u_i(u_in2), .pte_u_o(u_out2), .trigger_o(trig2));

  int extra_checks = 0, extra_failures = 0;

  initial begin
    #50000000;
    extra_failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks1 + checks2 + extra_checks,
             failures1 + failures2 + extra_failures);
    $finish;
  end

  initial begin
    automatic int unsigned sizes_half_kb[5] = '{1, 2, 8, 32, 64};  // 0.5, 1, 4, 16, 32 KB
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (sizes_half_kb[i]) begin
      n_stores = sizes_half_kb[i] * 512 / 8;
      start1 = 1'b1;
      start2 = 1'b1;
      wait (done1 && done2);
      start1 = 1'b0;
      start2 = 1'b0;
      wait (!done1 && !done2);
      // the other chip's trojan is dormant between attacks
      @(posedge clk);
      #1;
      extra_checks++;
      if (trig1 !== 1'b0 || trig2 !== 1'b0) begin
        extra_failures++;
        $display("FAIL: trigger still high after the attack");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks1 + checks2 + extra_checks,
             failures1 + failures2 + extra_failures);
    $finish;
  end
endmodule
