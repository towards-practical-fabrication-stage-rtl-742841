// tb_irt_top_full: the trojan exactly as configured by default (IRT-1 on two 64-bit
// registers, 128-bit key, MMU payload), taken through one complete 32 KB kernel-overwrite
// attack under continual context switching by the host model (irt_host_model). The model
// checks the trigger every cycle and the page-fault outcome of every store.
module tb_irt_top_full;
  import irt_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int unsigned n_stores = 32 * 1024 / 8;
  logic        start = 1'b0;
  logic        done;
  int          checks, failures;
  int          extra_checks = 0, extra_failures = 0;

  logic [63:0] gpr_a, gpr_b, op_a, op_b;
  logic        st, u_in, u_out, trig;
  priv_lvl_e   priv;

  irt_host_model host (
    .clk(clk), .start_i(start), .n_stores_i(n_stores), .done_o(done),
    .gpr_a_o(gpr_a), .gpr_b_o(gpr_b), .op_a_o(op_a), .op_b_o(op_b),
    .is_store_o(st), .priv_o(priv), .pte_u_o(u_in), .pte_u_i(u_out), .trigger_i(trig),
    .checks_o(checks), .failures_o(failures));

  irt_top dut (
    .clk_i(clk), .rst_ni(rst_n), .gpr_a_i(gpr_a), .gpr_b_i(gpr_b),
    .adder_op_a_i(op_a), .adder_op_b_i(op_b), .lsu_is_store_i(st), .ld_st_priv_i(priv),
    .pte_u_i(u_in), .pte_u_o(u_out), .trigger_o(trig));

  initial begin
    #20000000;
    extra_failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + extra_checks, failures + extra_failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    start = 1'b1;
    wait (done);
    start = 1'b0;
    // after the attack the trojan is dormant and the payload transparent
    @(posedge clk);
    #1;
    extra_checks++;
    if (trig !== 1'b0 || u_out !== u_in) begin
      extra_failures++;
      $display("FAIL: trojan still active after the attack");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks + extra_checks, failures + extra_failures);
    $finish;
  end
endmodule
