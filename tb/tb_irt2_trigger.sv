// tb_irt2_trigger: self-checking test of the always-ready trigger (IRT-2).
//
// Drives the adder operands with random traffic, the activation pair, the de-activation
// pair and near misses of both, in random order. A reference model of the two-state FSM
// (S0 -> S1 on ON, S1 -> S0 on OFF, trigger = state) runs beside the block; the trigger is
// compared every cycle. Also checked: the trigger rises exactly one clock after the
// activation pair is sampled and falls one clock after the de-activation pair, ON while
// already armed and OFF while disarmed change nothing, and reset returns to S0.
module tb_irt2_trigger;
  import irt_pkg::*;

  localparam logic [TRIG_BITS-1:0] ON_KEY  = IRT2_ON_KEY_DEFAULT;
  localparam logic [TRIG_BITS-1:0] OFF_KEY = IRT2_OFF_KEY_DEFAULT;

  int checks = 0, failures = 0;
  int n_arm = 0, n_disarm = 0, n_on_while_armed = 0, n_off_while_idle = 0, n_held = 0;

  logic            clk = 1'b0, rst_n = 1'b0;
  logic [XLEN-1:0] op_a = '0, op_b = '0;
  logic            trig;
  logic            model_q;

  irt2_trigger dut (.clk_i(clk), .rst_ni(rst_n), .operand_a_i(op_a), .operand_b_i(op_b),
                    .trigger_o(trig));

  always #5 clk = ~clk;

  // Reference model, written from the state diagram.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) model_q <= 1'b0;
    else if (!model_q && ({op_b, op_a} == ON_KEY))  model_q <= 1'b1;
    else if ( model_q && ({op_b, op_a} == OFF_KEY)) model_q <= 1'b0;
  end

  function automatic logic [XLEN-1:0] rnd64();
    return {$urandom, $urandom};
  endfunction

  // Apply one operand pair for one cycle and compare after the edge.
  task automatic cycle(input logic [TRIG_BITS-1:0] ops);
    logic was;
    was = model_q;
    {op_b, op_a} = ops;
    @(posedge clk);
    #1;
    checks++;
    if (trig !== model_q) begin
      failures++;
      $display("FAIL t=%0t ops=%h trigger=%0b expected=%0b", $time, ops, trig, model_q);
    end
    if (!was && model_q) n_arm++;
    if (was && !model_q) n_disarm++;
    if (was && model_q && ops == ON_KEY) n_on_while_armed++;
    if (!was && !model_q && ops == OFF_KEY) n_off_while_idle++;
    if (was && model_q && ops != ON_KEY) n_held++;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned r;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (trig !== 1'b0) begin failures++; $display("FAIL: trigger high in reset"); end
    rst_n = 1'b1;

    // directed: latency of arm and disarm is one clock
    cycle({rnd64(), rnd64()});
    {op_b, op_a} = ON_KEY;
    #1;
    checks++;
    if (trig !== 1'b0) begin failures++; $display("FAIL: trigger rose before the clock edge"); end
    cycle(ON_KEY);
    checks++;
    if (trig !== 1'b1) begin failures++; $display("FAIL: trigger not high one clock after ON"); end
    repeat (20) cycle({rnd64(), rnd64()});
    cycle(OFF_KEY);
    checks++;
    if (trig !== 1'b0) begin failures++; $display("FAIL: trigger not low one clock after OFF"); end

    // random mix
    for (int i = 0; i < 20000; i++) begin
      r = $urandom_range(0, 99);
      if      (r < 6)  cycle(ON_KEY);
      else if (r < 12) cycle(OFF_KEY);
      else if (r < 16) cycle(ON_KEY  ^ (TRIG_BITS'(1) << $urandom_range(0, TRIG_BITS-1)));
      else if (r < 20) cycle(OFF_KEY ^ (TRIG_BITS'(1) << $urandom_range(0, TRIG_BITS-1)));
      else             cycle({rnd64(), rnd64()});
    end

    // reset while armed
    cycle(ON_KEY);
    rst_n = 1'b0;
    #1;
    checks++;
    if (trig !== 1'b0) begin failures++; $display("FAIL: reset did not clear the trigger"); end
    @(posedge clk);
    rst_n = 1'b1;

    checks++;
    if (n_arm == 0 || n_disarm == 0 || n_on_while_armed == 0 || n_off_while_idle == 0 || n_held == 0) begin
      failures++;
      $display("FAIL: a transition was never exercised");
    end
    $display("arm=%0d disarm=%0d on_while_armed=%0d off_while_idle=%0d held_cycles=%0d",
             n_arm, n_disarm, n_on_while_armed, n_off_while_idle, n_held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
