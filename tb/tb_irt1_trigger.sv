// tb_irt1_trigger: self-checking test of the selectively-ready trigger (IRT-1).
//
// The two tapped registers are driven the way the operating system and the handling
// process drive them: the process loads the activation sequence, the OS saves it and loads
// another process's values at a context switch, restores it when switching back, and the
// process finally overwrites it. The trigger must follow the register contents at every
// step (high exactly while both registers hold their half of the key). Near misses where
// only one register, or all but one bit, holds the key are checked too.
module tb_irt1_trigger;
  import irt_pkg::*;

  localparam logic [TRIG_BITS-1:0] KEY = IRT1_KEY_DEFAULT;
  localparam logic [XLEN-1:0] KEY_A = KEY[XLEN-1:0];
  localparam logic [XLEN-1:0] KEY_B = KEY[2*XLEN-1:XLEN];

  int checks = 0, failures = 0;
  int rises = 0, falls = 0;

  logic [XLEN-1:0] gpr_a, gpr_b;
  logic            trig, trig_prev;

  irt1_trigger dut (.gpr_a_i(gpr_a), .gpr_b_i(gpr_b), .trigger_o(trig));

  task automatic step(input logic [XLEN-1:0] a, input logic [XLEN-1:0] b,
                      input logic expect_trig, input string what);
    gpr_a = a;
    gpr_b = b;
    #1;
    checks++;
    if (trig !== expect_trig) begin
      failures++;
      $display("FAIL %s: a=%h b=%h trigger=%0b expected=%0b", what, a, b, trig, expect_trig);
    end
    if (trig && !trig_prev) rises++;
    if (!trig && trig_prev) falls++;
    trig_prev = trig;
  endtask

  function automatic logic [XLEN-1:0] rnd64();
    return {$urandom, $urandom};
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [XLEN-1:0] sa, sb;
    trig_prev = 1'b0;
    step('0, '0, 1'b0, "reset values");
    // handling process loads half, then the whole sequence
    step(KEY_A, rnd64(), 1'b0, "only first register");
    step(rnd64(), KEY_B, 1'b0, "only second register");
    step(KEY_B, KEY_A, 1'b0, "halves swapped");
    step(KEY_A, KEY_B, 1'b1, "sequence loaded");
    // many context switches out and back in
    for (int cs = 0; cs < 200; cs++) begin
      sa = gpr_a; sb = gpr_b;                            // OS saves
      for (int k = 0; k < 1 + cs % 5; k++)
        step(rnd64(), rnd64(), 1'b0, "other context");   // kernel / other task
      step(sa, sb, 1'b1, "restored");                    // OS restores
    end
    // single-bit near misses in either register
    for (int i = 0; i < XLEN; i++) begin
      step(KEY_A ^ (XLEN'(1) << i), KEY_B, 1'b0, "bit flip a");
      step(KEY_A, KEY_B ^ (XLEN'(1) << i), 1'b0, "bit flip b");
    end
    step(KEY_A, KEY_B, 1'b1, "sequence reloaded");
    // de-activation: the process overwrites the sequence
    step(KEY_A, 64'd0, 1'b0, "deactivated");
    for (int i = 0; i < 1000; i++) step(rnd64(), rnd64(), 1'b0, "random");

    checks++;
    if (rises < 200 || falls < 200) begin
      failures++;
      $display("FAIL: trigger rose %0d and fell %0d times, expected at least 200 each", rises, falls);
    end
    $display("trigger rises=%0d falls=%0d", rises, falls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
