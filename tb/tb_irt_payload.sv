// tb_irt_payload: exhaustive self-checking test of the MMU U-bit payload.
//
// Every combination of trigger, load/store, privilege level and original U-bit is applied.
// The expected U-bit is worked out from the rule the payload implements (force U = 1 only
// for a user-mode store while triggered), and the consequence is checked as well: with a
// store permission check written in the testbench (user access needs U = 1, supervisor and
// machine access here always pass a U = 0 page), a user-mode store to a kernel page must
// fault exactly when the trigger is low, and no access that passed without the payload may
// fault with it.
module tb_irt_payload;
  import irt_pkg::*;

  int checks = 0, failures = 0;

  logic      trig, st, u_in, u_out;
  priv_lvl_e priv;

  irt_payload dut (.trigger_i(trig), .is_store_i(st), .priv_i(priv), .pte_u_i(u_in),
                   .pte_u_o(u_out));

  function automatic logic user_fault(input priv_lvl_e p, input logic u);
    return (p == PRIV_U) && !u;
  endfunction

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic priv_lvl_e levels[3] = '{PRIV_U, PRIV_S, PRIV_M};
    logic exp_u;
    for (int t = 0; t < 2; t++)
      for (int s = 0; s < 2; s++)
        for (int p = 0; p < 3; p++)
          for (int u = 0; u < 2; u++) begin
            trig = t[0]; st = s[0]; priv = levels[p]; u_in = u[0];
            #1;
            exp_u = u_in;
            if (trig && st && priv == PRIV_U) exp_u = 1'b1;
            checks++;
            if (u_out !== exp_u) begin
              failures++;
              $display("FAIL: trig=%0b store=%0b priv=%s u=%0b -> %0b, expected %0b",
                       trig, st, priv.name(), u_in, u_out, exp_u);
            end
            // consequence for a user store to a kernel page
            if (st && priv == PRIV_U && !u_in) begin
              checks++;
              if (user_fault(priv, u_out) !== !trig) begin
                failures++;
                $display("FAIL: user store to kernel page fault=%0b with trigger=%0b",
                         user_fault(priv, u_out), trig);
              end
            end
            // a supervisor access must never see a changed U-bit
            if (priv != PRIV_U) begin
              checks++;
              if (u_out !== u_in) begin
                failures++;
                $display("FAIL: U-bit changed for %s access", priv.name());
              end
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
