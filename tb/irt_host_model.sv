// irt_host_model: behavioural model of the host core and operating system around one trojan.
//
// Not synthesizable; used only by the end-to-end testbenches. It emulates, cycle by cycle,
// what the trojan sees of a single-threaded RISC-V core that time-slices three kinds of
// software:
//   - the handling (attacker) process, user mode: probes a kernel page once (must fault),
//     arms the trojan, overwrites n_stores_i 64-bit words of a kernel page, disarms the
//     trojan and probes once more (must fault again);
//   - the kernel (supervisor mode, sometimes a short machine-mode interrupt): saves the
//     interrupted process's registers, uses the registers itself, stores to kernel pages and
//     restores the next process;
//   - another user task: ALU traffic and stores to its own user pages.
// Slices end after a random quota, so context switches land at random points of the attack.
// Register file: 32 x 64-bit, the two tapped registers are x28 and x29. Arming for IRT-1 is
// loading the 128-bit key into x28/x29 (disarm: overwrite x28); for IRT-2 it is one add with
// the activation operand pair (disarm: one add with the de-activation pair). Every store
// goes through a page table walk of 2..8 cycles; the permission check at the end of the walk
// is the RISC-V rule with SUM = 0: a user access needs U = 1, a supervisor access needs U = 0,
// machine mode is not translated.
//
// The model checks, every cycle, that the trigger is what the attack state predicts and, for
// every store, that it faults exactly when it should. It prints how often each mechanism
// happened and counts a failure for any that never did. checks_o/failures_o accumulate.
module irt_host_model #(
  parameter irt_pkg::irt_variant_e VARIANT = irt_pkg::IRT1_SELECTIVELY_READY,
  parameter logic [127:0] IRT1_KEY = irt_pkg::IRT1_KEY_DEFAULT,
  parameter logic [127:0] ON_KEY   = irt_pkg::IRT2_ON_KEY_DEFAULT,
  parameter logic [127:0] OFF_KEY  = irt_pkg::IRT2_OFF_KEY_DEFAULT
) (
  input  logic               clk,
  input  logic               start_i,
  input  int unsigned        n_stores_i,
  output logic               done_o,
  output logic [63:0]        gpr_a_o,
  output logic [63:0]        gpr_b_o,
  output logic [63:0]        op_a_o,
  output logic [63:0]        op_b_o,
  output logic               is_store_o,
  output irt_pkg::priv_lvl_e priv_o,
  output logic               pte_u_o,
  input  logic               pte_u_i,
  input  logic               trigger_i,
  output int                 checks_o,
  output int                 failures_o
);
  import irt_pkg::*;

  localparam int IDX_A = 28, IDX_B = 29;

  typedef enum logic [1:0] {P_HANDLER, P_TASK, P_KERNEL} proc_e;

  logic [63:0] rf [32];
  logic [63:0] ctx_handler [32];
  logic [63:0] ctx_task [32];
  proc_e       proc;
  logic        armed;
  logic        resumed;

  int n_cs_armed, n_reenable, n_held, n_suppressed, n_prearm_fault, n_postdisarm_fault;
  int n_kernel_ok, n_task_ok, n_ptw_after_resume, n_mmode;

  assign gpr_a_o = rf[IDX_A];
  assign gpr_b_o = rf[IDX_B];

  function automatic logic [63:0] rnd64();
    return {$urandom, $urandom};
  endfunction

  function automatic logic mmu_fault(input priv_lvl_e p, input logic u);
    case (p)
      PRIV_U:  return !u;
      PRIV_S:  return u;
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic expected_trigger();
    if (VARIANT == IRT1_SELECTIVELY_READY) return armed && (proc == P_HANDLER);
    else                                   return armed;
  endfunction

  // One clock cycle: check the trigger against the attack state, then advance. Inputs of
  // the trojan change 1 time unit after a rising edge, never on it.
  task automatic cyc();
    #1;
    checks_o++;
    if (trigger_i !== expected_trigger()) begin
      failures_o++;
      $display("FAIL %s t=%0t: trigger=%0b expected=%0b (process %s)", VARIANT.name(), $time,
               trigger_i, expected_trigger(), proc.name());
    end
    if (armed && proc != P_HANDLER && trigger_i) n_held++;
    @(posedge clk);
    #1;
  endtask

  task automatic alu_op();
    op_a_o = rnd64();
    op_b_o = rnd64();
    if (proc == P_HANDLER || proc == P_TASK) rf[$urandom_range(5, 27)] = op_a_o + op_b_o;
    cyc();
  endtask

  // A store: page table walk of 2..8 cycles, permission check at its end.
  task automatic store(input logic page_u, input logic expect_fault, output logic faulted);
    int unsigned walk;
    walk = $urandom_range(2, 8);
    is_store_o = 1'b1;
    pte_u_o    = page_u;
    repeat (walk - 1) cyc();
    #1;
    faulted = mmu_fault(priv_o, pte_u_i);
    checks_o++;
    if (faulted !== expect_fault) begin
      failures_o++;
      $display("FAIL %s t=%0t: %s store to U=%0b page faulted=%0b expected=%0b",
               VARIANT.name(), $time, priv_o.name(), page_u, faulted, expect_fault);
    end
    @(posedge clk);
    #1;
    is_store_o = 1'b0;
  endtask

  task automatic kernel_slice();
    logic f;
    int unsigned len;
    proc   = P_KERNEL;
    priv_o = PRIV_S;
    for (int i = 0; i < 32; i++) rf[i] = rnd64();
    len = $urandom_range(10, 40);
    for (int c = 0; c < len; c++) begin
      if ($urandom_range(0, 3) == 0) begin
        store(1'b0, 1'b0, f);
        if (!f) n_kernel_ok++;
      end else alu_op();
    end
    if ($urandom_range(0, 3) == 0) begin
      priv_o = PRIV_M;
      n_mmode++;
      repeat ($urandom_range(3, 10)) alu_op();
      store(1'b0, 1'b0, f);
      priv_o = PRIV_S;
    end
  endtask

  task automatic task_slice();
    logic f;
    int unsigned len;
    rf     = ctx_task;
    proc   = P_TASK;
    priv_o = PRIV_U;
    len = $urandom_range(20, 80);
    for (int c = 0; c < len; c++) begin
      if ($urandom_range(0, 4) == 0) begin
        store(1'b1, 1'b0, f);
        if (!f) n_task_ok++;
      end else alu_op();
    end
    ctx_task = rf;
  endtask

  task automatic run_attack(input int unsigned n_stores);
    int unsigned phase, left, used, quota;
    logic f;
    for (int i = 0; i < 32; i++) begin
      ctx_handler[i] = rnd64();
      ctx_task[i]    = rnd64();
    end
    phase = 0;
    left  = n_stores;
    while (phase < 5) begin
      // the kernel switches the handling process in
      kernel_slice();
      rf      = ctx_handler;
      proc    = P_HANDLER;
      priv_o  = PRIV_U;
      resumed = 1'b1;
      if (armed && VARIANT == IRT1_SELECTIVELY_READY) n_reenable++;
      quota = $urandom_range(30, 120);
      used  = 0;
      while (used < quota && phase < 5) begin
        case (phase)
          0: begin  // probe before arming
            store(1'b0, 1'b1, f);
            if (f) n_prearm_fault++;
            phase = 1;
          end
          1: begin  // arm
            if (VARIANT == IRT1_SELECTIVELY_READY) begin
              rf[IDX_A] = IRT1_KEY[63:0];
              cyc();
              rf[IDX_B] = IRT1_KEY[127:64];
              armed = 1'b1;
              cyc();
            end else begin
              {op_b_o, op_a_o} = ON_KEY;
              cyc();
              armed = 1'b1;
            end
            phase = 2;
          end
          2: begin  // overwrite kernel words
            if ($urandom_range(0, 2) == 0) alu_op();
            store(1'b0, 1'b0, f);
            if (!f) begin
              n_suppressed++;
              if (resumed) n_ptw_after_resume++;
            end
            resumed = 1'b0;
            left--;
            if (left == 0) phase = 3;
          end
          3: begin  // disarm
            if (VARIANT == IRT1_SELECTIVELY_READY) begin
              rf[IDX_A] = '0;
              armed = 1'b0;
              cyc();
            end else begin
              {op_b_o, op_a_o} = OFF_KEY;
              cyc();
              armed = 1'b0;
            end
            phase = 4;
          end
          default: begin  // probe after disarming
            store(1'b0, 1'b1, f);
            if (f) n_postdisarm_fault++;
            phase = 5;
          end
        endcase
        used += 4;
      end
      // preempted: the kernel saves the handling process, maybe runs the other task
      ctx_handler = rf;
      if (armed) n_cs_armed++;
      kernel_slice();
      if ($urandom_range(0, 1) == 0) begin
        task_slice();
        kernel_slice();
      end
    end
  endtask

  task automatic expect_seen(input string what, input int n);
    checks_o++;
    if (n == 0) begin
      failures_o++;
      $display("FAIL %s: mechanism never happened: %s", VARIANT.name(), what);
    end
  endtask

  initial begin
    done_o = 1'b0;
    checks_o = 0;
    failures_o = 0;
    armed = 1'b0;
    resumed = 1'b0;
    proc = P_KERNEL;
    priv_o = PRIV_S;
    is_store_o = 1'b0;
    pte_u_o = 1'b0;
    op_a_o = '0;
    op_b_o = '0;
    for (int i = 0; i < 32; i++) rf[i] = '0;
    forever begin
      wait (start_i);
      {n_cs_armed, n_reenable, n_held, n_suppressed, n_prearm_fault, n_postdisarm_fault} = '0;
      {n_kernel_ok, n_task_ok, n_ptw_after_resume, n_mmode} = '0;
      @(posedge clk);
      #1;
      run_attack(n_stores_i);
      $display("%s attack of %0d stores (%0d bytes): preempted-while-armed=%0d re-enabled=%0d held-in-foreign-slice=%0d suppressed=%0d first-store-after-resume=%0d prearm-faults=%0d postdisarm-faults=%0d kernel-stores=%0d task-stores=%0d machine-mode-slices=%0d",
               VARIANT.name(), n_stores_i, 8 * n_stores_i, n_cs_armed, n_reenable, n_held,
               n_suppressed, n_ptw_after_resume, n_prearm_fault, n_postdisarm_fault,
               n_kernel_ok, n_task_ok, n_mmode);
      checks_o++;
      if (n_suppressed != int'(n_stores_i) || n_prearm_fault != 1 || n_postdisarm_fault != 1) begin
        failures_o++;
        $display("FAIL %s: %0d of %0d kernel overwrites passed, %0d/%0d probe faults",
                 VARIANT.name(), n_suppressed, n_stores_i, n_prearm_fault, n_postdisarm_fault);
      end
      expect_seen("kernel switched the armed handling process out", n_cs_armed);
      expect_seen("first store after a resume passed its page table walk", n_ptw_after_resume);
      expect_seen("kernel stores", n_kernel_ok);
      if (VARIANT == IRT1_SELECTIVELY_READY)
        expect_seen("trigger re-enabled by a register restore", n_reenable);
      else
        expect_seen("trigger held through another process's slice", n_held);
      done_o = 1'b1;
      wait (!start_i);
      done_o = 1'b0;
    end
  end
endmodule
