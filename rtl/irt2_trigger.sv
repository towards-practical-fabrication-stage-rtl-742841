// irt2_trigger: always-ready trigger (IRT-2).
//
// Host: the integer adder of the ALU. Two triggering-value detectors watch the two 64-bit
// adder operands. ON is high when the operands carry the activation value, OFF when they
// carry the de-activation value. A two-state FSM holds the trigger:
//   S0 (disable, trigger 0): stays while ON = 0, moves to S1 when ON = 1.
//   S1 (enable,  trigger 1): stays while OFF = 0, moves to S0 when OFF = 1.
// Once armed, the trigger therefore stays high through every context switch, whatever
// process occupies the pipeline, until the handling process adds the de-activation pair.
//
// Timing: the state is a flip-flop and trigger_o is the state, so the trigger rises (falls)
// on the clock edge that samples ON (OFF); it is a registered, glitch-free output. Reset
// (active low, asynchronous) enters S0. The reset style and the registered output are this
// design's choices; the paper gives the states, conditions and trigger values.
//
// Interface: clk_i, rst_ni; operand_a_i, operand_b_i (tapped adder operands); trigger_o.
module irt2_trigger #(
  parameter int unsigned       XLEN    = irt_pkg::XLEN,
  parameter logic [2*XLEN-1:0] ON_KEY  = irt_pkg::IRT2_ON_KEY_DEFAULT,
  parameter logic [2*XLEN-1:0] OFF_KEY = irt_pkg::IRT2_OFF_KEY_DEFAULT
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [XLEN-1:0] operand_a_i,
  input  logic [XLEN-1:0] operand_b_i,
  output logic            trigger_o
);

  typedef enum logic {
    S0_DISABLE = 1'b0,
    S1_ENABLE  = 1'b1
  } irt2_state_e;

  if (ON_KEY == OFF_KEY) begin : g_bad_keys
    $error("irt2_trigger: ON_KEY and OFF_KEY must differ");
  end

  logic        on, off;
  irt2_state_e state_q, state_d;

  trigger_value_matcher #(
    .WIDTH (2 * XLEN),
    .KEY   (ON_KEY)
  ) u_on (
    .value_i ({operand_b_i, operand_a_i}),
    .match_o (on)
  );

  trigger_value_matcher #(
    .WIDTH (2 * XLEN),
    .KEY   (OFF_KEY)
  ) u_off (
    .value_i ({operand_b_i, operand_a_i}),
    .match_o (off)
  );

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S0_DISABLE: if (on)  state_d = S1_ENABLE;
      S1_ENABLE:  if (off) state_d = S0_DISABLE;
      default:             state_d = S0_DISABLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) state_q <= S0_DISABLE;
    else         state_q <= state_d;
  end

  assign trigger_o = (state_q == S1_ENABLE);

  // ON and OFF use different keys, so they can never be high together.
  assert property (@(posedge clk_i) !(on && off));

endmodule
