// tb_trigger_value_matcher: self-checking test of the AND -> NAND -> NOR value matcher.
//
// A full-size instance (128 bits, default key) is checked with the exact key, with every
// single-bit corruption of the key (the hardest near-misses), with every two-bit corruption
// that falls inside one AND group pair, and with random values. A 16-bit instance is checked
// exhaustively. The reference is a plain equality computed in the testbench.
module tb_trigger_value_matcher;
  import irt_pkg::*;

  localparam logic [TRIG_BITS-1:0] KEY    = IRT1_KEY_DEFAULT;
  localparam logic [15:0]          KEY16  = 16'hA5C3;

  int checks = 0, failures = 0;

  logic [TRIG_BITS-1:0] v;
  logic                 m;
  logic [15:0]          v16;
  logic                 m16;

  trigger_value_matcher #(.WIDTH(TRIG_BITS), .KEY(KEY)) dut (.value_i(v), .match_o(m));
  trigger_value_matcher #(.WIDTH(16), .GROUP(4), .KEY(KEY16)) dut16 (.value_i(v16), .match_o(m16));

  task automatic check128(input logic [TRIG_BITS-1:0] val);
    v = val;
    #1;
    checks++;
    if (m !== (val == KEY)) begin
      failures++;
      $display("FAIL 128: value=%h match=%0b expected=%0b", val, m, val == KEY);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check128(KEY);
    for (int i = 0; i < TRIG_BITS; i++) check128(KEY ^ (TRIG_BITS'(1) << i));
    for (int i = 0; i < TRIG_BITS; i += 8)
      for (int j = 1; j < 8; j++)
        check128(KEY ^ (TRIG_BITS'(1) << i) ^ (TRIG_BITS'(1) << (i + j)));
    for (int i = 0; i < 2000; i++)
      check128({$urandom, $urandom, $urandom, $urandom});
    check128(~KEY);
    check128('0);
    check128(KEY);

    for (int i = 0; i < 65536; i++) begin
      v16 = 16'(i);
      #1;
      checks++;
      if (m16 !== (v16 == KEY16)) begin
        failures++;
        $display("FAIL 16: value=%h match=%0b", v16, m16);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
