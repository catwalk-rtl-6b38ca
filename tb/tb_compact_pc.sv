// tb_compact_pc: checks the compact parallel counter against $countones:
// exhaustively for 2 inputs (the neuron's case), 3, 4, 7 and 15 inputs, and
// on random patterns for 16 and 64 inputs.
module tb_compact_pc;
  int checks = 0, failures = 0;
  logic [1:0]  x2;  logic [1:0] c2;
  logic [2:0]  x3;  logic [1:0] c3;
  logic [3:0]  x4;  logic [2:0] c4;
  logic [6:0]  x7;  logic [2:0] c7;
  logic [14:0] x15; logic [3:0] c15;
  logic [15:0] x16; logic [4:0] c16;
  logic [63:0] x64; logic [6:0] c64;

  compact_pc             u2  (.x(x2),  .count(c2));
  compact_pc #(.M(3))    u3  (.x(x3),  .count(c3));
  compact_pc #(.M(4))    u4  (.x(x4),  .count(c4));
  compact_pc #(.M(7))    u7  (.x(x7),  .count(c7));
  compact_pc #(.M(15))   u15 (.x(x15), .count(c15));
  compact_pc #(.M(16))   u16 (.x(x16), .count(c16));
  compact_pc #(.M(64))   u64 (.x(x64), .count(c64));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s count=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32768; v++) begin
      x2 = 2'(v); x3 = 3'(v); x4 = 4'(v); x7 = 7'(v); x15 = 15'(v);
      x16 = 16'($urandom); x64 = {$urandom, $urandom};
      #1;
      if (v < 4)   check("m2", int'(c2), $countones(x2));
      if (v < 8)   check("m3", int'(c3), $countones(x3));
      if (v < 16)  check("m4", int'(c4), $countones(x4));
      if (v < 128) check("m7", int'(c7), $countones(x7));
      check("m15", int'(c15), $countones(x15));
      if (v < 4000) begin
        check("m16", int'(c16), $countones(x16));
        check("m64", int'(c64), $countones(x64));
      end
    end
    x64 = '1; x16 = '1;
    #1;
    check("m64 all ones", int'(c64), 64);
    check("m16 all ones", int'(c16), 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
