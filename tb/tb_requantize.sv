// tb_requantize: random and corner accumulator values; the expected word is
// round-half-up of acc / 2^FRAC, clipped to the 18-bit range.
module tb_requantize;
  import chipnet_pkg::*;
  localparam int unsigned AW = 47;
  logic signed [AW-1:0] acc; data_t q; logic sat;
  int checks = 0, failures = 0;
  requantize #(.AW(AW)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic check(longint v);
    longint e; bit es;
    acc = AW'(v);
    #1;
    e = (v + (64'sd1 << (FRAC-1))) >>> FRAC;
    es = 0;
    if (e > 131071) begin e = 131071; es = 1; end
    if (e < -131072) begin e = -131072; es = 1; end
    checks++;
    if (longint'(q) != e || sat != es) begin
      failures++;
      $display("acc=%0d q=%0d sat=%0b exp %0d %0b", v, q, sat, e, es);
    end
  endtask
  initial begin
    check(0); check(511); check(512); check(-512); check(-513); check(1535); check(-1536);
    check(longint'(131071) << FRAC); check((longint'(131071) << FRAC) + 511); check((longint'(131071) << FRAC) + 512);
    check(-(longint'(131072) << FRAC)); check(-(longint'(131072) << FRAC) - 513);
    check((64'sd1 << 46) - 1); check(-(64'sd1 << 46));
    for (int i = 0; i < 2000; i++) begin
      automatic longint v = longint'({$urandom, $urandom}) >>> ($urandom % 40 + 17);
      check(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
