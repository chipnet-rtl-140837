// tb_relu: positive, zero, negative and extreme values with the unit
// enabled and bypassed.
module tb_relu;
  import chipnet_pkg::*;
  logic en; data_t din, dout;
  int checks = 0, failures = 0;
  relu dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic check(bit e, int v);
    int x;
    en = e; din = data_t'(v); #1;
    x = (e && v < 0) ? 0 : v;
    checks++;
    if (int'(dout) != x) begin failures++; $display("en=%0b in=%0d out=%0d exp %0d", e, v, dout, x); end
  endtask
  initial begin
    check(1, 0); check(1, 1); check(1, -1); check(1, 131071); check(1, -131072);
    check(0, -1); check(0, -131072); check(0, 5);
    for (int i = 0; i < 500; i++) check(i % 3 != 0, int'(data_t'($urandom)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
