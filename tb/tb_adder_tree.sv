// tb_adder_tree: drives a 25-input and a 3-input tree with a new random
// vector every cycle and checks each sum, and its latency of clog2(N)
// cycles, against a sum computed here.
module tb_adder_tree;
  localparam int unsigned IW = 36;
  logic clk = 0; always #5 clk = ~clk;
  logic signed [IW-1:0] a [25];
  logic signed [IW-1:0] b [3];
  logic signed [IW+4:0] sa;
  logic signed [IW+1:0] sb;
  int checks = 0, failures = 0;
  adder_tree #(.N(25), .IW(IW)) u_a (.clk, .din(a), .sum(sa));
  adder_tree #(.N(3),  .IW(IW)) u_b (.clk, .din(b), .sum(sb));
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  longint ea [$], eb [$];
  initial begin
    for (int n = 0; n < 300; n++) begin
      automatic longint s1 = 0, s2 = 0;
      @(negedge clk);
      for (int i = 0; i < 25; i++) begin
        a[i] = (n % 7 == 0) ? {1'b0, {(IW-1){1'b1}}} : IW'(longint'($urandom) - 64'sd2147483648);
        s1 += longint'(a[i]);
      end
      for (int i = 0; i < 3; i++) begin b[i] = IW'($urandom); s2 += longint'(b[i]); end
      ea.push_back(s1); eb.push_back(s2);
      if (ea.size() > 5) begin
        checks++;
        if (longint'(sa) != ea[0]) begin failures++; $display("sum25 got %0d exp %0d", sa, ea[0]); end
        void'(ea.pop_front());
      end
      if (eb.size() > 2) begin
        checks++;
        if (longint'(sb) != eb[0]) begin failures++; $display("sum3 got %0d exp %0d", sb, eb[0]); end
        void'(eb.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
