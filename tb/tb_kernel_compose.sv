// tb_kernel_compose: random w/v pairs in block mode, with and without the
// identity, including centre sums that must clip; full-kernel mode must pass
// the kernel through. Expected kernels are placed tap by tap here.
module tb_kernel_compose;
  import chipnet_pkg::*;
  wt_mode_e mode; logic ident; kernel_t kin, kout;
  int checks = 0, failures = 0;
  kernel_compose dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int e [KK];
    for (int n = 0; n < 600; n++) begin
      mode = (n % 4 == 3) ? WT_FULL5X5 : WT_BLOCK;
      ident = n[0];
      for (int i = 0; i < KK; i++) kin[i] = data_t'($urandom);
      if (n % 5 == 0) begin kin[4] = 18'sd131000; kin[13] = 18'sd1000; end
      if (n % 5 == 1) begin kin[4] = -18'sd131000; kin[13] = -18'sd1000; end
      #1;
      for (int i = 0; i < KK; i++) e[i] = 0;
      if (mode == WT_FULL5X5) begin
        for (int i = 0; i < KK; i++) e[i] = int'(kin[i]);
      end else begin
        int c;
        for (int r = 0; r < 3; r++)
          for (int s = 0; s < 3; s++) begin
            e[(r+1)*5 + s + 1] = int'(kin[r*3+s]);
            e[(2*r)*5 + 2*s]   = int'(kin[9 + r*3 + s]);
          end
        c = int'(kin[4]) + int'(kin[13]) + (ident ? 1024 : 0);
        e[12] = (c > 131071) ? 131071 : (c < -131072) ? -131072 : c;
      end
      for (int i = 0; i < KK; i++) begin
        checks++;
        if (int'(kout[i]) != e[i]) begin failures++; if (failures < 6) $display("n=%0d tap %0d got %0d exp %0d", n, i, kout[i], e[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
