// tb_pt_sorter -- random keys (with many ties and zeros) for N = 8 and 24;
// the two outputs must be the largest and second largest keys, at distinct
// indices, the lower index first on equal keys.
`include "tb_check.svh"
module tb_pt_sorter;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [7:0][7:0] k8;
  logic [23:0][7:0] k24;
  logic [2:0] a0, a1;
  logic [4:0] b0, b1;
  logic [7:0] ka0, ka1, kb0, kb1;
  pt_sorter #(.N(8))  s8  (.key(k8),  .i0(a0), .i1(a1), .k0(ka0), .k1(ka1));
  pt_sorter #(.N(24)) s24 (.key(k24), .i0(b0), .i1(b1), .k0(kb0), .k1(kb1));
  always #4 clk = ~clk;
  `WATCHDOG(clk, 10000)
  task automatic ref2(input int n, input logic [7:0] k [], output int r0, output int r1);
    r0 = 0;
    for (int i = 1; i < n; i++) if (k[i] > k[r0]) r0 = i;
    r1 = (r0 == 0) ? 1 : 0;
    for (int i = 0; i < n; i++) if (i != r0 && k[i] > k[r1]) r1 = i;
  endtask
  initial begin
    for (int n = 0; n < 5000; n++) begin
      logic [7:0] a [], b [];
      int r0, r1;
      a = new[8]; b = new[24];
      foreach (a[i]) begin a[i] = (n % 3 == 0) ? 8'($urandom_range(0, 3)) : 8'($urandom); k8[i] = a[i]; end
      foreach (b[i]) begin b[i] = (n % 3 == 0) ? 8'($urandom_range(0, 3)) : 8'($urandom); k24[i] = b[i]; end
      #1;
      ref2(8, a, r0, r1);
      `CHECK(int'(a0) == r0 && int'(a1) == r1 && ka0 == a[r0] && ka1 == a[r1], "8-key sort")
      ref2(24, b, r0, r1);
      `CHECK(int'(b0) == r0 && int'(b1) == r1 && kb0 == b[r0] && kb1 == b[r1], "24-key sort")
    end
    `FINISH
  end
endmodule
