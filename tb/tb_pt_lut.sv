// tb_pt_lut -- fills both look-up tables with random contents through the
// ECS write port, then presents random track pairs and checks that each
// candidate carries, one clock later, the track fields and the charge and pT
// stored at address {M3 column, d2, d1}; an invalid track gives pT 0.
`include "tb_check.svh"
module tb_pt_lut;
  import l0mu_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0, wr_sel = 0;
  logic [11:0] wr_addr = 0;
  logic [7:0] wr_data = 0;
  track_t c0 = '0, c1 = '0, p0, p1;
  cand_t o0, o1;
  logic [7:0] ref0 [4096], ref1 [4096];
  pt_lut dut (.clk, .rst_n, .c0, .c1, .wr_en, .wr_sel, .wr_addr, .wr_data, .o0, .o1);
  always #4 clk = ~clk;
  `WATCHDOG(clk, 20000)
  function automatic logic [11:0] a_of(input track_t t);
    return {5'(t.m3 % 24), t.d2, t.d1};
  endfunction
  task automatic check_c(input cand_t o, input track_t t, input logic [7:0] q, input string s);
    `CHECK(o.valid == t.valid && o.m3 == t.m3 && o.d2 == t.d2 && o.d1 == t.d1,
           {s, " track fields"})
    `CHECK(o.pt == (t.valid ? q[6:0] : 7'd0), {s, " pT"})
    `CHECK(o.charge == (t.valid & q[7]), {s, " charge"})
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 4096; a++) begin
        @(negedge clk);
        wr_en = 1; wr_sel = 1'(s); wr_addr = 12'(a); wr_data = 8'($urandom);
        if (s == 0) ref0[a] = wr_data; else ref1[a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      p0 = c0; p1 = c1;
      c0 = track_t'($urandom); c0.m3 = 7'($urandom_range(0, 95));
      c1 = track_t'($urandom); c1.m3 = 7'($urandom_range(0, 95));
      @(negedge clk);
      check_c(o0, c0, ref0[a_of(c0)], "candidate 0");
      check_c(o1, c1, ref1[a_of(c1)], "candidate 1");
    end
    `FINISH
  end
endmodule
