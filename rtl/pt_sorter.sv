// pt_sorter -- finds the two candidates of highest pT among N.
//
// Each candidate is given as an 8-bit key {valid, pT[6:0]} so that a valid
// candidate always ranks above an empty one.  i0 is the index of the largest
// key and i1 the index of the largest of the others; at equal keys the lower
// index wins.  Two comparator chains, purely combinational.
//
// Used by the best candidate selection unit (N = 8, four PUs of a board) and
// by the control unit (N = 24, twelve boards).
// Choosing the two highest pT is the paper's rule; the key format and tie
// rule are this design's choice.
module pt_sorter #(
  parameter int unsigned N  = 8,
  parameter int unsigned KW = 8
) (
  input  logic [N-1:0][KW-1:0]   key,
  output logic [$clog2(N)-1:0]   i0,
  output logic [$clog2(N)-1:0]   i1,
  output logic [KW-1:0]          k0,
  output logic [KW-1:0]          k1
);

  localparam int unsigned IW = $clog2(N);

  always_comb begin
    i0 = '0;
    k0 = key[0];
    for (int i = 1; i < int'(N); i++)
      if (key[i] > k0) begin
        k0 = key[i];
        i0 = IW'(i);
      end
    i1 = (i0 == '0) ? IW'(1) : '0;
    k1 = key[i1];
    for (int i = 0; i < int'(N); i++)
      if (IW'(i) != i0 && key[i] > k1) begin
        k1 = key[i];
        i1 = IW'(i);
      end
  end

endmodule
