// convdk_seq -- the ConvDK sequence constants for one kernel width and stride.
//
// Convolution with duplicated kernels (ConvDK) stores N copies of a kernel
// of width kw side by side and reaches every output column m of stride s
// by shifting the input activations by a = 0..l-1, where copy n at shift a
// computes output m exactly when m*s = n*kw + a. For kw odd, s < kw and
// gcd(kw,s) = 1 the pairs (n, m) of one shift form arithmetic sequences:
//   l  = lcm(kw,s)/s   number of shift values, also the step of m
//   dn = lcm(kw,s)/kw  step of the block index n
//   m1, n1             least positive solution of m1*s = n1*kw + 1
// For shift a the first block is n = a*n1 mod dn and the first output
// column m = a*m1 mod l. The shift values together reach every m >= 0
// exactly once. These relations follow the published ConvDK theorems; the
// bounded search loops (MAX_K iterations) are this design's way of making
// them plain combinational logic.
// Interface: kw, s in; l, dn, m1, n1 out, purely combinational. kw = 0 or a
// width with no solution gives m1 = n1 = 0.
module convdk_seq #(
  parameter int MAX_K = 7          // largest kernel width handled
) (
  input  logic [2:0] kw,
  input  logic [2:0] s,
  output logic [2:0] l,
  output logic [2:0] dn,
  output logic [2:0] m1,
  output logic [2:0] n1
);
  int unsigned g, m1_i;

  always_comb begin
    // greatest common divisor of kw and s
    g = 1;
    for (int unsigned d = 1; d <= MAX_K; d++)
      if (d <= int'(kw) && d <= int'(s) && (int'(kw) % d) == 0 && (int'(s) % d) == 0) g = d;
    // least m1 with m1*s = 1 (mod kw)
    m1_i = 0;
    for (int unsigned m = MAX_K; m >= 1; m--)
      if (kw > 3'd1 && ((m * int'(s)) % int'(kw)) == 1) m1_i = m;
    l  = 3'(int'(kw) / g);
    dn = 3'(int'(s) / g);
    m1 = 3'(m1_i);
    n1 = (m1_i == 0) ? 3'd0 : 3'((m1_i * int'(s) - 1) / int'(kw));
  end
endmodule
