// Synthetic circuit under test with the sizes of the ITC'99 b14 benchmark
// (215 flip-flops, 32 inputs, 54 outputs), used by the testbenches as the
// combinational logic between the emulator's cut_* ports, plus a reference
// fault simulation on it.
//
// Flip-flops fall in four groups by index mod 4:
//   0: reloaded from the inputs every cycle (faults vanish or show up),
//   1: copy group 0 when an input bit is set, else hold,
//   2: accumulate group 1 under two input bits (faults here tend to stay),
//   3: copy from three places below under an input bit, else hold.
// Output j is (s[4j] & x[j mod 32]) ^ s[(4j+3) mod 215].
package synth_cut_pkg;

  localparam int unsigned NFF    = 215;
  localparam int unsigned NIN    = 32;
  localparam int unsigned NOUT   = 54;
  localparam int unsigned NCYC   = 160;
  localparam int unsigned NFAULT = NFF * NCYC;
  localparam int unsigned REP    = (NFF + NIN - 1) / NIN;

  function automatic logic [NFF-1:0] group_mask(input int g);
    logic [NFF-1:0] m;
    for (int i = 0; i < int'(NFF); i++) m[i] = (i % 4 == g);
    return m;
  endfunction

  localparam logic [NFF-1:0] M0 = group_mask(0);
  localparam logic [NFF-1:0] M1 = group_mask(1);
  localparam logic [NFF-1:0] M2 = group_mask(2);
  localparam logic [NFF-1:0] M3 = group_mask(3);

  function automatic logic [NFF-1:0] f_next(input logic [NFF-1:0] s, input logic [NIN-1:0] x);
    logic [NFF-1:0] xa, xb, s1, s3;
    xa = NFF'({REP{x}});
    xb = NFF'({REP{(x >> 7) | (x << (NIN - 7))}});
    s1 = s << 1;
    s3 = s << 3;
    return (M0 & (xa ^ xb))
         | (M1 & ((xa & s1) | (~xa & s)))
         | (M2 & (s ^ (xa & xb & s1)))
         | (M3 & ((xb & s3) | (~xb & s)));
  endfunction

  function automatic logic [NOUT-1:0] f_out(input logic [NFF-1:0] s, input logic [NIN-1:0] x);
    logic [NOUT-1:0] o;
    for (int j = 0; j < int'(NOUT); j++)
      o[j] = (s[(4 * j) % NFF] & x[j % NIN]) ^ s[(4 * j + 3) % NFF];
    return o;
  endfunction

  // Reference grading of one fault: flip-flop i flipped at the end of cycle
  // t, given the golden states gold[0..NCYC]. Returns the class (0 none,
  // 1 silent, 2 latent, 3 failure) and the cycle of the first output
  // difference (fail_k, valid for a failure).
  function automatic logic [1:0] grade(input logic [NFF-1:0] gold [NCYC + 1],
                                       input logic [NIN-1:0] vec [NCYC],
                                       input int i, input int t, output int fail_k);
    logic [NFF-1:0] f;
    f = gold[t + 1];
    f[i] = ~f[i];
    fail_k = -1;
    for (int k = t + 1; k < int'(NCYC); k++) begin
      if (f == gold[k]) return 2'd1;
      if (f_out(f, vec[k]) != f_out(gold[k], vec[k])) begin
        fail_k = k;
        return 2'd3;
      end
      f = f_next(f, vec[k]);
    end
    return (f != gold[NCYC]) ? 2'd2 : 2'd1;
  endfunction

endpackage
