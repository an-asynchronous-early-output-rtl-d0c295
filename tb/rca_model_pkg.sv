// rca_model_pkg -- reference model for the dual-rail relative-timed adder
// testbenches.
//
// Everything here is computed from the adder's definition, not from the RTL:
//  * dr-encoding of operand vectors,
//  * which carries become valid before the carry input arrives (early set:
//    a stage that generates (a=b=1) or kills (a=b=0) fixes its carry, a
//    propagating stage (a!=b) copies its carry input),
//  * unit-delay arrival times.  With every cell taking one time unit and all
//    inputs applied at t = 0:
//      net1..net5 at 1, net3 at 2;
//      carry out of a generate/kill stage at 2;
//      carry out of a propagate stage at max(1, t_cin) + 1;
//      sum at max(1, t_cin) + 2   (CG3/CG4, then the C-element, never
//                                  earlier than net3 + 1 = 3).
//    The spacer applied to all operands at once reaches every output at
//    t = 3 (operand cell, sum cell, C-element), whatever N and the data.
//
// The early-set rule and the constant reset follow the published adder;
// the unit-delay timing model is this design's own yardstick.
package rca_model_pkg;
  import dr_pkg::*;

  localparam int unsigned MAXN = 64;

  typedef dr_t [MAXN-1:0] drvec_t;

  function automatic drvec_t encode_vec(input logic [MAXN-1:0] v, input int unsigned n);
    drvec_t r;
    for (int i = 0; i < MAXN; i++) r[i] = (i < n) ? dr_encode(v[i]) : DR_SPACER;
    return r;
  endfunction

  // Carries (index k = carry into stage k, k = n is the carry out) that are
  // fixed by the operands alone, cin still at the spacer.
  function automatic logic [MAXN:0] early_carry_mask(input logic [MAXN-1:0] a,
                                                     input logic [MAXN-1:0] b,
                                                     input int unsigned n);
    logic [MAXN:0] m;
    m = '0;
    for (int k = 0; k < n; k++) m[k+1] = (a[k] == b[k]) ? 1'b1 : m[k];
    return m;
  endfunction

  // Longest run of consecutive propagating stages (the carry chain length).
  function automatic int unsigned longest_propagate_run(input logic [MAXN-1:0] a,
                                                        input logic [MAXN-1:0] b,
                                                        input int unsigned n);
    int unsigned run, best;
    run = 0; best = 0;
    for (int k = 0; k < n; k++) begin
      run  = (a[k] != b[k]) ? run + 1 : 0;
      best = (run > best) ? run : best;
    end
    return best;
  endfunction

  // Unit-delay forward latency: time after which every sum and the carry
  // out are valid, all inputs applied at t = 0.  cout_t returns the arrival
  // time of the carry out alone.
  function automatic int unsigned fwd_latency(input logic [MAXN-1:0] a,
                                              input logic [MAXN-1:0] b,
                                              input int unsigned n,
                                              output int unsigned cout_t);
    int unsigned tc, ts, worst;
    tc = 0; worst = 0;
    for (int k = 0; k < n; k++) begin
      ts    = ((tc > 1) ? tc : 1) + 2;
      worst = (ts > worst) ? ts : worst;
      tc    = (a[k] != b[k]) ? ((tc > 1) ? tc : 1) + 1 : 2;
    end
    cout_t = tc;
    return (tc > worst) ? tc : worst;
  endfunction

  localparam int unsigned REV_LATENCY = 3;

endpackage
