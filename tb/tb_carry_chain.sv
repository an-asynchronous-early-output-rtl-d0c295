// tb_carry_chain -- forward and reverse latency of the 32-bit relative-timed
// RCA against carry propagation length, in unit cell delays.
//
// For each chain length m in {4, 8, 16, 24, 28} (the lengths an ALU's
// typical additions fall into) and both carry-input values, bit 0 generates
// a carry (a = b = 1), bits 1..m propagate it (a != b), the remaining bits
// kill it (a = b = 0).  With every cell one unit long the testbench measures
//   forward latency: operands and carry applied together -> every output
//                    valid; expected m + 4 units (2 to generate the carry,
//                    one per propagating stage, then CG3/CG4 and the sum
//                    C-element of the first killing stage),
//   reverse latency: operands returned to the spacer -> every output
//                    spacer; expected 3 units for every m,
// and prints the resulting logic cycle time (forward + reverse), which grows
// as m + 7: linear in the chain length with a constant reset part.
//
// The chain lengths are those the published design evaluates; the unit
// delay model stands in for its cell library and is this design's choice.
module tb_carry_chain;
  import dr_pkg::*;
  import rca_model_pkg::*;

  localparam int unsigned N = 32;
  localparam int unsigned U = 10;
  localparam int unsigned H = U / 2;

  dr_t [N-1:0] a, b, sum;
  dr_t         cin, cout;
  int checks = 0, failures = 0;

  rt_rca #(.N(N), .DLY(U)) dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic all_valid();
    logic ok = dr_is_valid(cout);
    for (int i = 0; i < int'(N); i++) ok &= dr_is_valid(sum[i]);
    return ok;
  endfunction

  function automatic logic all_spacer();
    logic ok = dr_is_spacer(cout);
    for (int i = 0; i < int'(N); i++) ok &= dr_is_spacer(sum[i]);
    return ok;
  endfunction

  initial begin : watchdog
    #(1000 * N * U);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lens[5] = '{4, 8, 16, 24, 28};
    // Power-up: all rails high, then the spacer.
    a = '1; b = '1; cin = 2'b11;
    #(4 * N * U);
    a = '0; b = '0; cin = DR_SPACER;
    #(4 * N * U);
    check(all_spacer(), "initial spacer");

    foreach (lens[i]) begin
      for (int c = 0; c < 2; c++) begin
        logic [N-1:0] va, vb;
        logic [N:0]   full;
        int unsigned  fwd, rev, model, cout_t;
        va = '0; vb = '0;
        va[0] = 1'b1; vb[0] = 1'b1;
        for (int k = 1; k <= lens[i]; k++) va[k] = 1'b1;
        full = {1'b0, va} + {1'b0, vb} + (N + 1)'(c);
        check(longest_propagate_run(MAXN'(va), MAXN'(vb), N) == lens[i], "chain length of the pattern");
        model = fwd_latency(MAXN'(va), MAXN'(vb), N, cout_t);

        a = encode_vec(MAXN'(va), N)[N-1:0];
        b = encode_vec(MAXN'(vb), N)[N-1:0];
        cin = dr_encode(1'(c));
        #(H);
        fwd = 0;
        for (int t = 1; t <= int'(2 * N); t++) begin
          #(U);
          if (all_valid()) begin fwd = t; break; end
        end
        check(fwd == lens[i] + 4, $sformatf("forward latency m=%0d: %0d units, expected %0d", lens[i], fwd, lens[i] + 4));
        check(fwd == model, "forward latency agrees with the reference model");
        for (int k = 0; k < int'(N); k++) check(sum[k] == dr_encode(full[k]), "sum value");
        check(cout == dr_encode(full[N]), "carry out value");
        #(4 * N * U);

        a = '0; b = '0; cin = DR_SPACER;
        #(H);
        rev = 0;
        for (int t = 1; t <= int'(2 * N); t++) begin
          #(U);
          if (all_spacer()) begin rev = t; break; end
        end
        check(rev == REV_LATENCY, $sformatf("reverse latency m=%0d: %0d units", lens[i], rev));
        $display("m=%0d cin=%0d forward=%0d reverse=%0d cycle=%0d (unit cell delays)",
                 lens[i], c, fwd, rev, fwd + rev);
        #(4 * N * U);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
