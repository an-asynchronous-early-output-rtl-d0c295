// tb_eo_full_adder -- self-checking testbench for the early output full adder.
//
// For every one of the 8 input combinations, in a zero-delay and in a
// unit-delay instance:
//  1. operands valid, carry input still spacer: the carry output must be
//     valid for generate (a=b=1) and kill (a=b=0) and still spacer for
//     propagate; the sum must still be spacer (it always waits for cin);
//  2. carry input valid: sum and carry must equal a+b+cin;
//  3. early reset: one operand (a or b, alternately) returns to the spacer
//     while the other operand and cin keep their data: sum and carry must
//     both return to the spacer;
//  4. the remaining inputs return to the spacer.
// The unit-delay instance is also timed against the reference model
// (rca_model_pkg): carry at 2 and sum at 3 units when all inputs arrive
// together, carry 1 and sum 2 units after a late cin on propagate, and the
// spacer at every output 3 units after the operands are reset.
//
// The early-carry and early-reset behaviour checked is that of the
// published cell; the unit delays are this testbench's timing model.
module tb_eo_full_adder;
  import dr_pkg::*;

  // Unit delay of the timed instance; checks sample half a unit after the
  // cell outputs are due, never on the same time step.
  localparam int unsigned U = 10;
  localparam int unsigned H = U / 2;

  dr_t a, b, cin;
  dr_t sum0, cout0, sum1, cout1;
  int  checks = 0, failures = 0;
  int  n_gen = 0, n_kill = 0, n_prop = 0, n_early_reset = 0;

  eo_full_adder #(.DLY(0)) u_zero (.a(a), .b(b), .cin(cin), .sum(sum0), .cout(cout0));
  eo_full_adder #(.DLY(U)) u_unit (.a(a), .b(b), .cin(cin), .sum(sum1), .cout(cout1));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: a=%b b=%b cin=%b | zero sum=%b cout=%b | unit sum=%b cout=%b at %0t",
               what, a, b, cin, sum0, cout0, sum1, cout1, $time);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Power-up: drive every rail high, then low, so that every cell of the
    // timed instance sees an input event after time 0 and its C-elements
    // are cleared.
    a = 2'b11; b = 2'b11; cin = 2'b11;
    #(10*U);
    a = DR_SPACER; b = DR_SPACER; cin = DR_SPACER;
    #(10*U);
    check(sum0 == DR_SPACER && cout0 == DR_SPACER && sum1 == DR_SPACER && cout1 == DR_SPACER,
          "initial spacer");

    for (int rep = 0; rep < 2; rep++) begin
      for (int v = 0; v < 8; v++) begin
        logic va, vb, vc, s, c;
        logic early;
        va = v[0]; vb = v[1]; vc = v[2];
        {c, s} = va + vb + vc;
        early = (va == vb);
        if (va && vb) n_gen++;
        else if (!va && !vb) n_kill++;
        else n_prop++;

        if (rep == 0) begin
          // --- Phase 1: operands first, cin later --------------------------
          a = dr_encode(va); b = dr_encode(vb);
          #(10*U);
          check(sum0 == DR_SPACER && sum1 == DR_SPACER, "sum waits for cin");
          if (early)
            check(cout0 == dr_encode(c) && cout1 == dr_encode(c), "early carry on generate/kill");
          else
            check(cout0 == DR_SPACER && cout1 == DR_SPACER, "carry waits for cin on propagate");
          cin = dr_encode(vc);
          #(H);
          check(sum1 == DR_SPACER, "sum not within half a unit of cin");
          if (!early) check(cout1 == DR_SPACER, "carry not within half a unit of cin");
          #(U);
          if (!early) check(cout1 == dr_encode(c), "propagate: carry 1 unit after cin");
          check(sum1 == DR_SPACER, "sum not yet 1 unit after cin");
          #(U);
          check(sum1 == dr_encode(s), "sum 2 units after cin");
          #(8*U);
        end else begin
          // --- Phase 1': all inputs together, timed -----------------------
          a = dr_encode(va); b = dr_encode(vb); cin = dr_encode(vc);
          #(U + H);
          check(cout1 == DR_SPACER && sum1 == DR_SPACER, "nothing after 1 unit");
          #(U);
          check(cout1 == dr_encode(c), "carry after 2 units");
          check(sum1 == DR_SPACER, "sum not after 2 units");
          #(U);
          check(sum1 == dr_encode(s), "sum after 3 units");
          #(7*U);
        end
        // --- Phase 2: valid result -----------------------------------------
        check(sum0 == dr_encode(s) && cout0 == dr_encode(c), "zero-delay result");
        check(sum1 == dr_encode(s) && cout1 == dr_encode(c), "unit-delay result");

        // --- Phase 3: early reset from one operand ---------------------------
        if ((v + rep) % 2 == 0) a = DR_SPACER; else b = DR_SPACER;
        #(2*U + H);
        check(sum1 == dr_encode(s), "sum still held 2 units after partial reset");
        #(U);
        check(sum1 == DR_SPACER && cout1 == DR_SPACER, "unit-delay early reset in 3 units");
        check(sum0 == DR_SPACER && cout0 == DR_SPACER, "zero-delay early reset");
        n_early_reset++;
        #(7*U);
        // --- Phase 4: rest returns to spacer ---------------------------------
        a = DR_SPACER; b = DR_SPACER; cin = DR_SPACER;
        #(10*U);
        check(sum0 == DR_SPACER && cout0 == DR_SPACER && sum1 == DR_SPACER && cout1 == DR_SPACER,
              "all spacer");
      end
    end

    if (n_gen == 0 || n_kill == 0 || n_prop == 0 || n_early_reset == 0) begin
      failures++;
      $display("FAIL: a carry scenario was never exercised");
    end
    $display("generate=%0d kill=%0d propagate=%0d early_reset=%0d", n_gen, n_kill, n_prop, n_early_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
