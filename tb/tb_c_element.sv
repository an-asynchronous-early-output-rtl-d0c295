// tb_c_element -- self-checking testbench for the 2-input C-element.
//
// Drives a zero-delay and a unit-delay instance with the same random input
// sequence and compares both with a reference: the output follows the
// inputs when they agree and holds when they differ.  For the unit-delay
// instance it also checks that a change appears exactly one time unit after
// the input event that causes it.  Ends with a TB_RESULT line; a watchdog
// stops a hung run.
//
// The C-element rule checked is the published one; the random stimulus and
// the unit-delay check are this testbench's own choices.
module tb_c_element;

  // Delay of the timed instance; checks sample half a unit off its edges.
  localparam int unsigned U = 10;
  localparam int unsigned H = U / 2;

  logic a, b, y0, y1;
  logic ref_y;
  int   checks = 0, failures = 0;
  int   holds = 0, rises = 0, falls = 0;

  c_element #(.DLY(0)) u_zero (.a(a), .b(b), .y(y0));
  c_element #(.DLY(U)) u_unit (.a(a), .b(b), .y(y1));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b (a=%b b=%b) at %0t", what, got, exp, a, b, $time);
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
    logic prev;
    // Power-up: the timed instance's state is arbitrary until its inputs
    // have agreed once after time 0, so take both inputs high, then low.
    a = 1; b = 1;
    #(2*U);
    a = 0; b = 0; ref_y = 0;
    #(2*U);
    check(y0, 0, "init zero-delay");
    check(y1, 0, "init unit-delay");
    for (int i = 0; i < 2000; i++) begin
      logic na, nb;
      na = 1'($urandom);
      nb = 1'($urandom);
      prev = ref_y;
      a = na; b = nb;
      if (na == nb) ref_y = na;
      if (ref_y == prev) holds++;
      else if (ref_y) rises++;
      else falls++;
      // Timed instance: unchanged half a unit later, new value after one.
      #(H);
      check(y1, prev, "unit-delay before its delay");
      check(y0, ref_y, "zero-delay");
      #(U);
      check(y1, ref_y, "unit-delay after one unit");
      #(U);
    end
    if (holds == 0 || rises == 0 || falls == 0) begin
      failures++;
      $display("FAIL: hold/rise/fall not all exercised");
    end
    $display("holds=%0d rises=%0d falls=%0d", holds, rises, falls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
