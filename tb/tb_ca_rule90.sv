// tb_ca_rule90 - self-checking test of the rule-90 cellular automaton.
// Loads random seeds, steps the automaton and compares every state with a
// bit-by-bit model (cell i <- cell i-1 XOR cell i+1, cyclic). Also checks that
// the state holds when neither load nor step is asserted, and the timing of
// one step per cycle. A watchdog ends the run if it hangs.
module tb_ca_rule90;
  localparam int unsigned D = 97;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [D-1:0] load_val = '0, state, nxt, model;
  int checks = 0, failures = 0;

  ca_rule90 #(.D(D)) dut (.clk, .rst_n, .load_i(load), .load_val_i(load_val), .step_i(step),
                          .state_o(state), .next_o(nxt));

  always #5 clk = ~clk;

  function automatic logic [D-1:0] r90(input logic [D-1:0] s);
    logic [D-1:0] o;
    for (int i = 0; i < D; i++) o[i] = s[(i + D - 1) % D] ^ s[(i + 1) % D];
    return o;
  endfunction

  task automatic check(input logic [D-1:0] exp, input string what);
    checks++;
    if (state !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, state, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check('0, "reset");
    for (int s = 0; s < 8; s++) begin
      for (int w = 0; w < D; w += 32) load_val[w +: 1] = 1'b0;
      for (int b = 0; b < D; b++) load_val[b] = $urandom_range(0, 1);
      model = load_val;
      load = 1; @(posedge clk); #1; load = 0;
      check(model, "load");
      for (int k = 0; k < 40; k++) begin
        checks++;
        if (nxt !== r90(model)) begin failures++; $display("FAIL next_o"); end
        step = 1; @(posedge clk); #1; step = 0;
        model = r90(model);
        check(model, "step");
      end
      // hold
      repeat (3) @(posedge clk); #1;
      check(model, "hold");
    end
    // single set bit evolves into the Sierpinski pattern: after 1 step two bits
    load_val = '0; load_val[10] = 1'b1;
    load = 1; @(posedge clk); #1; load = 0;
    step = 1; @(posedge clk); #1; step = 0;
    begin
      logic [D-1:0] e; e = '0; e[9] = 1'b1; e[11] = 1'b1;
      check(e, "single-bit step");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
