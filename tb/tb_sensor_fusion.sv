// tb_sensor_fusion - self-checking test of early fusion.
// Two instances: M = 3 (the three-modality configuration) and M = 4 (to
// exercise ties, which must give 0). Random modality vectors are fed, a model
// forms the per-dimension majority, and the fused vector and its one-cycle
// latency are checked. Hand-made cases check majority and tie directly.
module tb_sensor_fusion;
  localparam int unsigned D = 48;
  logic clk = 0, rst_n = 0;
  logic v3 = 0, l3 = 0, o3, v4 = 0, l4 = 0, o4;
  logic [D-1:0] in3 = '0, in4 = '0, f3, f4;
  int checks = 0, failures = 0;

  sensor_fusion #(.D(D), .M(3)) d3 (.clk, .rst_n, .in_valid_i(v3), .se_mod_i(in3), .in_last_i(l3), .out_valid_o(o3), .se_o(f3));
  sensor_fusion #(.D(D), .M(4)) d4 (.clk, .rst_n, .in_valid_i(v4), .se_mod_i(in4), .in_last_i(l4), .out_valid_o(o4), .se_o(f4));
  always #5 clk = ~clk;

  function automatic logic [D-1:0] rnd();
    logic [D-1:0] v;
    for (int b = 0; b < D; b++) v[b] = $urandom_range(0, 1);
    return v;
  endfunction

  task automatic run(input int m, input logic [D-1:0] vecs [4]);
    int cnt [D];
    logic [D-1:0] exp;
    for (int d = 0; d < D; d++) cnt[d] = 0;
    for (int k = 0; k < m; k++) begin
      @(negedge clk);
      for (int d = 0; d < D; d++) cnt[d] += vecs[k][d];
      if (m == 3) begin v3 = 1; in3 = vecs[k]; l3 = (k == m - 1); end
      else        begin v4 = 1; in4 = vecs[k]; l4 = (k == m - 1); end
      @(posedge clk); #1;
      v3 = 0; v4 = 0;
    end
    for (int d = 0; d < D; d++) exp[d] = (2 * cnt[d] > m);
    checks++;
    if (m == 3 ? (!o3 || f3 !== exp) : (!o4 || f4 !== exp)) begin
      failures++; $display("FAIL M=%0d fused %h exp %h", m, (m == 3) ? f3 : f4, exp);
    end
  endtask

  initial begin
    logic [D-1:0] vv [4];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      for (int k = 0; k < 4; k++) vv[k] = rnd();
      run(3, vv);
      run(4, vv);
    end
    // explicit: two of three ones -> 1 ; two of four -> 0 (tie)
    vv[0] = '1; vv[1] = '1; vv[2] = '0; vv[3] = '0;
    run(3, vv);
    checks++; if (f3 !== '1) begin failures++; $display("FAIL 2-of-3"); end
    run(4, vv);
    checks++; if (f4 !== '0) begin failures++; $display("FAIL tie"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
