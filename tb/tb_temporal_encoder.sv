// tb_temporal_encoder - self-checking test of the n-gram encoder (N = 3).
// A model keeps the last fused vectors and forms
// TE(j) = SE(j) ^ rho1(SE(j-1)) ^ rho2(SE(j-2)), with rho_k taking bit
// (i+k) mod D into bit i. Checks that no output appears before three samples,
// every later output and its one-cycle latency, and that restart empties the
// history.
module tb_temporal_encoder;
  localparam int unsigned D = 40, N = 3;
  logic clk = 0, rst_n = 0, restart = 0, vin = 0, vout;
  logic [D-1:0] se = '0, te;
  logic [D-1:0] h [$];
  int checks = 0, failures = 0;

  temporal_encoder #(.D(D), .N(N)) dut (.clk, .rst_n, .restart_i(restart), .in_valid_i(vin), .se_i(se),
                                        .out_valid_o(vout), .te_o(te));
  always #5 clk = ~clk;

  function automatic logic [D-1:0] rho(input logic [D-1:0] x, input int k);
    logic [D-1:0] o;
    for (int i = 0; i < D; i++) o[i] = x[(i + k) % D];
    return o;
  endfunction

  task automatic push(input logic [D-1:0] v);
    logic [D-1:0] exp;
    @(negedge clk);
    se = v; vin = 1;
    @(posedge clk); #1; vin = 0;
    h.push_front(v);
    checks++;
    if (h.size() < N) begin
      if (vout) begin failures++; $display("FAIL output before history full"); end
    end else begin
      exp = h[0];
      for (int k = 1; k < N; k++) exp ^= rho(h[k], k);
      if (!vout || te !== exp) begin failures++; $display("FAIL te %h exp %h", te, exp); end
      void'(h.pop_back());
    end
    repeat (1 + $urandom_range(0, 2)) @(posedge clk);
    #1 checks++;
    if (vout) begin failures++; $display("FAIL output longer than one cycle"); end
  endtask

  initial begin
    logic [D-1:0] v;
    repeat (2) @(posedge clk); rst_n = 1;
    // single-bit vectors make the shift direction visible
    push(40'h1); push(40'h1); push(40'h1);   // 1 ^ rho1(1) ^ rho2(1): bits 0, 39, 38
    checks++;
    if (te !== ((40'h1) | (40'h1 << 39) | (40'h1 << 38))) begin failures++; $display("FAIL shift direction %h", te); end
    for (int r = 0; r < 30; r++) begin
      for (int b = 0; b < D; b++) v[b] = $urandom_range(0, 1);
      push(v);
      if (r == 15) begin
        @(negedge clk); restart = 1; @(negedge clk); restart = 0;
        h.delete();
      end
    end
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
