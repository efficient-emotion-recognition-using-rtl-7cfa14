// tb_assoc_memory - self-checking test of training and Hamming search.
// Uses D = 64, two classes, 4-bit counters (so saturation is reached) and
// 16-bit chunks (a search takes 4 cycles). A model keeps the per-dimension
// +1/-1 saturating counters, the class vectors (counter > 0) and computes
// Hamming distances and the nearest class (lower index on a tie). Checks the
// class vectors after every training step, every inference result, the
// search latency, ready during a search, and clear.
module tb_assoc_memory;
  localparam int unsigned D = 64, NC = 2, ACW = 4, CHUNK = 16, DW = 7;
  logic clk = 0, rst_n = 0, clear = 0, vin = 0, ready, train = 0, vout;
  logic [0:0] label = '0, olabel;
  logic [D-1:0] hv = '0;
  logic [NC-1:0][DW-1:0] dists;
  logic [NC-1:0][D-1:0] chv;
  int acc [NC][D];
  int checks = 0, failures = 0;

  assoc_memory #(.D(D), .NC(NC), .ACW(ACW), .CHUNK(CHUNK)) dut (
    .clk, .rst_n, .clear_i(clear), .in_valid_i(vin), .in_ready_o(ready), .hv_i(hv),
    .train_i(train), .label_i(label), .out_valid_o(vout), .label_o(olabel), .dist_o(dists), .class_hv_o(chv));
  always #5 clk = ~clk;

  function automatic logic [D-1:0] rnd();
    logic [D-1:0] v;
    for (int b = 0; b < D; b++) v[b] = $urandom_range(0, 1);
    return v;
  endfunction

  function automatic logic [D-1:0] cls(input int c);
    logic [D-1:0] v;
    for (int d = 0; d < D; d++) v[d] = acc[c][d] > 0;
    return v;
  endfunction

  task automatic do_train(input logic [D-1:0] v, input int c);
    @(negedge clk);
    hv = v; train = 1; label = c[0]; vin = 1;
    @(posedge clk); #1; vin = 0; train = 0;
    for (int d = 0; d < D; d++)
      if (v[d]) acc[c][d] = (acc[c][d] == 7) ? 7 : acc[c][d] + 1;
      else      acc[c][d] = (acc[c][d] == -8) ? -8 : acc[c][d] - 1;
    for (int k = 0; k < NC; k++) begin
      checks++;
      if (chv[k] !== cls(k)) begin failures++; $display("FAIL class %0d %h exp %h", k, chv[k], cls(k)); end
    end
  endtask

  task automatic do_infer(input logic [D-1:0] v);
    int e [NC];
    int best, lat;
    for (int c = 0; c < NC; c++) e[c] = $countones(v ^ cls(c));
    best = (e[1] < e[0]) ? 1 : 0;
    @(negedge clk);
    hv = v; train = 0; vin = 1;
    @(posedge clk); #1; vin = 0;
    lat = 0;
    while (!vout && lat < 100) begin
      checks++;
      if (ready) begin failures++; $display("FAIL ready while searching"); end
      @(posedge clk); #1; lat++;
    end
    checks++;
    if (lat != D / CHUNK) begin failures++; $display("FAIL latency %0d", lat); end
    checks++;
    if (olabel !== best[0] || dists[0] !== DW'(e[0]) || dists[1] !== DW'(e[1])) begin
      failures++; $display("FAIL infer label %0d/%0d dist %0d,%0d exp %0d,%0d", olabel, best, dists[0], dists[1], e[0], e[1]);
    end
  endtask

  initial begin
    logic [D-1:0] p0, p1, q;
    for (int c = 0; c < NC; c++) for (int d = 0; d < D; d++) acc[c][d] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    p0 = rnd(); p1 = rnd();
    // noisy copies of two prototypes; 12 per class saturates 4-bit counters
    for (int r = 0; r < 12; r++) begin
      q = p0; for (int f = 0; f < 8; f++) q[$urandom_range(0, D - 1)] ^= 1'b1;
      do_train(q, 0);
      q = p1; for (int f = 0; f < 8; f++) q[$urandom_range(0, D - 1)] ^= 1'b1;
      do_train(q, 1);
    end
    for (int r = 0; r < 10; r++) do_train(~p0, 0);   // drives class 0 back from saturation
    for (int r = 0; r < 20; r++) begin
      q = (r % 2) ? p1 : p0; for (int f = 0; f < 6; f++) q[$urandom_range(0, D - 1)] ^= 1'b1;
      do_infer(q);
      do_infer(rnd());
    end
    // clear empties both classes: every distance is then the query's weight
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int c = 0; c < NC; c++) for (int d = 0; d < D; d++) acc[c][d] = 0;
    checks++;
    if (chv !== '0) begin failures++; $display("FAIL clear"); end
    do_infer(rnd());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
