// tb_hds_mapper - self-checking test of the map-into-HDS block in both modes.
// A reference model computes the k-th rule-90 iterate of the seed bit by bit
// and derives every channel's expected iM and selected FP vector:
//   rule-90 mode: FP word w = r90^(w+1)(seed), channel c's iM = r90^(2M+c+1)(seed)
//   hybrid mode:  bank b holds r90^(bV+1..bV+V)(seed); channel c uses set
//                 c mod TFC(V) of bank c / TFC(V), in the table order.
// The test runs samples in rule-90 mode, hybrid mode and rule-90 again, with
// random feature signs, and checks every output vector, the number of vector
// requests, the stall cycles of FP generation and bank bursts, and that a
// stalled channel is held.
module tb_hds_mapper;
  import hdc_pkg::*;
  localparam int unsigned D = 64, M = 3, V = 7, AW = 3, MW = 2;
  localparam int unsigned NCH = 20;
  localparam int unsigned CH [M] = '{5, 6, 9};
  localparam int unsigned T = 9;  // TFC(7)

  logic clk = 0, rst_n = 0;
  map_mode_e mode = MAP_RULE90;
  logic [D-1:0] seed = '0;
  logic init = 0, valid = 0, ready, first = 0, pos = 0;
  logic [MW-1:0] mod = '0;
  logic [1:0] tag = '0;
  logic out_valid, busy;
  logic [D-1:0] im, fp;
  logic [1:0] out_tag;
  logic [31:0] gen_count;
  int checks = 0, failures = 0;

  hds_mapper #(.D(D), .M(M), .V(V), .TAGW(2)) dut (
    .clk, .rst_n, .mode_i(mode), .seed_i(seed), .init_i(init),
    .ch_valid_i(valid), .ch_ready_o(ready), .ch_first_i(first), .ch_pos_i(pos), .ch_mod_i(mod),
    .ch_tag_i(tag), .out_valid_o(out_valid), .im_o(im), .fp_o(fp), .out_tag_o(out_tag),
    .gen_busy_o(busy), .gen_count_o(gen_count));

  always #5 clk = ~clk;

  function automatic logic [D-1:0] r90n(input logic [D-1:0] s, input int n);
    logic [D-1:0] x, o;
    x = s;
    for (int k = 0; k < n; k++) begin
      for (int i = 0; i < D; i++) o[i] = x[(i + D - 1) % D] ^ x[(i + 1) % D];
      x = o;
    end
    return x;
  endfunction

  // enumerate the combinatorial sets independently of the design
  int set_im [T], set_p [T], set_n [T];
  initial begin
    int s = 0;
    for (int a = 0; a < V; a++)
      for (int b = a + 1; b + 1 < V; b += 2) begin
        if (s < T) begin set_im[s] = a; set_p[s] = b; set_n[s] = b + 1; end
        s++;
      end
  end

  logic [D-1:0] exp_im [$], exp_fp [$];
  logic [1:0]   exp_tag [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_im.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      logic [D-1:0] ei, ef; logic [1:0] et;
      ei = exp_im.pop_front(); ef = exp_fp.pop_front(); et = exp_tag.pop_front();
      if (im !== ei || fp !== ef || out_tag !== et) begin
        failures++; $display("FAIL vectors: im %h/%h fp %h/%h", im, ei, fp, ef);
      end
    end
  end

  // stalled request must not be dropped: count accepted channels
  int accepted;
  always @(posedge clk) if (valid && ready) accepted++;

  // send one sample; returns the number of cycles from first valid to last accept
  task automatic sample(input map_mode_e md, output int cycles);
    int c, mo, ci, bank;
    cycles = 0;
    c = 0;
    for (mo = 0; mo < M; mo++)
      for (ci = 0; ci < CH[mo]; ci++) begin
        logic p;
        p = $urandom_range(0, 1);
        if (md == MAP_RULE90) begin
          exp_im.push_back(r90n(seed, 2 * M + c + 1));
          exp_fp.push_back(r90n(seed, 2 * mo + (p ? 0 : 1) + 1));
        end else begin
          int s;
          bank = c / T; s = c % T;
          exp_im.push_back(r90n(seed, bank * V + set_im[s] + 1));
          exp_fp.push_back(r90n(seed, bank * V + (p ? set_p[s] : set_n[s]) + 1));
        end
        exp_tag.push_back({ci == CH[mo] - 1, (mo == M - 1) && (ci == CH[mo] - 1)});
        @(negedge clk);
        valid = 1; first = (c == 0); pos = p; mod = MW'(mo); mode = md;
        tag = {ci == CH[mo] - 1, (mo == M - 1) && (ci == CH[mo] - 1)};
        do begin
          @(posedge clk); cycles++;
        end while (!ready);
        #1 valid = 0;
        c++;
      end
  endtask

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    int cyc, g0;
    accepted = 0;
    for (int b = 0; b < D; b++) seed[b] = $urandom_range(0, 1);
    seed[3] = 1'b1;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    // rule 90: first sample stalls 2M cycles to generate the FP pairs
    g0 = gen_count;
    sample(MAP_RULE90, cyc);
    expect_eq(cyc, NCH + 2 * M + 1, "rule90 first sample cycles");
    expect_eq(gen_count - g0, 2 * M + NCH, "rule90 first sample vector requests");
    g0 = gen_count;
    sample(MAP_RULE90, cyc);
    expect_eq(cyc, NCH, "rule90 sample cycles");
    expect_eq(gen_count - g0, NCH, "rule90 vector requests (rate 1)");
    // hybrid: ceil(20/9) = 3 bursts of V
    g0 = gen_count;
    sample(MAP_HYBRID, cyc);
    expect_eq(cyc, NCH + 3 * (V + 1), "hybrid sample cycles");
    expect_eq(gen_count - g0, 3 * V, "hybrid vector requests");
    g0 = gen_count;
    sample(MAP_HYBRID, cyc);
    expect_eq(gen_count - g0, 3 * V, "hybrid vector requests, 2nd sample");
    // back to rule 90: FP pairs were overwritten and are regenerated
    g0 = gen_count;
    sample(MAP_RULE90, cyc);
    expect_eq(cyc, NCH + 2 * M + 1, "rule90 after hybrid cycles");
    expect_eq(gen_count - g0, 2 * M + NCH, "rule90 after hybrid requests");
    repeat (3) @(posedge clk);
    expect_eq(accepted, 5 * NCH, "accepted channels");
    expect_eq(exp_im.size(), 0, "outstanding outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
