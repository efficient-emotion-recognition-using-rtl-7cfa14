// tb_spatial_encoder - self-checking test of binding and per-modality bundling.
// Random iM/FP vectors are streamed for modalities of 4, 9, 1 and 7 channels
// (with idle cycles in between); a model counts, per dimension, the ones of
// iM XOR FP and forms the majority (2*count > n, ties 0). Each modality
// vector, its one-cycle latency and the last-modality flag are checked.
module tb_spatial_encoder;
  localparam int unsigned D = 50, MAXC = 9;
  logic clk = 0, rst_n = 0;
  logic vin = 0, mlast = 0, slast = 0, vout, olast;
  logic [D-1:0] im = '0, fp = '0, se;
  int checks = 0, failures = 0;
  int sizes [4] = '{4, 9, 1, 7};

  spatial_encoder #(.D(D), .MAX_CH(MAXC)) dut (.clk, .rst_n, .in_valid_i(vin), .im_i(im), .fp_i(fp),
    .in_mod_last_i(mlast), .in_smp_last_i(slast), .out_valid_o(vout), .se_o(se), .out_smp_last_o(olast));
  always #5 clk = ~clk;

  function automatic logic [D-1:0] rnd();
    logic [D-1:0] v;
    for (int b = 0; b < D; b++) v[b] = $urandom_range(0, 1);
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++)
      for (int m = 0; m < 4; m++) begin
        int cnt [D];
        logic [D-1:0] exp;
        for (int d = 0; d < D; d++) cnt[d] = 0;
        for (int c = 0; c < sizes[m]; c++) begin
          @(negedge clk);
          im = rnd(); fp = rnd();
          if (rep == 2 && sizes[m] == 4) fp = im;   // all-zero bindings
          for (int d = 0; d < D; d++) cnt[d] += (im[d] ^ fp[d]);
          vin = 1; mlast = (c == sizes[m] - 1); slast = mlast && (m == 3);
          @(posedge clk); #1;
          vin = 0;
          checks++;
          if (c < sizes[m] - 1) begin
            if (vout) begin failures++; $display("FAIL early output"); end
            if ($urandom_range(0, 2) == 0) @(negedge clk);
          end else begin
            for (int d = 0; d < D; d++) exp[d] = (2 * cnt[d] > sizes[m]);
            // result one cycle after the modality's last channel
            if (!vout || se !== exp || olast !== (m == 3)) begin
              failures++; $display("FAIL modality %0d: valid %b se %h exp %h", m, vout, se, exp);
            end
          end
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
