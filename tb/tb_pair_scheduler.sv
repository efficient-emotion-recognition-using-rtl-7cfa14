// tb_pair_scheduler - self-checking test of the combinatorial-pair sequence.
// For V = 7 the sequence is compared with the table of sets printed for the
// scheme (A..G = 0..6); for V = 7, 11 and 32 the number of sets per bank is
// compared with TFC(V) = sum floor((V-n)/2) (9, 25 and 240), every set is
// checked to use distinct indices in range, no unordered pair to occur twice
// within a bank, and the sequence to wrap back to the first set.
module tb_pair_scheduler;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic r7, a7, l7, r11, a11, l11, r32, a32, l32;
  logic [2:0] i7, p7, n7;
  logic [3:0] i11, p11, n11;
  logic [4:0] i32, p32, n32;

  pair_scheduler #(.V(7))  d7  (.clk, .rst_n, .restart_i(r7),  .advance_i(a7),  .im_idx_o(i7),  .pfp_idx_o(p7),  .nfp_idx_o(n7),  .last_o(l7));
  pair_scheduler #(.V(11)) d11 (.clk, .rst_n, .restart_i(r11), .advance_i(a11), .im_idx_o(i11), .pfp_idx_o(p11), .nfp_idx_o(n11), .last_o(l11));
  pair_scheduler #(.V(32)) d32 (.clk, .rst_n, .restart_i(r32), .advance_i(a32), .im_idx_o(i32), .pfp_idx_o(p32), .nfp_idx_o(n32), .last_o(l32));

  function automatic int tfc(input int v);
    int s = 0;
    for (int n = 1; n <= v - 2; n++) s += (v - n) / 2;
    return s;
  endfunction

  // the printed table for 7 vectors: iM, PFP, NFP
  int exp7 [9][3] = '{'{0,1,2}, '{0,3,4}, '{0,5,6}, '{1,2,3}, '{1,4,5}, '{2,3,4}, '{2,5,6}, '{3,4,5}, '{4,5,6}};

  task automatic step(input int v);
    case (v) 7: a7 = 1; 11: a11 = 1; default: a32 = 1; endcase
    @(posedge clk); #1;
    a7 = 0; a11 = 0; a32 = 0;
  endtask

  function automatic void get(input int v, output int im, output int pp, output int nn, output bit last);
    case (v)
      7:  begin im = i7;  pp = p7;  nn = n7;  last = l7;  end
      11: begin im = i11; pp = p11; nn = n11; last = l11; end
      default: begin im = i32; pp = p32; nn = n32; last = l32; end
    endcase
  endfunction

  task automatic run_bank(input int v);
    bit used [32][32];
    int cnt, im, pp, nn;
    bit last;
    for (int x = 0; x < 32; x++) for (int y = 0; y < 32; y++) used[x][y] = 0;
    cnt = 0;
    do begin
      get(v, im, pp, nn, last);
      if (v == 7 && cnt < 9) begin
        checks++;
        if (im != exp7[cnt][0] || pp != exp7[cnt][1] || nn != exp7[cnt][2]) begin
          failures++; $display("FAIL V=7 set %0d: %0d %0d %0d", cnt + 1, im, pp, nn);
        end
      end
      checks++;
      if (!(im < pp && pp < nn && nn < v) || used[im][pp] || used[im][nn]) begin
        failures++; $display("FAIL V=%0d set %0d invalid or repeated: %0d %0d %0d", v, cnt, im, pp, nn);
      end
      used[im][pp] = 1; used[im][nn] = 1;
      cnt++;
      step(v);
    end while (!last && cnt < 1000);
    checks++;
    if (cnt != tfc(v)) begin failures++; $display("FAIL V=%0d: %0d sets, expected %0d", v, cnt, tfc(v)); end
    get(v, im, pp, nn, last);
    checks++;
    if (im != 0 || pp != 1 || nn != 2) begin failures++; $display("FAIL V=%0d no wrap", v); end
  endtask

  initial begin
    {r7, a7, r11, a11, r32, a32} = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    run_bank(7); run_bank(7); run_bank(11); run_bank(32);
    checks++;
    if (tfc(7) != 9 || tfc(11) != 25 || tfc(32) != 240) failures++;
    // restart in the middle of a bank
    step(7); step(7);
    r7 = 1; @(posedge clk); #1; r7 = 0;
    checks++;
    if (i7 != 0 || p7 != 1 || n7 != 2) begin failures++; $display("FAIL restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
