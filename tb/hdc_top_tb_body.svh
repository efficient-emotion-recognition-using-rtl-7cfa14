// hdc_top_tb_body.svh - stimulus, checking and coverage counting shared by the
// end-to-end testbenches of hdc_top. Included inside a testbench module after
// hdc_model.svh; that module defines the parameters, the DUT instance and
// TRAIN_PER_CLASS / INFER_PER_CLASS / FLIP_PCT.
//
// Sequence: init with a random seed; round 1 in rule-90 mode (train both
// classes, then classify noisy samples of each class); clear the classes;
// round 2 in hybrid mode; round 3 back in rule-90 mode (its FP pairs were
// overwritten by hybrid bursts and are regenerated). Every TE vector, every
// inference result (label and distances), the stall cycles of every sample
// and the vector-request count are compared with the model. Mechanisms are
// counted and each must occur at least once.

int checks = 0, failures = 0;
int n_fpgen = 0, n_burst = 0, n_mode_switch = 0, n_warmup = 0, n_restart = 0,
    n_train = 0, n_infer = 0, n_clear = 0, n_gap = 0, n_correct = 0, n_zero_feat = 0;
bit proto [NC][C];
int true_q [$];   // true class of every expected inference
bit model_fp_valid = 0;
hdc_pkg::map_mode_e last_mode = hdc_pkg::MAP_RULE90;
int stall_cycles;
int req_r90 = 0, ch_r90 = 0, req_hyb = 0, ch_hyb = 0;   // steady-state vector requests

always @(posedge clk) if (rst_n && feat_valid && !feat_ready) stall_cycles++;

// compare DUT outputs with the model's queues
always @(posedge clk) if (rst_n) begin
  if (te_valid) begin
    checks++;
    if (m_te_q.size() == 0) begin failures++; $display("FAIL unexpected TE"); end
    else begin
      logic [D-1:0] e;
      e = m_te_q.pop_front();
      if (te !== e) begin failures++; $display("FAIL TE mismatch"); end
    end
  end
  if (pred_valid) begin
    checks++;
    if (m_pred_q.size() == 0) begin failures++; $display("FAIL unexpected prediction"); end
    else begin
      int el, ed [NC];
      el = m_pred_q.pop_front();
      for (int k = 0; k < NC; k++) ed[k] = m_dist_q.pop_front();
      if (true_q.size() != 0 && int'(pred_label) == true_q.pop_front()) n_correct++;
      if (pred_label !== LW'(el)) begin failures++; $display("FAIL label %0d exp %0d", pred_label, el); end
      for (int k = 0; k < NC; k++)
        if (pred_dist[k] !== DW'(ed[k])) begin failures++; $display("FAIL dist[%0d] %0d exp %0d", k, pred_dist[k], ed[k]); end
    end
  end
end

task automatic pulse(ref logic sig);
  @(negedge clk); sig = 1; @(negedge clk); sig = 0;
endtask

task automatic send_sample(input hdc_pkg::map_mode_e md, input int cls, input bit trn);
  bit pos [C];
  int exp_stall, g0, exp_gen, nb, te_before;
  nb = (C + TFC_V - 1) / TFC_V;
  for (int c = 0; c < C; c++) begin
    pos[c] = proto[cls][c];
    if ($urandom_range(0, 99) < FLIP_PCT) pos[c] = !pos[c];
  end
  if (md == hdc_pkg::MAP_RULE90) begin
    exp_stall = model_fp_valid ? 0 : 2 * M + 1;
    exp_gen   = C + (model_fp_valid ? 0 : 2 * M);
    if (!model_fp_valid) n_fpgen++;
    model_fp_valid = 1;
  end else begin
    exp_stall = nb * (V + 1);
    exp_gen   = nb * V;
    n_burst  += nb;
    model_fp_valid = 0;
  end
  if (md != last_mode) n_mode_switch++;
  last_mode = md;
  te_before = m_te_q.size();
  model_sample(md, pos, trn, cls);
  if (m_te_q.size() == te_before) n_warmup++;
  else if (trn) n_train++;
  else begin n_infer++; true_q.push_back(cls); end
  @(negedge clk);
  g0 = gen_count;
  stall_cycles = 0;
  for (int c = 0; c < C; c++) begin
    feat_valid = 1;
    mode = md;
    train = trn;
    label = LW'(cls);
    // feature value: positive, zero or negative; only its sign reaches the design
    if (pos[c]) feat = FEAT_W'($urandom_range(1, 32000));
    else if ($urandom_range(0, 9) == 0) begin feat = '0; n_zero_feat++; end
    else feat = -FEAT_W'($urandom_range(1, 32000));
    @(posedge clk);
    while (!feat_ready) @(posedge clk);
    @(negedge clk);
    feat_valid = 0;
    if ($urandom_range(0, 15) == 0) begin n_gap++; @(negedge clk); end
  end
  repeat (3) @(negedge clk);
  checks++;
  if (stall_cycles != exp_stall) begin failures++; $display("FAIL stall %0d exp %0d", stall_cycles, exp_stall); end
  checks++;
  if (gen_count - g0 != exp_gen) begin failures++; $display("FAIL vector requests %0d exp %0d", gen_count - g0, exp_gen); end
  if (md == hdc_pkg::MAP_HYBRID) begin req_hyb += gen_count - g0; ch_hyb += C; end
  else if (exp_stall == 0)       begin req_r90 += gen_count - g0; ch_r90 += C; end
endtask

task automatic restart_history();
  pulse(te_restart);
  m_hist.delete();
  n_restart++;
endtask

task automatic round(input hdc_pkg::map_mode_e md);
  for (int k = 0; k < NC; k++) begin
    restart_history();
    for (int s = 0; s < TRAIN_PER_CLASS + NGRAM - 1; s++) send_sample(md, k, 1);
  end
  for (int k = 0; k < NC; k++) begin
    restart_history();
    for (int s = 0; s < INFER_PER_CLASS + NGRAM - 1; s++) begin
      send_sample(md, k, 0);
    end
  end
  // let the last search finish
  repeat (D / CHUNK + 8) @(negedge clk);
endtask

task automatic need(input int n, input string what);
  checks++;
  if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
  else $display("  %-34s %0d", what, n);
endtask

initial begin
  logic [D-1:0] s;
  feat_valid = 0; feat = '0; train = 0; label = '0; init = 0; am_clear = 0; te_restart = 0;
  mode = hdc_pkg::MAP_RULE90;
  for (int b = 0; b < D; b++) s[b] = $urandom_range(0, 1);
  s[0] = 1'b1;
  seed = s;
  for (int k = 0; k < NC; k++) for (int c = 0; c < C; c++) proto[k][c] = $urandom_range(0, 1);
  model_seed(s);
  model_clear_classes();
  repeat (3) @(negedge clk);
  rst_n = 1;
  pulse(init);
  round(hdc_pkg::MAP_RULE90);
  pulse(am_clear); model_clear_classes(); n_clear++;
  round(hdc_pkg::MAP_HYBRID);
  pulse(am_clear); model_clear_classes(); n_clear++;
  round(hdc_pkg::MAP_RULE90);
  checks++;
  if (m_te_q.size() != 0 || m_pred_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
  $display("mechanisms exercised:");
  need(n_fpgen,       "rule-90 FP generation stall");
  need(n_burst,       "hybrid bank burst refill");
  need(n_mode_switch, "mapping mode switch");
  need(n_warmup,      "n-gram warm-up (no TE)");
  need(n_restart,     "n-gram history restart");
  need(n_train,       "training update");
  need(n_infer,       "inference search");
  need(n_clear,       "class memory clear");
  need(n_gap,         "input gap");
  need(n_zero_feat,   "zero feature (selects NFP)");
  $display("  vector request rate, rule-90 mode     %0d/%0d = %f", req_r90, ch_r90, real'(req_r90) / ch_r90);
  $display("  vector request rate, hybrid mode      %0d/%0d = %f", req_hyb, ch_hyb, real'(req_hyb) / ch_hyb);
  $display("  correctly classified (information)  %0d of %0d", n_correct, 3 * NC * INFER_PER_CLASS);
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
