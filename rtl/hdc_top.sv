// hdc_top - early-fusion hyperdimensional emotion classifier.
//
// Extracted physiological features arrive one channel at a time, modality by
// modality, in a fixed order (MOD_CH[0] channels of modality 0, then modality
// 1, ...; one sample = all channels). The datapath is the paper's four blocks
// plus early fusion:
//   hds_mapper       - iM/FP vectors from one seed by rule 90 (rule-90 mode) or
//                      by combinatorial pairs of a burst-refilled bank (hybrid)
//   spatial_encoder  - SE = iM XOR FP per channel, majority per modality
//   sensor_fusion    - majority over the modality vectors (early fusion)
//   temporal_encoder - n-gram of N consecutive fused vectors
//   assoc_memory     - class vectors (training) and Hamming search (inference)
// Defaults are the AMIGOS configuration: D = 10,000, GSR/ECG/EEG with
// 32/77/105 channels, 2*3+1 = 7 stored vectors, n-gram 3, two classes.
//
// Interface: init_i loads seed_i (must be non-zero). feat_* is a valid/ready
// stream of signed features; only the sign is used (> 0 selects PFP, <= 0
// NFP). mode_i is sampled with each sample's first channel. train_i and
// label_i are sampled with a sample's last channel and decide whether its
// n-gram (if the history is full) trains class label_i or is classified.
// am_clear_i empties the classes; te_restart_i empties the n-gram history.
// Timing: one channel per cycle, except while the mapper generates vectors
// (2*M cycles once after init in rule-90 mode; V cycles per bank refill in
// hybrid mode). te_valid_o follows a sample's last channel by 4 cycles, an
// inference result (pred_valid_o) D/CHUNK cycles later. gen_count_o counts
// vector requests (rule-90 steps).
module hdc_top
  import hdc_pkg::*;
#(
  parameter int unsigned D      = HV_DIM_DEFAULT,
  parameter int unsigned M      = N_MOD_DEFAULT,
  parameter int unsigned MOD_CH [M] = '{32, 77, 105},
  parameter int unsigned V      = 2 * M + 1,
  parameter int unsigned NGRAM  = NGRAM_DEFAULT,
  parameter int unsigned NC     = N_CLASS_DEFAULT,
  parameter int unsigned ACW    = 16,
  parameter int unsigned CHUNK  = 1000,
  parameter int unsigned FEAT_W = 16,
  localparam int unsigned LW    = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned DW    = $clog2(D + 1),
  localparam int unsigned MW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  map_mode_e                mode_i,
  input  logic [D-1:0]             seed_i,
  input  logic                     init_i,
  input  logic                     am_clear_i,
  input  logic                     te_restart_i,
  // feature stream from the (external) feature extraction
  input  logic                     feat_valid_i,
  output logic                     feat_ready_o,
  input  logic signed [FEAT_W-1:0] feat_i,
  input  logic                     train_i,
  input  logic [LW-1:0]            label_i,
  // results
  output logic                     te_valid_o,
  output logic [D-1:0]             te_o,
  output logic                     pred_valid_o,
  output logic [LW-1:0]            pred_label_o,
  output logic [NC-1:0][DW-1:0]    pred_dist_o,
  output logic                     gen_busy_o,
  output logic [31:0]              gen_count_o
);

  function automatic int unsigned max_ch();
    int unsigned m;
    m = 1;
    for (int unsigned i = 0; i < M; i++) if (MOD_CH[i] > m) m = MOD_CH[i];
    return m;
  endfunction
  localparam int unsigned MAX_CH = max_ch();
  localparam int unsigned CCW    = $clog2(MAX_CH + 1);

  // ---------------- channel sequencing ----------------
  logic [MW-1:0]  mod_q;
  logic [CCW-1:0] ch_q;
  logic           ch_first, mod_last, smp_last, ch_ready;

  assign ch_first = (mod_q == '0) && (ch_q == '0);
  assign mod_last = (ch_q == CCW'(MOD_CH[mod_q] - 1));
  assign smp_last = mod_last && (mod_q == MW'(M - 1));
  assign feat_ready_o = ch_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mod_q <= '0;
      ch_q  <= '0;
    end else if (init_i) begin
      mod_q <= '0;
      ch_q  <= '0;
    end else if (feat_valid_i && ch_ready) begin
      if (mod_last) begin
        ch_q  <= '0;
        mod_q <= smp_last ? '0 : mod_q + 1;
      end else begin
        ch_q  <= ch_q + 1;
      end
    end
  end

  // train/label travel with the sample: captured at its last channel
  logic          smp_train_q;
  logic [LW-1:0] smp_label_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      smp_train_q <= 1'b0;
      smp_label_q <= '0;
    end else if (feat_valid_i && ch_ready && smp_last) begin
      smp_train_q <= train_i;
      smp_label_q <= label_i;
    end
  end

  // ---------------- map into HDS ----------------
  logic         map_valid;
  logic [D-1:0] map_im, map_fp;
  logic [1:0]   map_tag;

  hds_mapper #(.D(D), .M(M), .V(V), .TAGW(2)) u_map (
    .clk, .rst_n,
    .mode_i, .seed_i, .init_i,
    .ch_valid_i(feat_valid_i), .ch_ready_o(ch_ready),
    .ch_first_i(ch_first), .ch_pos_i(feat_i > 0), .ch_mod_i(mod_q),
    .ch_tag_i({mod_last, smp_last}),
    .out_valid_o(map_valid), .im_o(map_im), .fp_o(map_fp), .out_tag_o(map_tag),
    .gen_busy_o, .gen_count_o
  );

  // ---------------- spatial encoder + early fusion ----------------
  logic         se_valid, se_last;
  logic [D-1:0] se_mod;
  logic         fus_valid;
  logic [D-1:0] fus_se;

  spatial_encoder #(.D(D), .MAX_CH(MAX_CH)) u_se (
    .clk, .rst_n,
    .in_valid_i(map_valid), .im_i(map_im), .fp_i(map_fp),
    .in_mod_last_i(map_tag[1]), .in_smp_last_i(map_tag[0]),
    .out_valid_o(se_valid), .se_o(se_mod), .out_smp_last_o(se_last)
  );

  sensor_fusion #(.D(D), .M(M)) u_fuse (
    .clk, .rst_n,
    .in_valid_i(se_valid), .se_mod_i(se_mod), .in_last_i(se_last),
    .out_valid_o(fus_valid), .se_o(fus_se)
  );

  // ---------------- temporal encoder ----------------
  temporal_encoder #(.D(D), .N(NGRAM)) u_te (
    .clk, .rst_n, .restart_i(te_restart_i),
    .in_valid_i(fus_valid), .se_i(fus_se),
    .out_valid_o(te_valid_o), .te_o
  );

  // ---------------- associative memory ----------------
  assoc_memory #(.D(D), .NC(NC), .ACW(ACW), .CHUNK(CHUNK)) u_am (
    .clk, .rst_n, .clear_i(am_clear_i),
    .in_valid_i(te_valid_o), .in_ready_o(), .hv_i(te_o),
    .train_i(smp_train_q), .label_i(smp_label_q),
    .out_valid_o(pred_valid_o), .label_o(pred_label_o), .dist_o(pred_dist_o),
    .class_hv_o()
  );

endmodule
