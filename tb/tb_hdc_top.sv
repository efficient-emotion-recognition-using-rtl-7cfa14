// tb_hdc_top - end-to-end test of the classifier at a reduced size
// (D = 256, three modalities of 3/4/6 channels, 7 stored vectors, n-gram 3,
// two classes, 32-bit search chunks). Drives class-patterned feature streams
// through training and inference in both mapping modes and checks everything
// against the reference model (see hdc_top_tb_body.svh).
module tb_hdc_top;
  localparam int unsigned D = 256, M = 3, V = 7, NGRAM = 3, NC = 2, ACW = 8, CHUNK = 32, FEAT_W = 16;
  localparam int unsigned MOD_CH [M] = '{3, 4, 6};
  localparam int unsigned C = 13;
  localparam int unsigned LW = 1, DW = $clog2(D + 1);
  localparam int unsigned TRAIN_PER_CLASS = 5, INFER_PER_CLASS = 4, FLIP_PCT = 15;

  logic clk = 0, rst_n = 0;
  hdc_pkg::map_mode_e mode;
  logic [D-1:0] seed, te;
  logic init, am_clear, te_restart, feat_valid, feat_ready, train, te_valid, pred_valid, gen_busy;
  logic signed [FEAT_W-1:0] feat;
  logic [LW-1:0] label, pred_label;
  logic [NC-1:0][DW-1:0] pred_dist;
  logic [31:0] gen_count;

  always #5 clk = ~clk;

  hdc_top #(.D(D), .M(M), .MOD_CH(MOD_CH), .V(V), .NGRAM(NGRAM), .NC(NC), .ACW(ACW), .CHUNK(CHUNK), .FEAT_W(FEAT_W)) dut (
    .clk, .rst_n, .mode_i(mode), .seed_i(seed), .init_i(init), .am_clear_i(am_clear), .te_restart_i(te_restart),
    .feat_valid_i(feat_valid), .feat_ready_o(feat_ready), .feat_i(feat), .train_i(train), .label_i(label),
    .te_valid_o(te_valid), .te_o(te), .pred_valid_o(pred_valid), .pred_label_o(pred_label), .pred_dist_o(pred_dist),
    .gen_busy_o(gen_busy), .gen_count_o(gen_count));

  `include "hdc_model.svh"
  `include "hdc_top_tb_body.svh"

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
