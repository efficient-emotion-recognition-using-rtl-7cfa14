// spatial_encoder - binds each channel's iM and selected FP vector and bundles
// the bound vectors of one modality.
//
// SE(i,j) = iM(i) XOR FP(i,j) for channel i of sample j; the SE vectors of all
// channels of a modality are bundled by majority (hv_bundler) into the
// modality vector SE(m,j). Binding and bundling follow the paper's equations
// (2) and (3); majority ties resolve to 0 (this design's choice).
//
// Interface/timing: one channel per cycle on in_valid_i; in_mod_last_i marks a
// modality's last channel and in_smp_last_i the last channel of the sample
// (last modality). One cycle after a modality's last channel out_valid_o
// pulses with the modality vector on se_o; out_smp_last_o then says it is the
// sample's last modality. MAX_CH is the largest channel count of a modality.
module spatial_encoder #(
  parameter int unsigned D      = hdc_pkg::HV_DIM_DEFAULT,
  parameter int unsigned MAX_CH = 105
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid_i,
  input  logic [D-1:0] im_i,
  input  logic [D-1:0] fp_i,
  input  logic         in_mod_last_i,
  input  logic         in_smp_last_i,
  output logic         out_valid_o,
  output logic [D-1:0] se_o,
  output logic         out_smp_last_o
);

  hv_bundler #(.D(D), .MAXN(MAX_CH)) u_bundle (
    .clk, .rst_n,
    .in_valid_i, .in_vec_i(im_i ^ fp_i), .in_last_i(in_mod_last_i),
    .out_valid_o, .out_vec_o(se_o)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           out_smp_last_o <= 1'b0;
    else if (in_valid_i && in_mod_last_i) out_smp_last_o <= in_smp_last_i;
  end

endmodule
