// sensor_fusion - early fusion of the modality vectors of one sample.
//
// The M modality vectors SE(1,j) .. SE(M,j) leaving the spatial encoder are
// bundled by majority into the single fused vector SE(j) (paper equation 4),
// so every modality weighs the same whatever its channel count, and only one
// temporal encoder follows. With M odd (3 for AMIGOS, 5 for DEAP) no ties
// occur; for even M a tie gives 0 (this design's choice).
//
// Interface/timing: one modality vector per in_valid_i; in_last_i marks the
// sample's last modality; the fused vector appears with a one-cycle
// out_valid_o pulse in the following cycle.
module sensor_fusion #(
  parameter int unsigned D = hdc_pkg::HV_DIM_DEFAULT,
  parameter int unsigned M = hdc_pkg::N_MOD_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid_i,
  input  logic [D-1:0] se_mod_i,
  input  logic         in_last_i,
  output logic         out_valid_o,
  output logic [D-1:0] se_o
);

  hv_bundler #(.D(D), .MAXN(M)) u_bundle (
    .clk, .rst_n,
    .in_valid_i, .in_vec_i(se_mod_i), .in_last_i,
    .out_valid_o, .out_vec_o(se_o)
  );

endmodule
