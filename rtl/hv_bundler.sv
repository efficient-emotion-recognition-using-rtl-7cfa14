// hv_bundler - bundling (component-wise majority) of a run of hypervectors.
//
// One saturation-free counter per dimension counts the ones seen since the
// start of the run. The input vector accepted with in_last_i closes the run:
// bit d of the result is 1 when more than half of the run's vectors had a 1 in
// dimension d (2*count > n). A tie gives 0; the paper only says "vertical
// majority count", so the tie rule is this design's choice. The counters then
// restart with the next input. Used for both bundling steps of the paper: the
// channels of one modality (spatial encoder) and the modalities of one sample
// (sensor fusion).
//
// Interface/timing: one input vector per cycle when in_valid_i is high; the
// result appears on out_vec_o with a one-cycle out_valid_o pulse in the cycle
// after the closing input. MAXN is the longest run supported.
module hv_bundler #(
  parameter int unsigned D    = hdc_pkg::HV_DIM_DEFAULT,
  parameter int unsigned MAXN = 105,
  localparam int unsigned CW  = $clog2(MAXN + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid_i,
  input  logic [D-1:0] in_vec_i,
  input  logic         in_last_i,
  output logic         out_valid_o,
  output logic [D-1:0] out_vec_o
);

  logic [CW-1:0] cnt_q  [D];
  logic [CW-1:0] cnt_nx [D];
  logic [CW-1:0] n_q, n_nx;
  logic          fresh_q;

  always_comb begin
    n_nx = (fresh_q ? '0 : n_q) + CW'(1);
    for (int unsigned d = 0; d < D; d++)
      cnt_nx[d] = (fresh_q ? '0 : cnt_q[d]) + CW'(in_vec_i[d]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fresh_q     <= 1'b1;
      n_q         <= '0;
      out_valid_o <= 1'b0;
    end else begin
      out_valid_o <= in_valid_i && in_last_i;
      if (in_valid_i) begin
        n_q     <= n_nx;
        fresh_q <= in_last_i;
      end
    end
  end

  // datapath registers: not reset, 'fresh_q' masks their old contents
  always_ff @(posedge clk) begin
    if (in_valid_i) begin
      for (int unsigned d = 0; d < D; d++) begin
        cnt_q[d] <= cnt_nx[d];
        if (in_last_i) out_vec_o[d] <= ({1'b0, cnt_nx[d]} << 1) > {1'b0, n_nx};
      end
    end
  end

endmodule
