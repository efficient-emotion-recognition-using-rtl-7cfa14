// temporal_encoder - n-gram encoding of consecutive fused sample vectors.
//
// TE(j) = SE(j) XOR rho^1(SE(j-1)) XOR ... XOR rho^(N-1)(SE(j-N+1)) (paper
// equation 5), with rho^k the cyclic shift by k positions (bit i of rho^k(x)
// is bit (i+k) mod D of x). The last N-1 fused vectors are kept in a history
// register chain; a TE vector is produced for every new sample once N samples
// have been seen since the last restart_i (which empties the history, e.g. at
// the start of a new recording).
//
// Interface/timing: in_valid_i with se_i; out_valid_o pulses in the next cycle
// with te_o, if the history was full. N = 3 is the paper's n-gram size.
module temporal_encoder #(
  parameter int unsigned D = hdc_pkg::HV_DIM_DEFAULT,
  parameter int unsigned N = hdc_pkg::NGRAM_DEFAULT,
  localparam int unsigned FW = $clog2(N + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         restart_i,
  input  logic         in_valid_i,
  input  logic [D-1:0] se_i,
  output logic         out_valid_o,
  output logic [D-1:0] te_o
);

  logic [D-1:0]  hist_q [N];   // hist_q[k-1] = SE(j-k); entry N-1 unused when N > 1
  logic [D-1:0]  te_nx;
  logic [FW-1:0] fill_q;

  function automatic logic [D-1:0] rho(input logic [D-1:0] x, input int unsigned k);
    logic [2*D-1:0] xx;
    xx = {x, x} >> (k % D);
    return xx[D-1:0];
  endfunction

  always_comb begin
    te_nx = se_i;
    for (int unsigned k = 1; k < N; k++) te_nx ^= rho(hist_q[k-1], k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_q      <= '0;
      out_valid_o <= 1'b0;
    end else begin
      out_valid_o <= 1'b0;
      if (restart_i) begin
        fill_q <= '0;
      end else if (in_valid_i) begin
        if (fill_q >= FW'(N - 1)) out_valid_o <= 1'b1;
        else                      fill_q      <= fill_q + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid_i && !restart_i) begin
      te_o      <= te_nx;
      hist_q[0] <= se_i;
      for (int unsigned k = 1; k < N; k++) hist_q[k] <= hist_q[k-1];
    end
  end

endmodule
