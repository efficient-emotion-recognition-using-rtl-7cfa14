// pair_scheduler - sequences the 'combinatorial pairs' channel sets of a bank.
//
// For a bank of V vectors numbered 0..V-1 the channel sets are produced in the
// order of the paper's table (Fig. 5): the iM index a runs 0,1,2,...; for each
// a the PFP/NFP pair walks through the following vectors two at a time,
// (a+1,a+2), (a+3,a+4), ... as long as both exist. With V = 7 this yields the
// nine sets A{B,C} A{D,E} A{F,G} B{C,D} B{E,F} C{D,E} C{F,G} D{E,F} E{F,G},
// TFC(V) = sum_{n=1}^{V-2} floor((V-n)/2) sets in all.
//
// Interface: im/pfp/nfp_idx_o name the current set; last_o is high when it is
// the final set the bank offers. advance_i steps to the next set (back to the
// first one after the last); restart_i returns to the first set. Both act at
// the clock edge; restart_i wins.
module pair_scheduler #(
  parameter int unsigned V = 7,
  localparam int unsigned AW = (V > 1) ? $clog2(V) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          restart_i,
  input  logic          advance_i,
  output logic [AW-1:0] im_idx_o,
  output logic [AW-1:0] pfp_idx_o,
  output logic [AW-1:0] nfp_idx_o,
  output logic          last_o
);

  // widened copies so that a+3 / b+3 cannot wrap
  logic [AW+1:0] a_q, b_q;
  logic          pair_left, im_left;

  assign pair_left = (b_q + 3) <= (AW+2)'(V - 1);   // (b+2, b+3) still exists
  assign im_left   = (a_q + 3) <= (AW+2)'(V - 1);   // (a+1): (a+2, a+3) exists
  assign last_o    = !pair_left && !im_left;

  assign im_idx_o  = a_q[AW-1:0];
  assign pfp_idx_o = b_q[AW-1:0];
  assign nfp_idx_o = AW'(b_q + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q <= '0;
      b_q <= (AW+2)'(1);
    end else if (restart_i || (advance_i && last_o)) begin
      a_q <= '0;
      b_q <= (AW+2)'(1);
    end else if (advance_i) begin
      if (pair_left) begin
        b_q <= b_q + 2;
      end else begin
        a_q <= a_q + 1;
        b_q <= a_q + 2;
      end
    end
  end

  initial begin
    assert (V >= 3) else $error("pair_scheduler: a bank needs at least 3 vectors");
  end

endmodule
