// assoc_memory - class hypervector store, trainer and Hamming-distance search.
//
// Training: every encoded vector TE presented with train_i = 1 is bundled into
// the class vector of label_i. Each class keeps one saturating signed counter
// per dimension (+1 for a 1 bit, -1 for a 0 bit); the class vector bit is 1
// while the counter is positive. This is a majority over all training vectors
// of the class, ties giving 0.
// Inference: a vector presented with train_i = 0 is compared with every class
// vector by Hamming distance (XOR, then popcount); the class of least distance
// is the inferred label (the lower class index wins a tie). The popcount is
// taken CHUNK bits per cycle, so a search takes D/CHUNK cycles.
// clear_i empties all classes.
// The paper gives training by bundling and inference by Hamming distance; the
// counter form, counter width ACW and the chunked popcount are this design's.
//
// Interface/timing: in_valid_i may be raised only while in_ready_o is high
// (an assertion checks it). Training updates take one cycle. An inference
// raises out_valid_o for one cycle D/CHUNK cycles after acceptance, with
// label_o and dist_o (distance to every class).
module assoc_memory #(
  parameter int unsigned D     = hdc_pkg::HV_DIM_DEFAULT,
  parameter int unsigned NC    = hdc_pkg::N_CLASS_DEFAULT,
  parameter int unsigned ACW   = 16,
  parameter int unsigned CHUNK = 1000,
  localparam int unsigned LW   = (NC > 1) ? $clog2(NC) : 1,
  localparam int unsigned DW   = $clog2(D + 1),
  localparam int unsigned NCH  = D / CHUNK,
  localparam int unsigned PW   = $clog2(NCH + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear_i,
  input  logic                in_valid_i,
  output logic                in_ready_o,
  input  logic [D-1:0]        hv_i,
  input  logic                train_i,
  input  logic [LW-1:0]       label_i,
  output logic                out_valid_o,
  output logic [LW-1:0]       label_o,
  output logic [NC-1:0][DW-1:0] dist_o,
  output logic [NC-1:0][D-1:0]  class_hv_o
);

  localparam logic signed [ACW-1:0] CMAX = {1'b0, {(ACW-1){1'b1}}};
  localparam logic signed [ACW-1:0] CMIN = {1'b1, {(ACW-1){1'b0}}};

  logic signed [ACW-1:0] acc_q [NC][D];
  logic [NC-1:0][D-1:0]  class_q;
  logic [D-1:0]          query_q;
  logic                  busy_q;
  logic [PW-1:0]         part_q;
  logic [NC-1:0][DW-1:0] dist_q, dist_nx;
  logic [LW-1:0]         best;

  assign in_ready_o = !busy_q;
  assign class_hv_o = class_q;

  // partial Hamming distance of the current CHUNK bits
  always_comb begin
    for (int unsigned c = 0; c < NC; c++) begin
      logic [CHUNK-1:0] diff;
      logic [DW-1:0]    pc;
      diff = query_q[part_q*CHUNK +: CHUNK] ^ class_q[c][part_q*CHUNK +: CHUNK];
      pc   = '0;
      for (int unsigned b = 0; b < CHUNK; b++) pc += DW'(diff[b]);
      dist_nx[c] = dist_q[c] + pc;
    end
  end

  // arg-min over the completed distances
  always_comb begin
    best = '0;
    for (int unsigned c = 1; c < NC; c++)
      if (dist_nx[c] < dist_nx[best]) best = LW'(c);
  end

  // training counters and class vectors
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_q <= '0;
      for (int unsigned c = 0; c < NC; c++)
        for (int unsigned d = 0; d < D; d++) acc_q[c][d] <= '0;
    end else if (clear_i) begin
      class_q <= '0;
      for (int unsigned c = 0; c < NC; c++)
        for (int unsigned d = 0; d < D; d++) acc_q[c][d] <= '0;
    end else if (in_valid_i && in_ready_o && train_i) begin
      for (int unsigned d = 0; d < D; d++) begin
        logic signed [ACW-1:0] a;
        a = acc_q[label_i][d];
        if (hv_i[d]) a = (a == CMAX) ? a : a + 1;
        else         a = (a == CMIN) ? a : a - 1;
        acc_q[label_i][d]   <= a;
        class_q[label_i][d] <= (a > 0);
      end
    end
  end

  // search sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q      <= 1'b0;
      part_q      <= '0;
      dist_q      <= '0;
      query_q     <= '0;
      out_valid_o <= 1'b0;
      label_o     <= '0;
      dist_o      <= '0;
    end else begin
      out_valid_o <= 1'b0;
      if (!busy_q) begin
        if (in_valid_i && !train_i && !clear_i) begin
          busy_q  <= 1'b1;
          part_q  <= '0;
          dist_q  <= '0;
          query_q <= hv_i;
        end
      end else begin
        dist_q <= dist_nx;
        part_q <= part_q + 1;
        if (part_q == PW'(NCH - 1)) begin
          busy_q      <= 1'b0;
          out_valid_o <= 1'b1;
          label_o     <= best;
          dist_o      <= dist_nx;
        end
      end
    end
  end

  initial begin
    assert (D % CHUNK == 0) else $error("assoc_memory: D must be a multiple of CHUNK");
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) in_valid_i |-> in_ready_o);

endmodule
