// hds_mapper - "map into hyperdimensional space": supplies, for every incoming
// feature channel, its item-memory vector iM and the feature-projection vector
// FP selected by the sign of the feature (PFP if the feature is > 0, NFP if it
// is <= 0). Nothing is stored per channel: all vectors come from one seed.
//
// Two mapping modes (hdc_pkg::map_mode_e), both from the paper:
//  * MAP_RULE90 - the first 2*M rule-90 steps from the seed are kept in the
//    vector bank as PFP/NFP of modalities 0..M-1 (word 2m = PFP, 2m+1 = NFP).
//    Each channel's iM is one further rule-90 step of the most recently
//    generated vector; at the first channel of a sample the chain restarts
//    from the last stored FP, so channel c always gets the same iM vector.
//    One vector request per channel.
//  * MAP_HYBRID - the bank of V words is burst-filled with V consecutive
//    rule-90 steps; pair_scheduler then hands out TFC(V) channel sets
//    {iM, PFP, NFP} of bank words (Fig. 5 order). When the bank is used up the
//    next channel waits while V more steps refill it from the last vector
//    generated. At the first channel of a sample the burst starts from the
//    seed, so the channel sets repeat from sample to sample.
// The seed is kept in its own register (loaded by init_i); the bank is
// (re)generated on demand: a first channel in rule-90 mode whose FP pairs are
// not valid (after init, or after hybrid bursts overwrote them) waits while
// the 2*M FP vectors are generated. Generation runs at one rule-90 step per
// cycle; each generation run (2*M steps, or a V-step burst) stalls the channel
// stream for its steps plus one decision cycle.
//
// Interface: ch_* is a valid/ready channel stream. ch_first_i marks channel 0
// of a sample, ch_mod_i its modality, ch_pos_i the feature sign test, ch_tag_i
// is carried to the output unchanged. The mode is sampled with the first
// channel of a sample. Outputs are registered: out_valid_o pulses one cycle
// after a channel is accepted, with no back-pressure. gen_count_o counts
// rule-90 steps (vector requests) since reset.
// The paper gives the schemes; the handshake, the stall-on-demand burst
// timing, the separate seed register and the FP word layout are this design's.
module hds_mapper
  import hdc_pkg::*;
#(
  parameter int unsigned D     = HV_DIM_DEFAULT,
  parameter int unsigned M     = N_MOD_DEFAULT,
  parameter int unsigned V     = 2 * N_MOD_DEFAULT + 1,
  parameter int unsigned TAGW  = 2,
  localparam int unsigned AW   = (V > 1) ? $clog2(V) : 1,
  localparam int unsigned MW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  map_mode_e       mode_i,
  input  logic [D-1:0]    seed_i,
  input  logic            init_i,
  input  logic            ch_valid_i,
  output logic            ch_ready_o,
  input  logic            ch_first_i,
  input  logic            ch_pos_i,
  input  logic [MW-1:0]   ch_mod_i,
  input  logic [TAGW-1:0] ch_tag_i,
  output logic            out_valid_o,
  output logic [D-1:0]    im_o,
  output logic [D-1:0]    fp_o,
  output logic [TAGW-1:0] out_tag_o,
  output logic            gen_busy_o,
  output logic [31:0]     gen_count_o
);

  typedef enum logic [1:0] {ST_IDLE, ST_RUN, ST_FPGEN, ST_BURST} state_e;

  state_e       state_q;
  map_mode_e    mode_q, cur_mode;
  logic [D-1:0] seed_q;
  logic         fp_valid_q, need_burst_q, burst_ok_q;
  logic [AW:0]  k_q;
  logic [31:0]  gen_cnt_q;

  // CA and bank
  logic         ca_load, ca_step;
  logic [D-1:0] ca_load_val, ca_state, ca_next;
  logic         bank_we;
  logic [AW-1:0] bank_waddr, raddr_a, raddr_b;
  logic [D-1:0] bank_a, bank_b, restart_next;
  logic [AW-1:0] s_im, s_pfp, s_nfp;
  logic         s_last, s_restart, s_advance;

  logic hyb, go_fpgen, go_burst, accept;

  ca_rule90 #(.D(D)) u_ca (
    .clk, .rst_n, .load_i(ca_load), .load_val_i(ca_load_val), .step_i(ca_step),
    .state_o(ca_state), .next_o(ca_next)
  );

  vector_bank #(.D(D), .V(V)) u_bank (
    .clk, .we_i(bank_we), .waddr_i(bank_waddr), .wdata_i(ca_next),
    .raddr_a_i(raddr_a), .rdata_a_o(bank_a), .raddr_b_i(raddr_b), .rdata_b_o(bank_b)
  );

  pair_scheduler #(.V(V)) u_sched (
    .clk, .rst_n, .restart_i(s_restart), .advance_i(s_advance),
    .im_idx_o(s_im), .pfp_idx_o(s_pfp), .nfp_idx_o(s_nfp), .last_o(s_last)
  );

  assign cur_mode = ch_first_i ? mode_i : mode_q;
  assign hyb      = (cur_mode == MAP_HYBRID);

  assign raddr_a = hyb ? s_im : AW'(2 * M - 1);
  assign raddr_b = hyb ? (ch_pos_i ? s_pfp : s_nfp)
                       : AW'({ch_mod_i, 1'b0} + {{(AW-1){1'b0}}, !ch_pos_i});

  // rule-90 image of the restart vector (last stored FP)
  assign restart_next = {bank_a[0], bank_a[D-1:1]} ^ {bank_a[D-2:0], bank_a[D-1]};

  always_comb begin
    go_fpgen = 1'b0;
    go_burst = 1'b0;
    accept   = 1'b0;
    if (state_q == ST_RUN && ch_valid_i && !init_i) begin
      if (!hyb && !fp_valid_q)                                       go_fpgen = 1'b1;
      else if (hyb && (ch_first_i ? !burst_ok_q : need_burst_q))     go_burst = 1'b1;
      else                                                           accept   = 1'b1;
    end
  end

  assign ch_ready_o = accept;
  assign gen_busy_o = (state_q == ST_FPGEN) || (state_q == ST_BURST);

  always_comb begin
    ca_load     = 1'b0;
    ca_load_val = seed_q;
    ca_step     = 1'b0;
    bank_we     = 1'b0;
    bank_waddr  = k_q[AW-1:0];
    s_restart   = 1'b0;
    s_advance   = 1'b0;
    unique case (state_q)
      ST_RUN: begin
        if (go_fpgen || (go_burst && ch_first_i)) begin
          ca_load = 1'b1;                    // generation starts from the seed
        end else if (accept && !hyb) begin
          ca_load     = 1'b1;                // next iM becomes the new CA state
          ca_load_val = ch_first_i ? restart_next : ca_next;
        end
        if (accept && hyb) s_advance = 1'b1;
      end
      ST_FPGEN, ST_BURST: begin
        ca_step = 1'b1;
        bank_we = 1'b1;
        if (state_q == ST_BURST && k_q == (AW+1)'(V - 1)) s_restart = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= ST_IDLE;
      mode_q       <= MAP_RULE90;
      seed_q       <= '0;
      fp_valid_q   <= 1'b0;
      need_burst_q <= 1'b0;
      burst_ok_q   <= 1'b0;
      k_q          <= '0;
      gen_cnt_q    <= '0;
      out_valid_o  <= 1'b0;
      im_o         <= '0;
      fp_o         <= '0;
      out_tag_o    <= '0;
    end else begin
      out_valid_o <= accept;
      if (init_i) begin
        seed_q       <= seed_i;
        fp_valid_q   <= 1'b0;
        need_burst_q <= 1'b0;
        burst_ok_q   <= 1'b0;
        state_q      <= ST_RUN;
      end else begin
        unique case (state_q)
          ST_RUN: begin
            if (go_fpgen) begin
              state_q <= ST_FPGEN;
              k_q     <= '0;
            end else if (go_burst) begin
              state_q    <= ST_BURST;
              k_q        <= '0;
              fp_valid_q <= 1'b0;
            end else if (accept) begin
              if (ch_first_i) mode_q <= mode_i;
              if (hyb) begin
                im_o         <= bank_a;
                burst_ok_q   <= 1'b0;
                if (s_last) need_burst_q <= 1'b1;
              end else begin
                im_o      <= ch_first_i ? restart_next : ca_next;
                gen_cnt_q <= gen_cnt_q + 1;
              end
              fp_o      <= bank_b;
              out_tag_o <= ch_tag_i;
            end
          end
          ST_FPGEN: begin
            gen_cnt_q <= gen_cnt_q + 1;
            k_q       <= k_q + 1;
            if (k_q == (AW+1)'(2 * M - 1)) begin
              state_q    <= ST_RUN;
              fp_valid_q <= 1'b1;
            end
          end
          ST_BURST: begin
            gen_cnt_q <= gen_cnt_q + 1;
            k_q       <= k_q + 1;
            if (k_q == (AW+1)'(V - 1)) begin
              state_q      <= ST_RUN;
              need_burst_q <= 1'b0;
              burst_ok_q   <= 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  assign gen_count_o = gen_cnt_q;

  initial begin
    assert (V >= 2 * M) else $error("hds_mapper: the bank must hold 2*M FP vectors");
    assert (V >= 3)     else $error("hds_mapper: the bank must hold at least 3 vectors");
  end

  // a stalled request must stay valid
  a_valid_held: assert property (@(posedge clk) disable iff (!rst_n || init_i)
                                 ch_valid_i && !ch_ready_o |=> ch_valid_i);

endmodule
