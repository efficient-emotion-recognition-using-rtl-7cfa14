// hdc_model.svh - reference model of the whole classifier, included inside a
// testbench module that defines D, M, MOD_CH, C (total channels), V, NGRAM,
// NC, ACW, CHUNK, DW and the signals of an hdc_top instance.
//
// The model is written from the equations, not from the RTL:
//   rule90^k(seed) iterates are precomputed bit by bit (cell i <- i-1 ^ i+1);
//   rule-90 mode: FP word w = rule90^(w+1)(seed), channel c: iM = rule90^(2M+c+1)(seed),
//                 FP of modality m = word 2m (feature > 0) or 2m+1;
//   hybrid mode:  channel c uses set (c mod TFC(V)) of bank c / TFC(V), bank b
//                 = rule90^(bV+1 .. bV+V)(seed), sets in the scheme's table order;
//   SE(m) = majority of iM ^ FP over the modality's channels (ties 0);
//   SE    = majority of the SE(m) (ties 0);
//   TE    = SE(j) ^ rho1(SE(j-1)) ^ ... (rho_k: bit i <- bit (i+k) mod D);
//   training: saturating +1/-1 counters per class and dimension, class bit =
//   counter > 0; inference: least Hamming distance, lower class on a tie.

localparam int unsigned TFC_V = hdc_pkg::tfc(V);
localparam int unsigned KMAX  = 2 * M + C + ((C + TFC_V - 1) / TFC_V) * V + 2;

logic [D-1:0] m_it [KMAX + 1];
int           m_set_im [TFC_V], m_set_p [TFC_V], m_set_n [TFC_V];
logic [D-1:0] m_hist [$];
int           m_acc [NC][D];
logic [D-1:0] m_te_q [$];
int           m_pred_q [$];
int           m_dist_q [$];   // NC entries per inference

function automatic void model_seed(input logic [D-1:0] s);
  int k;
  m_it[0] = s;
  for (k = 1; k <= KMAX; k++)
    for (int i = 0; i < D; i++) m_it[k][i] = m_it[k-1][(i + D - 1) % D] ^ m_it[k-1][(i + 1) % D];
  k = 0;
  for (int a = 0; a < V; a++)
    for (int b = a + 1; b + 1 < V; b += 2) begin
      m_set_im[k] = a; m_set_p[k] = b; m_set_n[k] = b + 1; k++;
    end
endfunction

function automatic void model_clear_classes();
  for (int c = 0; c < NC; c++) for (int d = 0; d < D; d++) m_acc[c][d] = 0;
endfunction

function automatic logic [D-1:0] model_class(input int c);
  logic [D-1:0] v;
  for (int d = 0; d < D; d++) v[d] = m_acc[c][d] > 0;
  return v;
endfunction

// encode one sample; feature signs pos[c]; returns whether a TE exists
function automatic void model_sample(input hdc_pkg::map_mode_e md, input bit pos [C],
                                     input bit train, input int label);
  int c, cnt [D], mcnt [D];
  logic [D-1:0] im, fp, se, te;
  c = 0;
  for (int d = 0; d < D; d++) mcnt[d] = 0;
  for (int mo = 0; mo < M; mo++) begin
    for (int d = 0; d < D; d++) cnt[d] = 0;
    for (int ci = 0; ci < MOD_CH[mo]; ci++) begin
      if (md == hdc_pkg::MAP_RULE90) begin
        im = m_it[2 * M + c + 1];
        fp = m_it[2 * mo + (pos[c] ? 0 : 1) + 1];
      end else begin
        int b, s;
        b = c / TFC_V; s = c % TFC_V;
        im = m_it[b * V + m_set_im[s] + 1];
        fp = m_it[b * V + (pos[c] ? m_set_p[s] : m_set_n[s]) + 1];
      end
      for (int d = 0; d < D; d++) cnt[d] += im[d] ^ fp[d];
      c++;
    end
    for (int d = 0; d < D; d++) mcnt[d] += (2 * cnt[d] > MOD_CH[mo]) ? 1 : 0;
  end
  for (int d = 0; d < D; d++) se[d] = (2 * mcnt[d] > M);
  m_hist.push_front(se);
  if (m_hist.size() >= NGRAM) begin
    te = '0;
    for (int k = 0; k < NGRAM; k++)
      for (int i = 0; i < D; i++) te[i] ^= m_hist[k][(i + k) % D];
    void'(m_hist.pop_back());
    m_te_q.push_back(te);
    if (train) begin
      for (int d = 0; d < D; d++)
        if (te[d]) m_acc[label][d] = (m_acc[label][d] ==  (2 ** (ACW - 1)) - 1) ? m_acc[label][d] : m_acc[label][d] + 1;
        else       m_acc[label][d] = (m_acc[label][d] == -(2 ** (ACW - 1)))     ? m_acc[label][d] : m_acc[label][d] - 1;
    end else begin
      int dd [NC];
      int best;
      best = 0;
      for (int k = 0; k < NC; k++) begin
        logic [D-1:0] cv;
        cv = model_class(k);
        dd[k] = 0;
        for (int i = 0; i < D; i++) dd[k] += te[i] ^ cv[i];
        if (dd[k] < dd[best]) best = k;
      end
      m_pred_q.push_back(best);
      for (int k = 0; k < NC; k++) m_dist_q.push_back(dd[k]);
    end
  end
endfunction
