// snn_ref_model.svh: reference model of the spiking classifier, included by
// the end-to-end testbenches of snn_hybrid.
//
// The including module defines N_LAYERS, TOPO (layer sizes) and MAXN (the
// largest layer). The model is fed the input spikes the design's spike
// generator hands to the neural core (pixel index, in order). Each input
// spike is pushed through the layers depth first: layer 1 integrates it in
// all its neurons (ascending order) and every neuron that fires becomes an
// event for layer 2, and so on. A layer's state depends only on the order of
// its own input events, so this gives the same output event order as the
// hardware, which runs the layers concurrently. Output events update the
// per-class counts and the Terminate Delta / Max Terminate decision, which
// freezes the counts.
//
// Weights are a fixed function of (layer, source, target, seed), so the
// design's memories can be loaded with the same numbers.

int m_pot [N_LAYERS][MAXN];
int m_cnt [MAXN];
bit m_decided;
int m_class;
int m_thr [N_LAYERS];
int m_sel, m_delta, m_maxv;
int m_seed;
longint m_layer_events [N_LAYERS];

function automatic int ref_weight(int layer, int src, int dst, int seed);
  int unsigned h;
  h = 32'(layer) * 32'h9E3779B1 ^ 32'(src) * 32'h85EBCA77 ^ 32'(dst) * 32'hC2B2AE3D ^ 32'(seed) * 32'h27D4EB2F;
  h = h ^ (h >> 15);
  h = h * 32'h2C1B3C6D;
  h = h ^ (h >> 12);
  // mostly excitatory, range -48 .. 79
  return int'(h % 128) - 48;
endfunction

function automatic void ref_reset();
  for (int l = 0; l < N_LAYERS; l++) begin
    m_layer_events[l] = 0;
    for (int n = 0; n < MAXN; n++) m_pot[l][n] = 0;
  end
  for (int n = 0; n < MAXN; n++) m_cnt[n] = 0;
  m_decided = 0;
  m_class = 0;
endfunction

function automatic void ref_decide();
  int m1, m2, idx;
  if (m_decided) return;
  m1 = -1; idx = 0;
  for (int i = 0; i < TOPO[N_LAYERS-1]; i++) if (m_cnt[i] > m1) begin m1 = m_cnt[i]; idx = i; end
  m2 = 0;
  for (int i = 0; i < TOPO[N_LAYERS-1]; i++) if (i != idx && m_cnt[i] > m2) m2 = m_cnt[i];
  if ((m_sel == 0) ? (m1 - m2 > m_delta) : (m1 > m_maxv)) begin
    m_decided = 1;
    m_class = idx;
  end
endfunction

// one event from neuron `src` of layer `layer-1` reaches layer `layer`
function automatic void ref_event(int layer, int src);
  int fired [$];
  m_layer_events[layer-1]++;
  if (layer == N_LAYERS) begin
    if (!m_decided) begin
      if (m_cnt[src] < 255) m_cnt[src]++;
      ref_decide();
    end
    return;
  end
  for (int n = 0; n < TOPO[layer]; n++) begin
    int s;
    s = m_pot[layer][n] + ref_weight(layer, src, n, m_seed);
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (s > m_thr[layer-1]) begin
      m_pot[layer][n] = s - m_thr[layer-1];
      fired.push_back(n);
    end else m_pot[layer][n] = s;
  end
  foreach (fired[i]) ref_event(layer + 1, fired[i]);
endfunction

function automatic int ref_leader();
  int m1, idx;
  m1 = -1; idx = 0;
  for (int i = 0; i < TOPO[N_LAYERS-1]; i++) if (m_cnt[i] > m1) begin m1 = m_cnt[i]; idx = i; end
  return idx;
endfunction
