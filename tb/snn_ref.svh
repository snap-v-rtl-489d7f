// snn_ref.svh -- reference network for the multi-cluster testbenches.
//
// The including module defines NCL (clusters under test) and includes
// lif_ref.svh first. The code here
//  * draws a random network: neuron parameters, per-cluster forwarding
//    entries (source cluster -> 32-row block in the cluster's group memory),
//    random weight rows and output masks;
//  * turns it into the byte stream of data/control packets that configures
//    the hardware (cluster packets for LOAD_NI / LOAD_IF / LOAD_OE and
//    weight-memory packets {dest, len, lo, hi, count, data});
//  * steps the same network in software. A spike packet reaches every
//    cluster (the routers broadcast), and a cluster integrates it only if its
//    forwarding entry for the source cluster is valid. Spikes of step t that
//    pass the output mask are inputs of step t+1.
// Weights stay small so no sum saturates, which keeps the result independent
// of the arrival order.

logic [1:0]     m_dsel [NCL][NPC];
logic [1:0]     m_rsel [NCL][NPC];
weight_t        m_thr  [NCL][NPC];
weight_t        m_v    [NCL][NPC];
bit             m_tv   [NCL][64];
int             m_tb   [NCL][64];
logic [NPC-1:0] m_mask [NCL];
logic [NPC-1:0] m_spk  [NCL];     // spikes of the last modelled step
weight_t        m_w    [int][NPC]; // key: group * 4096 + row
logic [7:0]     cfg_q  [$];
int             m_fires_by_reset [3];

function automatic void q_msg(int dest, logic [7:0] body [$]);
  cfg_q.push_back(8'(dest));
  cfg_q.push_back(8'(body.size()));
  foreach (body[i]) cfg_q.push_back(body[i]);
endfunction

function automatic void q_cluster(int k, int op, int row, logic [7:0] data [$]);
  logic [7:0] b [$];
  b.push_back(8'(op)); b.push_back(8'(row)); b.push_back(8'(data.size()));
  foreach (data[i]) b.push_back(data[i]);
  q_msg(k, b);
endfunction

// nsrc: forwarding entries per cluster; sources are drawn from src_pool.
function automatic void build_network(int nsrc, int src_pool [$], int thr_lo, int thr_hi);
  int next_block [8];
  foreach (next_block[g]) next_block[g] = 0;
  for (int k = 0; k < NCL; k++) begin
    logic [7:0] d [$];
    for (int j = 0; j < NPC; j++) begin
      m_dsel[k][j] = 2'($urandom_range(0, 3));
      m_rsel[k][j] = 2'((j + k) % 3);
      m_thr[k][j]  = weight_t'($urandom_range(thr_lo, thr_hi));
      m_v[k][j]    = '0;
      d.delete();
      d.push_back({4'd0, m_rsel[k][j], m_dsel[k][j]});
      for (int b = 0; b < 4; b++) d.push_back(m_thr[k][j][8*b +: 8]);
      q_cluster(k, OPCODE_LOAD_NI, j, d);
    end
    m_spk[k] = '0;
    foreach (m_tv[k][c]) m_tv[k][c] = 0;
    for (int s = 0; s < nsrc; s++) begin
      int c, g, base;
      c = src_pool[$urandom_range(0, src_pool.size() - 1)];
      if (m_tv[k][c]) continue;
      g = k / CL_PER_GRP;
      base = next_block[g] * 32;
      next_block[g]++;
      m_tv[k][c] = 1; m_tb[k][c] = base;
      d.delete();
      d.push_back(8'(base)); d.push_back({1'b1, 4'd0, 3'(base >> 8)});
      q_cluster(k, OPCODE_LOAD_IF, c, d);
      for (int n = 0; n < 32; n++) begin
        logic [7:0] b [$];
        int nw;
        nw = $urandom_range(0, 32);   // only the first nw neurons get a synapse
        b.push_back(8'(base + n)); b.push_back(8'((base + n) >> 8)); b.push_back(8'(4 * nw));
        for (int j = 0; j < NPC; j++) begin
          weight_t w;
          w = (j < nw && $urandom_range(0, 2) != 0) ? weight_t'(int'($urandom_range(0, 700)) - 200) : '0;
          m_w[g * 4096 + base + n][j] = w;
          if (j < nw) for (int y = 0; y < 4; y++) b.push_back(w[8*y +: 8]);
        end
        q_msg(DEST_WMEM + g, b);
      end
    end
    m_mask[k] = 32'($urandom) | 32'($urandom);
    d.delete();
    for (int b = 0; b < 4; b++) d.push_back(m_mask[k][8*b +: 8]);
    q_cluster(k, OPCODE_LOAD_OE, 0, d);
  end
endfunction

// One timestep: ext holds this step's injected packets (as 11-bit values).
function automatic void model_step(int ext [$]);
  int pk [$];
  pk = ext;
  for (int k = 0; k < NCL; k++)
    for (int j = 0; j < NPC; j++)
      if (m_spk[k][j] && m_mask[k][j]) pk.push_back((k << 5) | j);
  for (int k = 0; k < NCL; k++) begin
    weight_t acc [NPC];
    foreach (acc[j]) acc[j] = '0;
    foreach (pk[p]) begin
      int c, n;
      c = pk[p] >> 5; n = pk[p] & 31;
      if (m_tv[k][c])
        for (int j = 0; j < NPC; j++)
          acc[j] = sat_add(acc[j], m_w[(k / CL_PER_GRP) * 4096 + m_tb[k][c] + n][j]);
    end
    for (int j = 0; j < NPC; j++) begin
      bit f;
      m_v[k][j] = ref_lif(m_v[k][j], acc[j], m_dsel[k][j], m_rsel[k][j], m_thr[k][j], f);
      m_spk[k][j] = f;
      if (f) m_fires_by_reset[m_rsel[k][j]]++;
    end
  end
endfunction
