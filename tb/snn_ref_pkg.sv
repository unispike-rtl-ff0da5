// snn_ref_pkg: testbench-side reference for the UniSpike design.
//
// snn_model builds a random spiking network over a set of active cores,
// compiles it the way the deployment flow would (per core: destination sets,
// the checking-table construction -- sort destinations by
// the size of their neuron set, append the not-yet-queued neurons to the
// execution queue, the last appended or last member becomes the barrier --
// then renumbers neurons in execution order), emits the configuration words
// for every memory, and steps a cycle-free reference of the same arithmetic
// (shift-leak LIF, 16-bit saturating weight sums, spikes of timestep t
// integrated at t+1). It also counts the packets and payload flits an
// address-merged scheme must send and the flits a one-packet-per-spike
// scheme would send, for comparison.
package snn_ref_pkg;
  import unispike_pkg::*;

  localparam int MAXN = 512;

  typedef struct {
    int              core;
    cfg_sel_e        sel;
    int              addr;
    logic [1+COORD_W+MAXN-1:0] data;
  } cfg_word_t;

  typedef struct { int sc; int sn; int dc; int dn; int w; } edge_t;

  class snn_model;
    int C, N, NACT;
    int neur_w, conn_aw, syn_aw;
    int active[$];
    edge_t edges[$];            // physical ids after compile
    int perm[];                 // [c*N + logical] -> physical
    int vth[], leak[], v[], ws_cur[], ws_nxt[];
    bit [MAXN-1:0] nd_mask[int];  // key c*C + d, physical ids
    int dest_order[$];          // keys c*C+d in post-conn order, per core grouped
    cfg_word_t cfg[$];
    // per-step results
    bit fired[];
    int exp_packets, exp_payload, exp_empty, exp_barriers, baseline_flits;
    int n_ct_entries[];

    function new(int num_cores, int n_neurons, int n_active, int conn_depth, int syn_depth);
      C = num_cores; N = n_neurons; NACT = n_active;
      neur_w = $clog2(N); conn_aw = $clog2(conn_depth); syn_aw = $clog2(syn_depth);
      perm = new[C * N]; vth = new[C * N]; leak = new[C * N]; v = new[C * N];
      ws_cur = new[C * N]; ws_nxt = new[C * N]; fired = new[C * N];
      n_ct_entries = new[C];
      foreach (v[i]) begin v[i] = 0; ws_cur[i] = 0; ws_nxt[i] = 0; vth[i] = 65535; leak[i] = 0; end
    endfunction

    // Random network over the active cores: every active neuron reaches 1..3
    // destination cores among the first `window` active cores after its own
    // (wrapping), 1..3 targets each.
    function void build(int cores[$], int window, int max_dest);
      edge_t le[$];
      active = cores;
      foreach (active[k]) begin
        int c;
        c = active[k];
        for (int n = 0; n < NACT; n++) begin
          int nd;
          int used[$];
          vth[c * N + n]  = 40 + $urandom % 80;
          leak[c * N + n] = $urandom % 4;
          v[c * N + n]    = 40 + $urandom % 60;
          nd = 1 + $urandom % max_dest;
          for (int j = 0; j < nd; j++) begin
            int d, nt;
            d = active[(k + ($urandom % window)) % active.size()];
            if (d inside {used}) continue;
            used.push_back(d);
            nt = 2 + $urandom % 4;
            for (int t = 0; t < nt; t++)
              le.push_back('{c, n, d, $urandom % NACT, int'($urandom % 50) - 8});
          end
        end
      end
      compile(le);
    endfunction

    // Excitatory/inhibitory random network in the style of the Brunel and
    // Vogels benchmarks: each active neuron is excitatory with probability
    // 80 % (weight +w_exc) or inhibitory (weight -w_inh), and connects to every
    // active neuron of every active core with probability p_pct percent.
    function void build_ei(int cores[$], int p_pct, int w_exc, int w_inh);
      edge_t le[$];
      active = cores;
      foreach (active[k]) for (int n = 0; n < NACT; n++) begin
        int c, w;
        c = active[k];
        vth[c * N + n]  = 30 + $urandom % 20;
        leak[c * N + n] = 2 + $urandom % 2;
        v[c * N + n]    = $urandom % 60;
        w = (($urandom % 100) < 80) ? w_exc : -w_inh;
        foreach (active[j]) for (int m = 0; m < NACT; m++)
          if (($urandom % 100) < p_pct) le.push_back('{c, n, active[j], m, w});
      end
      compile(le);
    endfunction

    function void compile(edge_t le[$]);
      foreach (active[k]) begin
        int c;
        bit [MAXN-1:0] m [int];
        int keys[$], q[$];
        bit inq [];
        int bar_of_d [int];
        c = active[k];
        foreach (le[i]) if (le[i].sc == c) begin
          if (!m.exists(le[i].dc)) m[le[i].dc] = '0;
          m[le[i].dc][le[i].sn] = 1'b1;
        end
        foreach (m[d]) keys.push_back(d);
        // sort destinations by |N_d| ascending (stable on destination id)
        keys.sort() with ($countones(m[item]) * 4096 + item);
        inq = new[N];
        foreach (keys[j]) begin
          int d, added;
          d = keys[j]; added = 0;
          for (int n = 0; n < N; n++) if (m[d][n] && !inq[n]) begin
            q.push_back(n); inq[n] = 1; added++;
          end
          if (added > 0) bar_of_d[d] = q[q.size() - 1];
          else begin
            int last;
            last = -1;
            foreach (q[i]) if (m[d][q[i]]) last = q[i];
            bar_of_d[d] = last;
          end
        end
        for (int n = 0; n < N; n++) if (!inq[n]) q.push_back(n);
        foreach (q[i]) perm[c * N + q[i]] = i;
        // physical bitmaps and post-connection order: by barrier, then key order
        begin
          int order[$];
          foreach (keys[j]) order.push_back(keys[j]);
          order.sort() with (perm[c * N + bar_of_d[item]] * 4096 + item);
          foreach (order[j]) begin
            bit [MAXN-1:0] pm;
            pm = '0;
            for (int n = 0; n < N; n++) if (m[order[j]][n]) pm[perm[c * N + n]] = 1'b1;
            nd_mask[c * C + order[j]] = pm;
            dest_order.push_back(c * C + order[j]);
          end
          // configuration: checking table and post-connection entries
          begin
            int ct, a;
            ct = 0;
            for (int j = 0; j < order.size(); j++) begin
              int b;
              bit lastd;
              b = perm[c * N + bar_of_d[order[j]]];
              if (j == 0 || perm[c * N + bar_of_d[order[j - 1]]] != b) begin
                cfg.push_back('{c, CFG_CT, ct, ((1 + COORD_W + MAXN)'(1) << (neur_w + conn_aw)) |
                               ((1 + COORD_W + MAXN)'(b) << conn_aw) | (1 + COORD_W + MAXN)'(j)});
                ct++;
              end
              lastd = (j == order.size() - 1) || (perm[c * N + bar_of_d[order[j + 1]]] != b);
              cfg.push_back('{c, CFG_CONN, j, conn_word(lastd, order[j], nd_mask[c * C + order[j]])});
            end
            n_ct_entries[c] = ct;
          end
        end
      end
      // renumber edges and neuron parameters
      begin
        int t_vth[], t_leak[], t_v[];
        t_vth = new[C * N]; t_leak = new[C * N]; t_v = new[C * N];
        foreach (t_vth[i]) begin t_vth[i] = 65535; t_leak[i] = 0; t_v[i] = 0; end
        foreach (active[k]) for (int n = 0; n < N; n++) begin
          int c, p;
          c = active[k]; p = c * N + perm[c * N + n];
          t_vth[p] = vth[c * N + n]; t_leak[p] = leak[c * N + n]; t_v[p] = v[c * N + n];
        end
        vth = t_vth; leak = t_leak; v = t_v;
      end
      foreach (le[i]) edges.push_back('{le[i].sc, perm[le[i].sc * N + le[i].sn],
                                         le[i].dc, perm[le[i].dc * N + le[i].dn], le[i].w});
      emit_receive_cfg();
      foreach (active[k]) for (int n = 0; n < N; n++) begin
        int p;
        neuron_state_t s;
        p = active[k] * N + n;
        s.v = 24'(v[p]); s.vth = 16'(vth[p]); s.leak = 4'(leak[p]); s.rsvd = '0;
        cfg.push_back('{active[k], CFG_NSTATE, n, (1 + COORD_W + MAXN)'(s)});
      end
    endfunction

    function logic [1+COORD_W+MAXN-1:0] conn_word(bit flag, int dst, bit [MAXN-1:0] bm);
      logic [1+COORD_W+MAXN-1:0] w;
      w = '0;
      for (int i = 0; i < N; i++) w[i] = bm[i];
      w = w | ((1 + COORD_W + MAXN)'(dst) << N) | ((1 + COORD_W + MAXN)'(flag) << (N + COORD_W));
      return w;
    endfunction

    // Receive side: per destination core, N axons per connected source core,
    // synapse runs grouped by (source core, source neuron).
    function void emit_receive_cfg();
      foreach (active[k]) begin
        int d, nsrc, sp;
        d = active[k]; nsrc = 0; sp = 0;
        foreach (active[j]) begin
          int s;
          bit any;
          s = active[j]; any = 0;
          foreach (edges[i]) if (edges[i].sc == s && edges[i].dc == d) any = 1;
          if (!any) continue;
          cfg.push_back('{d, CFG_AXBASE, s, (1 + COORD_W + MAXN)'(nsrc * N)});
          for (int n = 0; n < N; n++) begin
            int len, ptr;
            len = 0; ptr = sp;
            foreach (edges[i]) if (edges[i].sc == s && edges[i].sn == n && edges[i].dc == d) begin
              cfg.push_back('{d, CFG_SYN, sp, ((1 + COORD_W + MAXN)'(edges[i].dn) << 8) |
                             (1 + COORD_W + MAXN)'($unsigned(8'(edges[i].w)))});
              sp++; len++;
            end
            if (len > 0)
              cfg.push_back('{d, CFG_AXON, nsrc * N + n,
                             ((1 + COORD_W + MAXN)'(len) << syn_aw) | (1 + COORD_W + MAXN)'(ptr)});
          end
          nsrc++;
        end
      end
    endfunction

    static function int sat16(int x);
      if (x > 32767) return 32767;
      if (x < -32768) return -32768;
      return x;
    endfunction

    // One timestep of the reference.
    function void step();
      exp_packets = 0; exp_payload = 0; exp_empty = 0; exp_barriers = 0; baseline_flits = 0;
      foreach (active[k]) begin
        int c;
        c = active[k];
        exp_barriers += n_ct_entries[c];
        for (int n = 0; n < N; n++) begin
          int p, vn;
          p = c * N + n;
          vn = v[p] + ws_cur[p];
          if (leak[p] != 0) vn = vn - (v[p] >>> leak[p]);
          fired[p] = (vn >= vth[p]);
          if (fired[p]) vn = 0;
          if (vn > 8388607) vn = 8388607;
          if (vn < -8388608) vn = -8388608;
          v[p] = vn;
          ws_cur[p] = 0;
        end
      end
      foreach (dest_order[j]) begin
        int c, cnt;
        c = dest_order[j] / C; cnt = 0;
        for (int n = 0; n < N; n++) if (nd_mask[dest_order[j]][n] && fired[c * N + n]) cnt++;
        if (cnt > 0) begin exp_packets++; exp_payload += cnt; end
        else exp_empty++;
        baseline_flits += 2 * cnt;
      end
      foreach (edges[i]) if (fired[edges[i].sc * N + edges[i].sn])
        ws_nxt[edges[i].dc * N + edges[i].dn] = sat16(ws_nxt[edges[i].dc * N + edges[i].dn] + edges[i].w);
      foreach (ws_cur[i]) begin ws_cur[i] = ws_nxt[i]; ws_nxt[i] = 0; end
    endfunction
  endclass
endpackage
