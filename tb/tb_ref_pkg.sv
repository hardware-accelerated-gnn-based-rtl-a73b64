// tb_ref_pkg: reference model of the hit-filter network for the testbenches.
//
// Written from the specification, not from the RTL: the static graph is built by
// walking every wire and every edge rule and numbering the edges as they are
// found; the MLPs are evaluated with plain integer arithmetic. The class
// gnn_model holds one set of weights, converts it to the RTL weight structs,
// and computes for one event every intermediate value and the final score and
// keep flag of each wire. It also counts how often a saturation or an empty
// aggregation happened, so that testbenches can show those cases were covered.
package tb_ref_pkg;
  import gnn_pkg::*;

  // edge rules: (delta-layer, delta-wire) per slot
  localparam int DL [6] = '{0, 0, 1, 2, 2, 2};
  localparam int DW [6] = '{-1, 1, 0, -1, 0, 1};

  function automatic int clamp(input int v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom_range(hi - lo, 0));
  endfunction

  // Static graph of an nl x nw grid.
  class graph;
    int nl, nw, nn, ne;
    int src[$], dst[$], slot[$];
    function new(int nl_, int nw_);
      nl = nl_; nw = nw_; nn = nl * nw;
      for (int l = 0; l < nl; l++)
        for (int w = 0; w < nw; w++)
          for (int k = 0; k < 6; k++) begin
            int l2, w2;
            l2 = l + DL[k]; w2 = w + DW[k];
            if (l2 < nl && w2 >= 0 && w2 < nw) begin
              src.push_back(l * nw + w);
              dst.push_back(l2 * nw + w2);
              slot.push_back(k);
            end
          end
      ne = src.size();
    endfunction
    function int xq(int n);  return ((2 * (n / nw) - (nl - 1)) * 7) / (nl - 1); endfunction
    function int yq(int n);  return ((2 * (n % nw) - (nw - 1)) * 7) / (nw - 1); endfunction
  endclass

  class mlp;
    int nin, nhid, nout, obits, hs, os;
    int w1[], b1[], w2[], b2[];
    int sat_hid, sat_out;
    function new(int nin_, int nhid_, int nout_, int obits_, int hs_ = 3, int os_ = 3);
      nin = nin_; nhid = nhid_; nout = nout_; obits = obits_; hs = hs_; os = os_;
      w1 = new[nhid * nin]; b1 = new[nhid]; w2 = new[nout * nhid]; b2 = new[nout];
    endfunction
    // random weights, about half of them pruned to zero
    function void randomise(int bias_range);
      foreach (w1[i]) w1[i] = ($urandom_range(1, 0) == 0) ? 0 : rnd(-8, 7);
      foreach (w2[i]) w2[i] = ($urandom_range(1, 0) == 0) ? 0 : rnd(-8, 7);
      foreach (b1[i]) b1[i] = rnd(-bias_range, bias_range);
      foreach (b2[i]) b2[i] = rnd(-bias_range, bias_range);
    endfunction
    function void eval(input int x[], output int y[]);
      int h[];
      h = new[nhid]; y = new[nout];
      for (int j = 0; j < nhid; j++) begin
        int acc;
        acc = b1[j];
        for (int i = 0; i < nin; i++) acc += w1[j * nin + i] * x[i];
        acc = acc >>> hs;
        if (acc < 0 || acc > 15) sat_hid++;
        h[j] = clamp(acc, 0, 15);
      end
      for (int j = 0; j < nout; j++) begin
        int acc, lo, hi;
        acc = b2[j];
        for (int i = 0; i < nhid; i++) acc += w2[j * nhid + i] * h[i];
        acc = acc >>> os;
        lo = -(1 << (obits - 1)); hi = (1 << (obits - 1)) - 1;
        if (acc < lo || acc > hi) sat_out++;
        y[j] = clamp(acc, lo, hi);
      end
    endfunction
  endclass

  class gnn_model;
    mlp r1, o, r2;
    int thr;
    // per event results
    int score[], keep[], r1out[][], oout[][], r2out[];
    int live_edges, dead_edges, empty_nodes;
    function new();
      r1 = new(R1_IN, R1_HID, EMB, Q_BITS);
      o  = new(O_IN, O_HID, EMB, Q_BITS);
      r2 = new(R2_IN, R2_HID, 1, SCORE_BITS);
    endfunction
    function void randomise(int bias_range);
      r1.randomise(bias_range); o.randomise(bias_range); r2.randomise(bias_range);
    endfunction
    function r1_weights_t r1_struct();
      r1_weights_t s;
      for (int j = 0; j < R1_HID; j++) begin
        for (int i = 0; i < R1_IN; i++) s.w1[j][i] = 4'(r1.w1[j * R1_IN + i]);
        s.b1[j] = 16'(r1.b1[j]);
      end
      for (int j = 0; j < EMB; j++) begin
        for (int i = 0; i < R1_HID; i++) s.w2[j][i] = 4'(r1.w2[j * R1_HID + i]);
        s.b2[j] = 16'(r1.b2[j]);
      end
      return s;
    endfunction
    function o_weights_t o_struct();
      o_weights_t s;
      for (int j = 0; j < O_HID; j++) begin
        for (int i = 0; i < O_IN; i++) s.w1[j][i] = 4'(o.w1[j * O_IN + i]);
        s.b1[j] = 16'(o.b1[j]);
      end
      for (int j = 0; j < EMB; j++) begin
        for (int i = 0; i < O_HID; i++) s.w2[j][i] = 4'(o.w2[j * O_HID + i]);
        s.b2[j] = 16'(o.b2[j]);
      end
      return s;
    endfunction
    function r2_weights_t r2_struct();
      r2_weights_t s;
      for (int j = 0; j < R2_HID; j++) begin
        for (int i = 0; i < R2_IN; i++) s.w1[j][i] = 4'(r2.w1[j * R2_IN + i]);
        s.b1[j] = 16'(r2.b1[j]);
      end
      for (int i = 0; i < R2_HID; i++) s.w2[0][i] = 4'(r2.w2[i]);
      s.b2[0] = 16'(r2.b2[0]);
      return s;
    endfunction

    // Run one event: hit, adc, tdc per wire (adc, tdc as signed 4-bit ints).
    function void run(graph g, int hit[], int adc[], int tdc[]);
      int agg1[][], has1[], x[], y[];
      score = new[g.nn]; keep = new[g.nn];
      r1out = new[g.ne]; oout = new[g.nn]; r2out = new[g.ne];
      agg1 = new[g.nn]; has1 = new[g.nn];
      foreach (agg1[n]) begin agg1[n] = new[EMB]; has1[n] = 0; end
      // R1 on every edge, max onto destination
      for (int e = 0; e < g.ne; e++) begin
        int s, d, live;
        s = g.src[e]; d = g.dst[e];
        x = new[R1_IN];
        x[0] = g.xq(s); x[1] = g.yq(s); x[2] = adc[s];
        x[3] = g.xq(d); x[4] = g.yq(d); x[5] = adc[d];
        x[6] = 3 * DL[g.slot[e]]; x[7] = 3 * DW[g.slot[e]];
        x[8] = clamp(tdc[d] - tdc[s], -8, 7);
        r1.eval(x, y);
        r1out[e] = y;
        live = hit[s] && hit[d];
        if (live) begin
          live_edges++;
          for (int i = 0; i < EMB; i++)
            if (!has1[d] || y[i] > agg1[d][i]) agg1[d][i] = y[i];
          has1[d] = 1;
        end else dead_edges++;
      end
      // O on every node
      for (int n = 0; n < g.nn; n++) begin
        if (hit[n] && !has1[n]) empty_nodes++;
        x = new[O_IN];
        x[0] = g.xq(n); x[1] = g.yq(n); x[2] = adc[n];
        for (int i = 0; i < EMB; i++) x[3 + i] = agg1[n][i];
        o.eval(x, y);
        oout[n] = y;
      end
      // R2 on every edge, max onto destination
      foreach (score[n]) score[n] = 0;
      has1 = new[g.nn];
      for (int e = 0; e < g.ne; e++) begin
        int s, d;
        s = g.src[e]; d = g.dst[e];
        x = new[R2_IN];
        for (int i = 0; i < EMB; i++) begin
          x[i] = oout[s][i]; x[EMB + i] = oout[d][i]; x[2 * EMB + i] = r1out[e][i];
        end
        r2.eval(x, y);
        r2out[e] = y[0];
        if (hit[s] && hit[d]) begin
          if (!has1[d] || y[0] > score[d]) score[d] = y[0];
          has1[d] = 1;
        end
      end
      foreach (keep[n]) keep[n] = hit[n] && (score[n] >= thr);
    endfunction
  endclass

endpackage
