// tb_scatter_sb: self-checking test of both Scatter Switch Box variants.
//
// Grid 4 layers x 5 wires (20 nodes, 73 edges, one padding slot), reuse 2. For
// every graph the expected edge words are computed from a reference graph that
// numbers edges by walking wires and edge rules: the first variant must deliver
// static x, y, delta-r, delta-phi, the ADC of both ends and the saturated TDC
// difference, live only when both wires are hit; the second variant must pair
// the two end-node words with the side-stream word of the edge. Phase 1 uses
// random input gaps and output back-pressure; phase 2 runs graphs back to back
// and checks one graph every 2 clocks and a latency of 2 clocks from the last
// input beat to the first output beat.
module tb_scatter_sb;
  import gnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NL = 4, NW = 5, RU = 2;
  localparam int NN = NL * NW;
  localparam int NE = 73;
  localparam int NLN = 10, ELN = 37;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // first variant
  logic a_nv, a_nr, a_nl, a_mv, a_mr, a_ml;
  hit_t [NLN-1:0] a_nd;
  logic [ELN-1:0][R1_IN-1:0][3:0] a_md;
  logic [ELN-1:0] a_mm;
  // second variant
  logic b_nv, b_nr, b_nl, b_ev, b_er, b_el, b_mv, b_mr, b_ml;
  logic [NLN-1:0][EMB*4-1:0] b_nd;
  logic [ELN-1:0][EMB*4-1:0] b_ed;
  logic [ELN-1:0] b_em, b_mm;
  logic [ELN-1:0][R2_IN-1:0][3:0] b_md;

  scatter_sb #(.N_LAYERS(NL), .N_WIRES(NW), .REUSE(RU), .FIRST(1'b1)) dut_a (
    .clk, .rst_n,
    .s_n_valid(a_nv), .s_n_ready(a_nr), .s_n_data(a_nd), .s_n_last(a_nl),
    .s_e_valid(1'b0), .s_e_ready(), .s_e_data('0), .s_e_mask('0), .s_e_last(1'b0),
    .m_valid(a_mv), .m_ready(a_mr), .m_data(a_md), .m_mask(a_mm), .m_last(a_ml));

  scatter_sb #(.N_LAYERS(NL), .N_WIRES(NW), .REUSE(RU), .FIRST(1'b0)) dut_b (
    .clk, .rst_n,
    .s_n_valid(b_nv), .s_n_ready(b_nr), .s_n_data(b_nd), .s_n_last(b_nl),
    .s_e_valid(b_ev), .s_e_ready(b_er), .s_e_data(b_ed), .s_e_mask(b_em), .s_e_last(b_el),
    .m_valid(b_mv), .m_ready(b_mr), .m_data(b_md), .m_mask(b_mm), .m_last(b_ml));

  graph g;
  typedef struct { int v[NE][R2_IN]; bit live[NE]; } exp_t;
  exp_t qa[$], qb[$];
  int ga_in = 0, gb_in = 0, ga_out = 0, gb_out = 0;
  bit full_rate = 0;
  int cyc = 0, a_last_in = -1, a_first_out = -1, a_out_beats = 0, a_span_start = -1,
      a_span_end = -1;
  int stalls_a = 0, stalls_b = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one graph of hit records for variant A, with its expected edges
  task automatic drive_a(bit gaps);
    int hit[], adc[], tdc[];
    exp_t e;
    hit = new[NN]; adc = new[NN]; tdc = new[NN];
    foreach (hit[n]) begin
      hit[n] = ($urandom_range(2, 0) != 0); adc[n] = rnd(-8, 7); tdc[n] = rnd(-8, 7);
    end
    for (int k = 0; k < g.ne; k++) begin
      int s, d;
      s = g.src[k]; d = g.dst[k];
      e.v[k][0] = g.xq(s); e.v[k][1] = g.yq(s); e.v[k][2] = adc[s];
      e.v[k][3] = g.xq(d); e.v[k][4] = g.yq(d); e.v[k][5] = adc[d];
      e.v[k][6] = 3 * DL[g.slot[k]]; e.v[k][7] = 3 * DW[g.slot[k]];
      e.v[k][8] = clamp(tdc[d] - tdc[s], -8, 7);
      e.live[k] = hit[s] && hit[d];
    end
    qa.push_back(e);
    for (int b = 0; b < RU; b++) begin
      @(negedge clk);
      while (gaps && $urandom_range(2, 0) == 0) @(negedge clk);
      for (int l = 0; l < NLN; l++) begin
        int n;
        n = b * NLN + l;
        a_nd[l] = (n < NN) ? {1'b1 & hit[n][0], 4'(adc[n]), 4'(tdc[n])} : '0;
      end
      a_nv = 1'b1; a_nl = (b == RU - 1);
      @(posedge clk);
      while (!a_nr) @(posedge clk);
      #1 a_nv = 1'b0;
    end
    ga_in++;
  endtask

  task automatic drive_b(bit gaps);
    int emb[][], side[][], sm[];
    exp_t e;
    emb = new[NN]; side = new[NE]; sm = new[NE];
    foreach (emb[n]) begin emb[n] = new[EMB]; foreach (emb[n][i]) emb[n][i] = rnd(-8, 7); end
    foreach (side[k]) begin
      side[k] = new[EMB]; foreach (side[k][i]) side[k][i] = rnd(-8, 7);
      sm[k] = $urandom_range(1, 0);
    end
    for (int k = 0; k < g.ne; k++) begin
      for (int i = 0; i < EMB; i++) begin
        e.v[k][i] = emb[g.src[k]][i];
        e.v[k][EMB + i] = emb[g.dst[k]][i];
        e.v[k][2 * EMB + i] = side[k][i];
      end
      e.live[k] = sm[k];
    end
    qb.push_back(e);
    fork
      for (int b = 0; b < RU; b++) begin
        @(negedge clk);
        while (gaps && $urandom_range(2, 0) == 0) @(negedge clk);
        for (int l = 0; l < NLN; l++)
          for (int i = 0; i < EMB; i++)
            b_nd[l][i*4 +: 4] = (b * NLN + l < NN) ? 4'(emb[b * NLN + l][i]) : 4'd0;
        b_nv = 1'b1; b_nl = (b == RU - 1);
        @(posedge clk);
        while (!b_nr) @(posedge clk);
        #1 b_nv = 1'b0;
      end
      for (int b = 0; b < RU; b++) begin
        @(negedge clk);
        while (gaps && $urandom_range(2, 0) == 0) @(negedge clk);
        for (int l = 0; l < ELN; l++) begin
          int k;
          k = b * ELN + l;
          for (int i = 0; i < EMB; i++) b_ed[l][i*4 +: 4] = (k < NE) ? 4'(side[k][i]) : 4'd0;
          b_em[l] = (k < NE) ? sm[k][0] : 1'b0;
        end
        b_ev = 1'b1; b_el = (b == RU - 1);
        @(posedge clk);
        while (!b_er) @(posedge clk);
        #1 b_ev = 1'b0;
      end
    join
    gb_in++;
  endtask

  initial begin
    g = new(NL, NW);
    if (g.ne != NE) $display("reference edge count %0d", g.ne);
    a_nv = 0; b_nv = 0; b_ev = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      repeat (60) drive_a(1);
      repeat (60) drive_b(1);
    join
    wait (ga_out == ga_in && gb_out == gb_in);
    @(negedge clk);
    full_rate = 1;
    fork
      repeat (20) drive_a(0);
      repeat (20) drive_b(0);
    join
    wait (ga_out == ga_in && gb_out == gb_in);
    repeat (3) @(posedge clk);
    checks++;
    if (a_first_out - a_last_in != 2) begin
      failures++; $display("latency %0d, expected 2", a_first_out - a_last_in);
    end
    checks++;
    // 20 graphs back to back: 40 output beats in 40 consecutive clocks
    if (a_span_end - a_span_start != 20 * RU - 1) begin
      failures++; $display("20 graphs took %0d clocks", a_span_end - a_span_start + 1);
    end
    checks++;
    if (stalls_a == 0 || stalls_b == 0) begin failures++; $display("no back-pressure seen"); end
    $display("graphs A %0d B %0d, stalls %0d %0d", ga_out, gb_out, stalls_a, stalls_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    a_mr = full_rate ? 1'b1 : ($urandom_range(2, 0) != 0);
    b_mr = full_rate ? 1'b1 : ($urandom_range(2, 0) != 0);
  end

  int a_beat = 0, b_beat = 0;
  always @(posedge clk) begin
    if (full_rate && a_nv && a_nr && a_nl && a_last_in < 0) a_last_in = cyc;
    if (rst_n && a_mv && !a_mr) stalls_a++;
    if (rst_n && b_mv && !b_mr) stalls_b++;
    if (rst_n && a_mv && a_mr) begin
      if (full_rate) begin
        if (a_first_out < 0) a_first_out = cyc;
        if (a_span_start < 0) a_span_start = cyc;
        a_span_end = cyc;
      end
      for (int l = 0; l < ELN; l++) begin
        int k;
        k = a_beat * ELN + l;
        checks++;
        if (k >= NE) begin
          if (a_mm[l]) failures++;
        end else begin
          bit bad;
          bad = (a_mm[l] != qa[0].live[k]);
          for (int i = 0; i < R1_IN; i++) if ($signed(a_md[l][i]) != qa[0].v[k][i]) bad = 1;
          if (bad) begin
            failures++;
            if (failures < 10) $display("A edge %0d wrong", k);
          end
        end
      end
      checks++;
      if (a_ml != (a_beat == RU - 1)) failures++;
      a_beat++;
      if (a_beat == RU) begin a_beat = 0; void'(qa.pop_front()); ga_out++; end
    end
    if (rst_n && b_mv && b_mr) begin
      for (int l = 0; l < ELN; l++) begin
        int k;
        k = b_beat * ELN + l;
        checks++;
        if (k >= NE) begin
          if (b_mm[l]) failures++;
        end else begin
          bit bad;
          bad = (b_mm[l] != qb[0].live[k]);
          for (int i = 0; i < R2_IN; i++) if ($signed(b_md[l][i]) != qb[0].v[k][i]) bad = 1;
          if (bad) begin
            failures++;
            if (failures < 10) $display("B edge %0d wrong", k);
          end
        end
      end
      checks++;
      if (b_ml != (b_beat == RU - 1)) failures++;
      b_beat++;
      if (b_beat == RU) begin b_beat = 0; void'(qb.pop_front()); gb_out++; end
    end
    cyc++;
  end
endmodule
