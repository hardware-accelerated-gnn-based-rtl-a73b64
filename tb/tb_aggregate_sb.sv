// tb_aggregate_sb: self-checking test of both Aggregate Switch Box variants.
//
// Grid 4 layers x 5 wires (20 nodes, 73 edges), reuse 2. Edge values and
// liveness are random; the expected node words are the element-wise maximum
// over the live edges that end at the node (0 when there is none), found by
// scanning the reference edge list. The first variant must also attach x, y and
// ADC of the hit record from its side stream and pass the hit flag as mask; the
// second carries 8-bit scores and marks nodes that had a live incoming edge.
// Phase 1 uses random gaps and back-pressure, phase 2 back-to-back graphs with
// a check of the 2-clock latency and of one graph every 2 clocks.
module tb_aggregate_sb;
  import gnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NL = 4, NW = 5, RU = 2;
  localparam int NN = NL * NW;
  localparam int NE = 73;
  localparam int NLN = 10, ELN = 37;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic a_ev, a_er, a_el, a_nv, a_nr, a_nl, a_mv, a_mr, a_ml;
  logic [ELN-1:0][EMB*4-1:0] a_ed;
  logic [ELN-1:0] a_em;
  hit_t [NLN-1:0] a_nd;
  logic [NLN-1:0][O_IN*4-1:0] a_md;
  logic [NLN-1:0] a_mm;

  logic b_ev, b_er, b_el, b_mv, b_mr, b_ml;
  logic [ELN-1:0][7:0] b_ed;
  logic [ELN-1:0] b_em;
  logic [NLN-1:0][7:0] b_md;
  logic [NLN-1:0] b_mm;

  aggregate_sb #(.N_LAYERS(NL), .N_WIRES(NW), .REUSE(RU), .FIRST(1'b1)) dut_a (
    .clk, .rst_n,
    .s_e_valid(a_ev), .s_e_ready(a_er), .s_e_data(a_ed), .s_e_mask(a_em), .s_e_last(a_el),
    .s_n_valid(a_nv), .s_n_ready(a_nr), .s_n_data(a_nd), .s_n_last(a_nl),
    .m_valid(a_mv), .m_ready(a_mr), .m_data(a_md), .m_mask(a_mm), .m_last(a_ml));

  aggregate_sb #(.N_LAYERS(NL), .N_WIRES(NW), .REUSE(RU), .FIRST(1'b0)) dut_b (
    .clk, .rst_n,
    .s_e_valid(b_ev), .s_e_ready(b_er), .s_e_data(b_ed), .s_e_mask(b_em), .s_e_last(b_el),
    .s_n_valid(1'b0), .s_n_ready(), .s_n_data('0), .s_n_last(1'b0),
    .m_valid(b_mv), .m_ready(b_mr), .m_data(b_md), .m_mask(b_mm), .m_last(b_ml));

  graph g;
  typedef struct { int v[NN][O_IN]; bit m[NN]; } exp_t;
  exp_t qa[$], qb[$];
  int ga_in = 0, gb_in = 0, ga_out = 0, gb_out = 0;
  bit full_rate = 0;
  int cyc = 0, b_last_in = -1, b_first_out = -1, b_span_start = -1, b_span_end = -1;
  int stalls_a = 0, stalls_b = 0, empty_nodes = 0, multi_nodes = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive_a(bit gaps);
    int ev[][], em[], hit[], adc[], tdc[], has[], cnt[];
    exp_t e;
    ev = new[NE]; em = new[NE]; hit = new[NN]; adc = new[NN]; tdc = new[NN];
    has = new[NN]; cnt = new[NN];
    foreach (ev[k]) begin
      ev[k] = new[EMB]; foreach (ev[k][i]) ev[k][i] = rnd(-8, 7);
      em[k] = ($urandom_range(3, 0) != 0);
    end
    foreach (hit[n]) begin
      hit[n] = $urandom_range(1, 0); adc[n] = rnd(-8, 7); tdc[n] = rnd(-8, 7);
      e.v[n][0] = g.xq(n); e.v[n][1] = g.yq(n); e.v[n][2] = adc[n];
      for (int i = 0; i < EMB; i++) e.v[n][3 + i] = 0;
      e.m[n] = hit[n];
    end
    for (int k = 0; k < NE; k++) if (em[k]) begin
      int d;
      d = g.dst[k];
      for (int i = 0; i < EMB; i++)
        if (!has[d] || ev[k][i] > e.v[d][3 + i]) e.v[d][3 + i] = ev[k][i];
      has[d] = 1; cnt[d]++;
    end
    foreach (has[n]) begin
      if (!has[n]) empty_nodes++;
      if (cnt[n] > 1) multi_nodes++;
    end
    qa.push_back(e);
    fork
      for (int b = 0; b < RU; b++) begin
        @(negedge clk);
        while (gaps && $urandom_range(2, 0) == 0) @(negedge clk);
        for (int l = 0; l < ELN; l++) begin
          int k;
          k = b * ELN + l;
          for (int i = 0; i < EMB; i++) a_ed[l][i*4 +: 4] = (k < NE) ? 4'(ev[k][i]) : 4'd0;
          a_em[l] = (k < NE) ? em[k][0] : 1'b0;
        end
        a_ev = 1'b1; a_el = (b == RU - 1);
        @(posedge clk);
        while (!a_er) @(posedge clk);
        #1 a_ev = 1'b0;
      end
      for (int b = 0; b < RU; b++) begin
        @(negedge clk);
        while (gaps && $urandom_range(2, 0) == 0) @(negedge clk);
        for (int l = 0; l < NLN; l++) begin
          int n;
          n = b * NLN + l;
          a_nd[l] = (n < NN) ? {hit[n][0], 4'(adc[n]), 4'(tdc[n])} : '0;
        end
        a_nv = 1'b1; a_nl = (b == RU - 1);
        @(posedge clk);
        while (!a_nr) @(posedge clk);
        #1 a_nv = 1'b0;
      end
    join
    ga_in++;
  endtask

  task automatic drive_b(bit gaps);
    int ev[], em[], has[];
    exp_t e;
    ev = new[NE]; em = new[NE]; has = new[NN];
    foreach (ev[k]) begin ev[k] = rnd(-128, 127); em[k] = $urandom_range(1, 0); end
    foreach (has[n]) begin e.v[n][0] = 0; e.m[n] = 0; end
    for (int k = 0; k < NE; k++) if (em[k]) begin
      int d;
      d = g.dst[k];
      if (!has[d] || ev[k] > e.v[d][0]) e.v[d][0] = ev[k];
      has[d] = 1; e.m[d] = 1;
    end
    qb.push_back(e);
    for (int b = 0; b < RU; b++) begin
      @(negedge clk);
      while (gaps && $urandom_range(2, 0) == 0) @(negedge clk);
      for (int l = 0; l < ELN; l++) begin
        int k;
        k = b * ELN + l;
        b_ed[l] = (k < NE) ? 8'(ev[k]) : 8'd0;
        b_em[l] = (k < NE) ? em[k][0] : 1'b0;
      end
      b_ev = 1'b1; b_el = (b == RU - 1);
      @(posedge clk);
      while (!b_er) @(posedge clk);
      #1 b_ev = 1'b0;
    end
    gb_in++;
  endtask

  initial begin
    g = new(NL, NW);
    a_ev = 0; a_nv = 0; b_ev = 0;
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
    if (b_first_out - b_last_in != 2) begin
      failures++; $display("latency %0d, expected 2", b_first_out - b_last_in);
    end
    checks++;
    if (b_span_end - b_span_start != 20 * RU - 1) begin
      failures++; $display("20 graphs took %0d clocks", b_span_end - b_span_start + 1);
    end
    checks++;
    if (stalls_a == 0 || stalls_b == 0 || empty_nodes == 0 || multi_nodes == 0) begin
      failures++; $display("a case was not covered");
    end
    $display("graphs %0d %0d stalls %0d %0d empty %0d multi %0d", ga_out, gb_out,
             stalls_a, stalls_b, empty_nodes, multi_nodes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    a_mr = full_rate ? 1'b1 : ($urandom_range(2, 0) != 0);
    b_mr = full_rate ? 1'b1 : ($urandom_range(2, 0) != 0);
  end

  int a_beat = 0, b_beat = 0;
  always @(posedge clk) begin
    if (full_rate && b_ev && b_er && b_el && b_last_in < 0) b_last_in = cyc;
    if (rst_n && a_mv && !a_mr) stalls_a++;
    if (rst_n && b_mv && !b_mr) stalls_b++;
    if (rst_n && a_mv && a_mr) begin
      for (int l = 0; l < NLN; l++) begin
        int n;
        n = a_beat * NLN + l;
        checks++;
        if (n >= NN) begin
          if (a_mm[l]) failures++;
        end else begin
          bit bad;
          bad = (a_mm[l] != qa[0].m[n]);
          for (int i = 0; i < O_IN; i++) if ($signed(a_md[l][i*4 +: 4]) != qa[0].v[n][i]) bad = 1;
          if (bad) begin failures++; if (failures < 10) $display("A node %0d wrong", n); end
        end
      end
      checks++;
      if (a_ml != (a_beat == RU - 1)) failures++;
      a_beat++;
      if (a_beat == RU) begin a_beat = 0; void'(qa.pop_front()); ga_out++; end
    end
    if (rst_n && b_mv && b_mr) begin
      if (full_rate) begin
        if (b_first_out < 0) b_first_out = cyc;
        if (b_span_start < 0) b_span_start = cyc;
        b_span_end = cyc;
      end
      for (int l = 0; l < NLN; l++) begin
        int n;
        n = b_beat * NLN + l;
        checks++;
        if (n >= NN) begin
          if (b_mm[l]) failures++;
        end else if (b_mm[l] != qb[0].m[n] || $signed(b_md[l]) != qb[0].v[n][0]) begin
          failures++;
          if (failures < 10) $display("B node %0d got %0d exp %0d", n, $signed(b_md[l]), qb[0].v[n][0]);
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
