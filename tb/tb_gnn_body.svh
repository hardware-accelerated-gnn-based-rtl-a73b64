// tb_gnn_body.svh: body of the end-to-end hit-filter testbenches.
//
// The including module defines NL, NW, RU (grid and reuse factor of the DUT),
// N_EV1 and N_EV2 (events in the two phases), FIFO depths HIT_D, EDGE_D, OUT_D,
// REQ_FLOW (1: input stall, fork split and a full FIFO must each occur),
// declares the DUT signals below and instantiates the DUT as "dut".
//
// Every event is a random set of hit wires with random 4-bit ADC and TDC; the
// network weights are random with about half of them pruned. The reference
// model computes every wire's score and keep flag; every output beat is
// compared lane by lane (hit flag after filtering, ADC, TDC, score).
// Phase 1 applies random input gaps and output back-pressure, including long
// stalls that fill the bypass FIFOs; phase 2 sends events back to back into an
// empty pipeline with the output always ready and checks the latency (4*RU+11
// clocks from the first input beat to the first output beat) and the rate of one
// event every RU clocks. The mechanisms of the design are counted and each must
// have happened: input stall, output back-pressure, a fork that delivered a beat
// to one branch before the other, a full bypass FIFO, dead (not live) edges, hit
// nodes with nothing to aggregate, hidden and output saturation, kept and
// rejected hits, and back-to-back events.

  localparam int NN  = NL * NW;
  localparam int NLN = (NN + RU - 1) / RU;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  tb_ref_pkg::graph     g;
  tb_ref_pkg::gnn_model m;

  typedef struct { int keep[]; int score[]; int hit[]; int adc[]; int tdc[]; } exp_t;
  exp_t exp_q[$];
  int ev_in = 0, ev_out = 0;
  bit full_rate = 0, long_stall = 0;
  int cyc = 0, t_in = -1, t_out = -1, span_start = -1, span_end = -1;
  // mechanism counters
  int c_in_stall = 0, c_out_bp = 0, c_fork_split = 0, c_fifo_full = 0;
  int c_kept = 0, c_rej = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d events out", ev_out, ev_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void make_event(output int hit[], output int adc[], output int tdc[]);
    int occ;
    occ = tb_ref_pkg::rnd(20, 80);   // occupancy in percent
    hit = new[NN]; adc = new[NN]; tdc = new[NN];
    foreach (hit[n]) begin
      hit[n] = (tb_ref_pkg::rnd(0, 99) < occ);
      adc[n] = tb_ref_pkg::rnd(-8, 7);
      tdc[n] = tb_ref_pkg::rnd(-8, 7);
    end
  endfunction

  task automatic send_event(int hit[], int adc[], int tdc[], bit gaps);
    exp_t e;
    m.run(g, hit, adc, tdc);
    e.keep = m.keep; e.score = m.score; e.hit = hit; e.adc = adc; e.tdc = tdc;
    exp_q.push_back(e);
    for (int b = 0; b < RU; b++) begin
      @(negedge clk);
      while (gaps && tb_ref_pkg::rnd(0, 3) == 0) @(negedge clk);
      for (int l = 0; l < NLN; l++) begin
        int n;
        n = b * NLN + l;
        s_data[l] = (n < NN) ? {hit[n][0], 4'(adc[n]), 4'(tdc[n])} : '0;
      end
      s_valid = 1'b1; s_last = (b == RU - 1);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      #1 s_valid = 1'b0;
    end
    ev_in++;
  endtask

  initial begin
    int hit[], adc[], tdc[], sc[$];
    g = new(NL, NW);
    m = new();
    m.randomise(60);
    // threshold at the median score of the hit wires of a sample event
    m.thr = -128;
    make_event(hit, adc, tdc);
    m.run(g, hit, adc, tdc);
    foreach (hit[n]) if (hit[n]) sc.push_back(m.score[n]);
    sc.sort();
    m.thr = (sc.size() > 0) ? sc[sc.size() / 2] : 0;
    thr  = 8'(m.thr);
    r1_w = m.r1_struct();
    o_w  = m.o_struct();
    r2_w = m.r2_struct();
    m.r1.sat_hid = 0; m.r1.sat_out = 0; m.o.sat_hid = 0; m.o.sat_out = 0;
    m.r2.sat_hid = 0; m.r2.sat_out = 0;
    m.live_edges = 0; m.dead_edges = 0; m.empty_nodes = 0;
    s_valid = 1'b0; s_last = 1'b0; s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // phase 1
    for (int i = 0; i < N_EV1; i++) begin
      make_event(hit, adc, tdc);
      send_event(hit, adc, tdc, 1'b1);
    end
    wait (ev_out == ev_in);
    // phase 2
    @(negedge clk);
    full_rate = 1;
    for (int i = 0; i < N_EV2; i++) begin
      make_event(hit, adc, tdc);
      send_event(hit, adc, tdc, 1'b0);
    end
    wait (ev_out == ev_in);
    repeat (2) @(posedge clk);

    checks++;
    if (t_out - t_in != 4 * RU + 11) begin
      failures++; $display("latency %0d clocks, expected %0d", t_out - t_in, 4 * RU + 11);
    end
    checks++;
    if (span_end - span_start != N_EV2 * RU - 1) begin
      failures++;
      $display("%0d back-to-back events took %0d clocks, expected %0d", N_EV2,
               span_end - span_start + 1, N_EV2 * RU);
    end
    $display("events %0d, latency %0d clocks, %0d events in %0d clocks", ev_out,
             t_out - t_in, N_EV2, span_end - span_start + 1);
    $display("input stalls %0d, output back-pressure %0d, fork splits %0d, FIFO full %0d",
             c_in_stall, c_out_bp, c_fork_split, c_fifo_full);
    $display("live edges %0d, dead edges %0d, hit nodes without input %0d",
             m.live_edges, m.dead_edges, m.empty_nodes);
    $display("saturation hidden %0d/%0d/%0d output %0d/%0d/%0d, kept %0d rejected %0d",
             m.r1.sat_hid, m.o.sat_hid, m.r2.sat_hid, m.r1.sat_out, m.o.sat_out,
             m.r2.sat_out, c_kept, c_rej);
    if (N_EV1 > 0) begin
      checks++; if (c_out_bp == 0)     begin failures++; $display("no back-pressure"); end
    end
    if (N_EV1 > 0 && REQ_FLOW) begin
      checks++; if (c_in_stall == 0)   begin failures++; $display("no input stall"); end
      checks++; if (c_fork_split == 0) begin failures++; $display("no fork split"); end
      checks++; if (c_fifo_full == 0)  begin failures++; $display("no full FIFO"); end
    end
    checks++; if (m.dead_edges == 0)  begin failures++; $display("no dead edge"); end
    checks++; if (m.empty_nodes == 0) begin failures++; $display("no empty aggregation"); end
    checks++;
    if (m.r1.sat_hid + m.o.sat_hid + m.r2.sat_hid == 0 ||
        m.r1.sat_out + m.o.sat_out + m.r2.sat_out == 0) begin
      failures++; $display("no saturation");
    end
    checks++; if (c_kept == 0 || c_rej == 0) begin failures++; $display("no kept/rejected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output ready: random, with occasional long stalls, in phase 1
  int stall_left = 0;
  always @(negedge clk) begin
    if (full_rate) m_ready = 1'b1;
    else begin
      if (stall_left > 0) stall_left--;
      else if (tb_ref_pkg::rnd(0, 99) == 0) stall_left = 6 * RU + OUT_D;
      m_ready = (stall_left == 0) && (tb_ref_pkg::rnd(0, 2) != 0);
    end
  end

  int beat = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (s_valid && !s_ready) c_in_stall++;
      if (m_valid && !m_ready) c_out_bp++;
      if (dut.u_fork_in.taken != '0 || dut.u_fork_r1.taken != '0) c_fork_split++;
      if (int'(dut.u_out_fifo.level) == OUT_D || int'(dut.u_hit_fifo.level) == HIT_D ||
          int'(dut.u_edge_fifo.level) == EDGE_D) c_fifo_full++;
      if (full_rate && t_in < 0 && s_valid && s_ready) t_in = cyc;
    end
    if (rst_n && m_valid && m_ready) begin
      if (full_rate) begin
        if (t_out < 0) t_out = cyc;
        if (span_start < 0) span_start = cyc;
        span_end = cyc;
      end
      for (int l = 0; l < NLN; l++) begin
        int n;
        n = beat * NLN + l;
        if (n < NN) begin
          checks++;
          if (m_data[l].hit != exp_q[0].keep[n][0] || $signed(m_data[l].adc) != exp_q[0].adc[n] ||
              $signed(m_data[l].tdc) != exp_q[0].tdc[n] || $signed(m_score[l]) != exp_q[0].score[n]) begin
            failures++;
            if (failures < 10)
              $display("event %0d node %0d: hit %0d exp %0d score %0d exp %0d", ev_out, n,
                       m_data[l].hit, exp_q[0].keep[n], $signed(m_score[l]), exp_q[0].score[n]);
          end
          if (exp_q[0].keep[n]) c_kept++;
          else if (exp_q[0].hit[n]) c_rej++;
        end
      end
      checks++;
      if (m_last != (beat == RU - 1)) failures++;
      beat++;
      if (beat == RU) begin beat = 0; void'(exp_q.pop_front()); ev_out++; end
    end
    cyc++;
  end
