// tb_pe_array: self-checking test of an array of MLP processing elements.
//
// A small array (10 items, reuse 4, so 3 lanes) in the R1 shape. Phase 1 streams
// beats with random input gaps and random output back-pressure and compares every
// output beat (data of each lane, lane mask, last flag) in order with the
// reference model. Phase 2 streams at full rate and checks the specified timing:
// the first output two clocks after the first input, then one beat per clock.
module tb_pe_array;
  import gnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N_ITEMS = 10;
  localparam int REUSE   = 4;
  localparam int LANES   = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, stalls = 0;

  logic [R1_HID-1:0][R1_IN-1:0][3:0]  w1;
  logic [R1_HID-1:0][15:0]            b1;
  logic [EMB-1:0][R1_HID-1:0][3:0]    w2;
  logic [EMB-1:0][15:0]               b2;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  logic [LANES-1:0][R1_IN-1:0][3:0] s_data;
  logic [LANES-1:0] s_mask, m_mask;
  logic [LANES-1:0][EMB-1:0][3:0] m_data;

  pe_array #(.N_ITEMS(N_ITEMS), .REUSE(REUSE), .N_IN(R1_IN), .N_HID(R1_HID),
             .N_OUT(EMB), .OUT_BITS(4)) dut (.*);

  mlp m;
  typedef struct { int y[LANES][EMB]; logic [LANES-1:0] mask; logic last; } beat_t;
  beat_t exp_q[$];
  int sent = 0, got = 0;
  bit full_rate = 0;
  int cyc = 0, first_in = -1, first_out = -1, gaps = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  task automatic new_beat();
    beat_t b;
    int x[], y[];
    for (int l = 0; l < LANES; l++) begin
      x = new[R1_IN];
      foreach (x[i]) begin x[i] = rnd(-8, 7); s_data[l][i] = 4'(x[i]); end
      m.eval(x, y);
      for (int j = 0; j < EMB; j++) b.y[l][j] = y[j];
    end
    s_mask = LANES'($urandom);
    s_last = (sent % REUSE) == REUSE - 1;
    b.mask = s_mask;
    b.last = s_last;
    exp_q.push_back(b);
  endtask

  // driver
  initial begin
    m = new(R1_IN, R1_HID, EMB, 4);
    m.randomise(200);
    foreach (m.w1[i]) w1[i / R1_IN][i % R1_IN] = 4'(m.w1[i]);
    foreach (m.w2[i]) w2[i / R1_HID][i % R1_HID] = 4'(m.w2[i]);
    foreach (m.b1[i]) b1[i] = 16'(m.b1[i]);
    foreach (m.b2[i]) b2[i] = 16'(m.b2[i]);
    s_valid = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // phase 1: random gaps and back-pressure
    while (sent < 400) begin
      @(negedge clk);
      if (!s_valid && $urandom_range(3, 0) != 0) begin
        new_beat();
        s_valid = 1'b1;
      end
      @(posedge clk);
      if (s_valid && s_ready) begin sent++; #1 s_valid = 1'b0; end
    end
    wait (got == sent);
    // phase 2: full rate
    @(negedge clk);
    full_rate = 1;
    for (int t = 0; t < 40; t++) begin
      new_beat();
      s_valid = 1'b1;
      @(posedge clk);
      if (s_ready) sent++;
      @(negedge clk);
    end
    s_valid = 1'b0;
    wait (got == sent);
    repeat (2) @(posedge clk);
    checks++;
    if (first_out - first_in != 2) begin
      failures++;
      $display("latency %0d, expected 2", first_out - first_in);
    end
    checks++;
    if (gaps != 0) begin failures++; $display("%0d bubbles at full rate", gaps); end
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never happened"); end
    $display("beats %0d stalls %0d", got, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sink and checker
  always @(negedge clk) m_ready = full_rate ? 1'b1 : ($urandom_range(2, 0) != 0);

  always @(posedge clk) begin
    if (full_rate && s_valid && s_ready && first_in < 0) first_in = cyc;
    if (rst_n && m_valid && !m_ready) stalls++;
    if (full_rate && rst_n && got < sent && first_out >= 0 && !m_valid) gaps++;
    if (rst_n && m_valid && m_ready) begin
      beat_t b;
      if (full_rate && first_out < 0) first_out = cyc;
      b = exp_q.pop_front();
      for (int l = 0; l < LANES; l++)
        for (int j = 0; j < EMB; j++) begin
          checks++;
          if ($signed(m_data[l][j]) != b.y[l][j]) begin
            failures++;
            if (failures < 10) $display("beat %0d lane %0d out %0d: got %0d exp %0d",
                                        got, l, j, $signed(m_data[l][j]), b.y[l][j]);
          end
        end
      checks++;
      if (m_mask != b.mask || m_last != b.last) failures++;
      got++;
    end
    cyc++;
  end
endmodule
