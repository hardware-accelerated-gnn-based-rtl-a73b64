// tb_threshold: self-checking test of the threshold stage.
//
// Eight lanes. Random scores, hit records and thresholds (including scores equal
// to the threshold) arrive on two streams with independent random gaps; the
// output is checked beat by beat against the rule keep = hit and score >= thr,
// with ADC and TDC unchanged and the score passed through. Output back-pressure
// is random; a full-rate stretch checks the 1-clock latency.
module tb_threshold;
  import gnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  score_t thr;
  logic s_s_valid, s_s_ready, s_s_last, s_h_valid, s_h_ready, s_h_last;
  logic m_valid, m_ready, m_last;
  logic [L-1:0][7:0] s_s_data, m_score;
  hit_t [L-1:0] s_h_data, m_data;

  threshold #(.LANES(L)) dut (.*);

  int checks = 0, failures = 0, kept = 0, dropped = 0, ties = 0;
  typedef struct { logic [L-1:0][7:0] s; hit_t [L-1:0] h; logic last; } beat_t;
  beat_t qs[$], qh[$];
  int n_in = 0, n_out = 0;
  bit full_rate = 0;
  int cyc = 0, t_in = -1, t_out = -1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_s_valid = 0; s_h_valid = 0;
    thr = 8'sd10;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 600; b++) begin
      beat_t x;
      if (b == 500) begin wait (n_out == n_in); @(negedge clk); full_rate = 1; end
      for (int l = 0; l < L; l++) begin
        x.s[l] = ($urandom_range(4, 0) == 0) ? thr : 8'($urandom);
        x.h[l] = hit_t'($urandom);
      end
      x.last = b[0];
      qs.push_back(x); qh.push_back(x);
      fork
        begin
          @(negedge clk);
          while (!full_rate && $urandom_range(1, 0)) @(negedge clk);
          s_s_data = x.s; s_s_last = x.last; s_s_valid = 1;
          @(posedge clk); while (!s_s_ready) @(posedge clk);
          #1 s_s_valid = 0;
        end
        begin
          @(negedge clk);
          while (!full_rate && $urandom_range(1, 0)) @(negedge clk);
          s_h_data = x.h; s_h_last = x.last; s_h_valid = 1;
          @(posedge clk); while (!s_h_ready) @(posedge clk);
          #1 s_h_valid = 0;
        end
      join
      n_in++;
    end
    wait (n_out == n_in);
    checks++;
    if (t_out - t_in != 1) begin failures++; $display("latency %0d", t_out - t_in); end
    checks++;
    if (kept == 0 || dropped == 0 || ties == 0) begin failures++; $display("case missing"); end
    $display("kept %0d dropped %0d ties %0d", kept, dropped, ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) m_ready = full_rate ? 1'b1 : $urandom_range(1, 0);

  always @(posedge clk) begin
    if (full_rate && t_in < 0 && s_s_valid && s_s_ready) t_in = cyc;
    if (rst_n && m_valid && m_ready) begin
      beat_t x;
      if (full_rate && t_out < 0) t_out = cyc;
      x = qs.pop_front(); void'(qh.pop_front());
      for (int l = 0; l < L; l++) begin
        bit k;
        k = x.h[l].hit && ($signed(x.s[l]) >= thr);
        if (x.h[l].hit && k) kept++;
        if (x.h[l].hit && !k) dropped++;
        if (x.h[l].hit && x.s[l] == thr) ties++;
        checks++;
        if (m_data[l].hit != k || m_data[l].adc != x.h[l].adc || m_data[l].tdc != x.h[l].tdc ||
            m_score[l] != x.s[l]) begin
          failures++;
          if (failures < 10) $display("beat %0d lane %0d wrong", n_out, l);
        end
      end
      checks++;
      if (m_last != x.last) failures++;
      n_out++;
    end
    cyc++;
  end
endmodule
