// tb_mlp_pe: self-checking test of one quantised MLP processing element.
//
// Two instances: the R1 shape (9-7-4, 4-bit output) and the R2 shape (12-4-1,
// 8-bit output). Random inputs, random half-pruned weights and biases of several
// magnitudes (so that hidden and output saturation occur) are applied; each
// output is compared with the integer reference model two clocks later (the
// specified latency). A stretch with en low checks that the pipeline holds.
module tb_mlp_pe;
  import gnn_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // R1 shape
  logic en;
  logic [R1_IN-1:0][3:0]              xa;
  logic [R1_HID-1:0][R1_IN-1:0][3:0]  w1a;
  logic [R1_HID-1:0][15:0]            b1a;
  logic [EMB-1:0][R1_HID-1:0][3:0]    w2a;
  logic [EMB-1:0][15:0]               b2a;
  logic [EMB-1:0][3:0]                ya;
  // R2 shape
  logic [R2_IN-1:0][3:0]              xb;
  logic [R2_HID-1:0][R2_IN-1:0][3:0]  w1b;
  logic [R2_HID-1:0][15:0]            b1b;
  logic [0:0][R2_HID-1:0][3:0]        w2b;
  logic [0:0][15:0]                   b2b;
  logic [0:0][7:0]                    yb;

  mlp_pe #(.N_IN(R1_IN), .N_HID(R1_HID), .N_OUT(EMB), .OUT_BITS(4)) dut_a (
    .clk, .en, .x(xa), .w1(w1a), .b1(b1a), .w2(w2a), .b2(b2a), .y(ya));
  mlp_pe #(.N_IN(R2_IN), .N_HID(R2_HID), .N_OUT(1), .OUT_BITS(8)) dut_b (
    .clk, .en, .x(xb), .w1(w1b), .b1(b1b), .w2(w2b), .b2(b2b), .y(yb));

  mlp ma, mb;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights(int bias_range);
    ma.randomise(bias_range);
    mb.randomise(bias_range);
    foreach (ma.w1[i]) w1a[i / R1_IN][i % R1_IN] = 4'(ma.w1[i]);
    foreach (ma.w2[i]) w2a[i / R1_HID][i % R1_HID] = 4'(ma.w2[i]);
    foreach (ma.b1[i]) b1a[i] = 16'(ma.b1[i]);
    foreach (ma.b2[i]) b2a[i] = 16'(ma.b2[i]);
    foreach (mb.w1[i]) w1b[i / R2_IN][i % R2_IN] = 4'(mb.w1[i]);
    foreach (mb.w2[i]) w2b[0][i] = 4'(mb.w2[i]);
    foreach (mb.b1[i]) b1b[i] = 16'(mb.b1[i]);
    b2b[0] = 16'(mb.b2[0]);
  endtask

  initial begin
    int xs_a[$][], xs_b[$][];
    int va[], vb[], ea[], eb[];
    int held_a[], held_b[];
    ma = new(R1_IN, R1_HID, EMB, 4);
    mb = new(R2_IN, R2_HID, 1, 8);
    en = 1'b1;
    for (int round = 0; round < 40; round++) begin
      load_weights((round % 4 == 0) ? 2000 : (round % 4 == 1) ? 300 : 40);
      xs_a.delete(); xs_b.delete();
      for (int t = 0; t < 30; t++) begin
        va = new[R1_IN]; vb = new[R2_IN];
        foreach (va[i]) begin va[i] = rnd(-8, 7); xa[i] = 4'(va[i]); end
        foreach (vb[i]) begin vb[i] = rnd(-8, 7); xb[i] = 4'(vb[i]); end
        xs_a.push_back(va); xs_b.push_back(vb);
        @(posedge clk); #1;
        if (t >= 1) begin
          // output of the vector applied two edges ago
          ma.eval(xs_a[t - 1], ea);
          mb.eval(xs_b[t - 1], eb);
          for (int j = 0; j < EMB; j++) begin
            checks++;
            if ($signed(ya[j]) != ea[j]) begin
              failures++;
              if (failures < 10) $display("R1 shape: out %0d got %0d exp %0d", j, $signed(ya[j]), ea[j]);
            end
          end
          checks++;
          if ($signed(yb[0]) != eb[0]) begin
            failures++;
            if (failures < 10) $display("R2 shape: got %0d exp %0d", $signed(yb[0]), eb[0]);
          end
        end
      end
      // hold: with en low the output must not move
      held_a = new[EMB]; foreach (held_a[j]) held_a[j] = $signed(ya[j]);
      held_b = new[1];   held_b[0] = $signed(yb[0]);
      en = 1'b0;
      foreach (xa[i]) xa[i] = 4'(rnd(-8, 7));
      repeat (3) @(posedge clk);
      #1;
      for (int j = 0; j < EMB; j++) begin
        checks++;
        if ($signed(ya[j]) != held_a[j]) failures++;
      end
      checks++;
      if ($signed(yb[0]) != held_b[0]) failures++;
      en = 1'b1;
    end
    $display("saturations: hidden %0d/%0d output %0d/%0d",
             ma.sat_hid, mb.sat_hid, ma.sat_out, mb.sat_out);
    checks++;
    if (ma.sat_hid == 0 || ma.sat_out == 0 || mb.sat_out == 0) begin
      failures++;
      $display("saturation cases not covered");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
