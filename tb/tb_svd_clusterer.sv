// tb_svd_clusterer -- self-checking test of the strip clusterer.
// Sends strip runs of several lengths on different sensors and sides, single strips, and
// end-of-event tokens, with random back-pressure on the output, and compares every cluster
// (position = first + last strip, size) with a list worked out by hand.
// The expected values follow the method's equations as this design implements them; the
// stimulus, the tolerances and the number formats checked are this design's own choices.
`timescale 1ns/1ps
module tb_svd_clusterer;
  import datcon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  svd_strip_t in_strip;
  svd_cluster_t out_clu;

  svd_clusterer dut (.*);

  int checks = 0, failures = 0;

  svd_strip_t   stim[$];
  svd_cluster_t expq[$];

  function automatic svd_strip_t s(bit eoe, int layer, int ladder, int sensor, bit p, int strip);
    svd_strip_t v;
    v.eoe = eoe; v.layer = 2'(layer); v.ladder = 4'(ladder); v.sensor = 3'(sensor);
    v.pside = p; v.strip = 10'(strip);
    return v;
  endfunction
  function automatic svd_cluster_t c(bit eoe, int layer, int ladder, int sensor, bit p, int pos2, int size);
    svd_cluster_t v;
    v = '0;
    v.eoe = eoe;
    if (!eoe) begin
      v.layer = 2'(layer); v.ladder = 4'(ladder); v.sensor = 3'(sensor);
      v.pside = p; v.pos2 = 11'(pos2); v.size = 5'(size);
    end
    return v;
  endfunction

  initial begin
    // event 1: run 15,16 (p-side), single 20, run 1..3 n-side, same strip number on another sensor
    stim.push_back(s(0, 3, 5, 2, 1, 15)); stim.push_back(s(0, 3, 5, 2, 1, 16));
    stim.push_back(s(0, 3, 5, 2, 1, 20));
    stim.push_back(s(0, 3, 5, 2, 0, 1));  stim.push_back(s(0, 3, 5, 2, 0, 2)); stim.push_back(s(0, 3, 5, 2, 0, 3));
    stim.push_back(s(0, 3, 5, 3, 0, 4));  // adjacent strip number, other sensor: new cluster
    stim.push_back(s(1, 0, 0, 0, 0, 0));
    expq.push_back(c(0, 3, 5, 2, 1, 31, 2));
    expq.push_back(c(0, 3, 5, 2, 1, 40, 1));
    expq.push_back(c(0, 3, 5, 2, 0, 4, 3));
    expq.push_back(c(0, 3, 5, 3, 0, 8, 1));
    expq.push_back(c(1, 0, 0, 0, 0, 0, 0));
    // event 2: empty event
    stim.push_back(s(1, 0, 0, 0, 0, 0));
    expq.push_back(c(1, 0, 0, 0, 0, 0, 0));
    // event 3: a run of 40 strips (size saturates at 31) and a run ending at strip 767
    for (int k = 100; k < 140; k++) stim.push_back(s(0, 1, 9, 1, 1, k));
    stim.push_back(s(0, 1, 9, 1, 1, 766)); stim.push_back(s(0, 1, 9, 1, 1, 767));
    stim.push_back(s(1, 0, 0, 0, 0, 0));
    expq.push_back(c(0, 1, 9, 1, 1, 100 + 139, 31));
    expq.push_back(c(0, 1, 9, 1, 1, 766 + 767, 2));
    expq.push_back(c(1, 0, 0, 0, 0, 0, 0));
  end

  // driver
  initial begin
    in_valid = 0; in_strip = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    while (stim.size() > 0) begin
      @(negedge clk);
      in_valid = 1; in_strip = stim[0];
      #1;
    while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 in_valid = 0;
      void'(stim.pop_front());
    end
  end

  // monitor with random back-pressure
  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  initial out_ready = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected output %p", out_clu);
    end else begin
      if (out_clu !== expq[0]) begin
        failures++; $display("mismatch: got pos2=%0d size=%0d exp pos2=%0d size=%0d", out_clu.pos2, out_clu.size, expq[0].pos2, expq[0].size);
      end
      void'(expq.pop_front());
    end
    if (expq.size() == 0) begin
      repeat (5) @(posedge clk);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outputs missing", expq.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
