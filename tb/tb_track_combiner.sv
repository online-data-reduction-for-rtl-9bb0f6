// tb_track_combiner -- self-checking test of the 2D-to-3D track combination.
// Event 1: 2 r-phi and 3 r-z candidates, arriving interleaved, must give the 6 pairings in
// order (r-phi major) and a token. Event 2: no r-z candidate gives only a token. Event 3:
// 6 r-phi candidates against a list size of 4 (parameter override) must drop 2 (two overflow
// pulses) and pair the 4 kept ones with the single r-z candidate. Output is stalled at random.
// The expected values follow the method's equations as this design implements them; the
// stimulus, the tolerances and the number formats checked are this design's own choices.
`timescale 1ns/1ps
module tb_track_combiner;
  import datcon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic xy_valid, xy_ready, rz_valid, rz_ready, out_valid, out_ready, overflow;
  hough_cand_t xy_cand, rz_cand;
  track3d_t out_trk;

  track_combiner #(.MAX_TRK(4)) dut (.*);

  int checks = 0, failures = 0, ovf = 0;
  track3d_t expq[$];

  function automatic hough_cand_t hc(bit eoe, int a, int p);
    hough_cand_t c; c.eoe = eoe; c.ang = 9'(a); c.par = 6'(p); return c;
  endfunction
  function automatic track3d_t tk(bit eoe, int phi, int k, int al, int s);
    track3d_t t; t = '0; t.eoe = eoe;
    if (!eoe) begin t.phi = 9'(phi); t.kappa = 6'(k); t.alpha = 8'(al); t.s = 6'(s); end
    return t;
  endfunction

  task automatic send_xy(hough_cand_t c);
    @(negedge clk); xy_valid = 1; xy_cand = c; #1;
    while (!xy_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 xy_valid = 0;
  endtask
  task automatic send_rz(hough_cand_t c);
    @(negedge clk); rz_valid = 1; rz_cand = c; #1;
    while (!rz_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 rz_valid = 0;
  endtask

  always @(posedge clk) if (rst_n && overflow) ovf++;
  always @(posedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  initial out_ready = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      if (out_trk !== expq[0]) begin
        failures++;
        $display("mismatch: got %0d/%0d/%0d/%0d eoe=%b exp %0d/%0d/%0d/%0d eoe=%b",
                 out_trk.phi, out_trk.kappa, out_trk.alpha, out_trk.s, out_trk.eoe,
                 expq[0].phi, expq[0].kappa, expq[0].alpha, expq[0].s, expq[0].eoe);
      end
      void'(expq.pop_front());
    end
  end

  initial begin
    xy_valid = 0; rz_valid = 0; xy_cand = '0; rz_cand = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // event 1
    for (int i = 0; i < 2; i++) for (int j = 0; j < 3; j++) expq.push_back(tk(0, 10 + i, 20 + i, 100 + j, 30 + j));
    expq.push_back(tk(1, 0, 0, 0, 0));
    fork
      begin send_xy(hc(0, 10, 20)); send_xy(hc(0, 11, 21)); send_xy(hc(1, 0, 0)); end
      begin send_rz(hc(0, 100, 30)); send_rz(hc(0, 101, 31)); send_rz(hc(0, 102, 32)); send_rz(hc(1, 0, 0)); end
    join
    // event 2
    expq.push_back(tk(1, 0, 0, 0, 0));
    fork
      begin send_xy(hc(0, 7, 7)); send_xy(hc(1, 0, 0)); end
      begin send_rz(hc(1, 0, 0)); end
    join
    // event 3: overflow
    for (int i = 0; i < 4; i++) expq.push_back(tk(0, 300 + i, i, 50, 40));
    expq.push_back(tk(1, 0, 0, 0, 0));
    fork
      begin for (int i = 0; i < 6; i++) send_xy(hc(0, 300 + i, i)); send_xy(hc(1, 0, 0)); end
      begin send_rz(hc(0, 50, 40)); send_rz(hc(1, 0, 0)); end
    join
    while (expq.size() > 0) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (ovf != 2) begin failures++; $display("overflow pulses %0d, expected 2", ovf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outputs missing", expq.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
