// tb_hough_engine -- self-checking test of the Hough engine in both of its configurations.
// phi-rho instance (512 x 64, full turn, forward check): events with one track, two tracks of
// opposite charge, and a track seen in only two layers. Hits are placed exactly on the circle
// through the origin at the four SVD radii and converted to conformal form in floating point.
// Each true track must yield a candidate within two bins of its (phi0, kappa) cell, no event
// may yield more than two candidates per track, and the two-layer track must yield none.
// theta-s instance (256 x 64, half turn): one straight r-z track; its candidate must lie within
// two bins of (180 deg - theta, z0*sin(theta)). The voting time of N_ANG + 1 cycles per hit is
// checked from the spacing of accepted hits.
// The expected values follow the method's equations as this design implements them; the
// stimulus, the tolerances and the number formats checked are this design's own choices.
`timescale 1ns/1ps
module tb_hough_engine;
  import datcon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic p_in_valid, p_in_ready, p_out_valid, p_busy;
  hough_in_t p_in;
  hough_cand_t p_out;
  logic t_in_valid, t_in_ready, t_out_valid, t_busy;
  hough_in_t t_in;
  hough_cand_t t_out;

  hough_engine u_phi (
    .clk, .rst_n, .in_valid(p_in_valid), .in_ready(p_in_ready), .in_h(p_in),
    .out_valid(p_out_valid), .out_ready(1'b1), .out_c(p_out), .busy(p_busy));

  hough_engine #(.N_ANG(256), .FULL_TURN(1'b0), .N_PAR(64), .PAR_OFFSET(4096), .PAR_SHIFT(7),
                 .FWD_CHECK(1'b0), .MIN_LAYERS(3)) u_theta (
    .clk, .rst_n, .in_valid(t_in_valid), .in_ready(t_in_ready), .in_h(t_in),
    .out_valid(t_out_valid), .out_ready(1'b1), .out_c(t_out), .busy(t_busy));

  int checks = 0, failures = 0;
  localparam real PI2 = 6.283185307179586;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  hough_cand_t pq[$], tq[$];
  int p_eoe = 0, t_eoe = 0;
  always @(posedge clk) if (rst_n) begin
    if (p_out_valid) begin if (p_out.eoe) p_eoe++; else pq.push_back(p_out); end
    if (t_out_valid) begin if (t_out.eoe) t_eoe++; else tq.push_back(t_out); end
  end

  longint acc_t[$];
  task automatic send_p(hough_in_t h);
    @(negedge clk); p_in_valid = 1; p_in = h; #1;
    while (!p_in_ready) begin @(negedge clk); #1; end
    @(posedge clk); acc_t.push_back(cyc); #1 p_in_valid = 0;
  endtask
  task automatic send_t(hough_in_t h);
    @(negedge clk); t_in_valid = 1; t_in = h; #1;
    while (!t_in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 t_in_valid = 0;
  endtask

  // hits of a circle through the origin, direction phi0 (deg), curvature kappa (1/m)
  task automatic phi_track(real phi0_deg, real kappa_m, int nlayers);
    real phi0, k;
    phi0 = phi0_deg * PI2 / 360.0;
    k = kappa_m * 1.0e-5;                      // per 10 um
    for (int l = 0; l < nlayers; l++) begin
      hough_in_t h;
      real R, psi, x, y;
      R = SVD_RADIUS[l];
      psi = phi0 + $asin(R * k / 2.0);
      x = R * $cos(psi); y = R * $sin(psi);
      h = '0; h.layer = 2'(l);
      h.a = conf_t'($rtoi( 2.0 * y * 4294967296.0 / (R * R)));
      h.b = conf_t'($rtoi(-2.0 * x * 4294967296.0 / (R * R)));
      send_p(h);
    end
  endtask

  function automatic int ang_dist(int a, int b, int n);
    int d;
    d = (a - b) % n; if (d < 0) d += n;
    return (d > n / 2) ? n - d : d;
  endfunction

  // is there a candidate near the expected cell?
  function automatic bit found(ref hough_cand_t q[$], input real ang_bin, input real par_bin, input int n);
    foreach (q[i])
      if (ang_dist(int'(q[i].ang), $rtoi($floor(ang_bin)), n) <= 2 &&
          (int'(q[i].par) - $rtoi($floor(par_bin))) <= 2 && ($rtoi($floor(par_bin)) - int'(q[i].par)) <= 2)
        return 1;
    return 0;
  endfunction

  function automatic real kbin(real kappa_m);
    return (kappa_m * 1.0e-5 * 4294967296.0 + 524288.0) / 16384.0;
  endfunction

  task automatic end_event_p(int expect_eoe);
    hough_in_t h;
    h = '0; h.eoe = 1;
    send_p(h);
    while (p_eoe < expect_eoe) @(posedge clk);
    @(posedge clk);
  endtask

  initial begin
    hough_in_t h;
    real sb;
    p_in_valid = 0; t_in_valid = 0; p_in = '0; t_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // event 1: one track, back-to-back hits: vote time check
    acc_t.delete();
    phi_track(37.3, 1.5, 4);
    checks++;
    if (acc_t[1] - acc_t[0] != 513 || acc_t[3] - acc_t[2] != 513) begin
      failures++; $display("vote time %0d, expected 513", acc_t[1] - acc_t[0]);
    end
    end_event_p(1);
    checks++;
    if (!found(pq, 37.3 * 512 / 360.0, kbin(1.5), 512)) begin failures++; $display("track 1 not found"); end
    checks++;
    if (pq.size() > 2) begin failures++; $display("event 1: %0d candidates", pq.size()); end
    pq.delete();

    // event 2: two tracks of opposite charge
    phi_track(200.0, -3.0, 4);
    phi_track(90.4, 0.2, 4);
    end_event_p(2);
    checks++;
    if (!found(pq, 200.0 * 512 / 360.0, kbin(-3.0), 512)) begin failures++; $display("track 2a not found"); end
    checks++;
    if (!found(pq, 90.4 * 512 / 360.0, kbin(0.2), 512)) begin failures++; $display("track 2b not found"); end
    checks++;
    if (pq.size() > 4) begin failures++; $display("event 2: %0d candidates", pq.size()); end
    pq.delete();

    // event 3: track seen in two layers only: below the three-layer threshold
    phi_track(300.0, 2.0, 2);
    end_event_p(3);
    checks++;
    if (pq.size() != 0) begin failures++; $display("event 3: %0d candidates, expected 0", pq.size()); end
    pq.delete();

    // theta-s: theta = 60 deg, z0 = 1.2 mm
    for (int l = 0; l < 4; l++) begin
      real r, z, th;
      th = 60.0 * PI2 / 360.0;
      r = SVD_RADIUS[l];
      z = 120.0 + r * $cos(th) / $sin(th);
      h = '0; h.layer = 2'(l);
      h.a = conf_t'($rtoi(r)); h.b = conf_t'($rtoi(z));
      send_t(h);
    end
    h = '0; h.eoe = 1;
    send_t(h);
    while (t_eoe < 1) @(posedge clk);
    checks++;
    sb = (120.0 * $sin(60.0 * 6.283185307179586 / 360.0) + 4096.0) / 128.0;
    if (!found(tq, 120.0 * 256 / 180.0, sb, 512)) begin
      failures++; $display("r-z track not found (%0d candidates)", tq.size());
      foreach (tq[i]) $display("  cand ang=%0d par=%0d", tq[i].ang, tq[i].par);
    end
    checks++;
    if (tq.size() > 2) begin failures++; $display("r-z: %0d candidates", tq.size()); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
