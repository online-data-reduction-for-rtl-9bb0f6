// tb_roi_calc -- self-checking test of the MPH-to-ROI conversion.
// Random most probable hits on both PXD layers, plus directed ones at the module corners
// (to exercise clipping) and far beyond the module end (v saturates at the last row). For each
// the expected ladder, pixel (u, v) and window are computed in floating point from the pixel
// geometry; u and v may differ by one pixel from the reference at pixel borders. The window
// must be 80 x 120 unless clipped, and clipped windows must touch the module edge. A window
// that reaches past z = 0 must be followed by its remainder on the other module. Output is
// stalled at random; tokens must pass.
// The expected values follow the method's equations as this design implements them; the
// stimulus, the tolerances and the number formats checked are this design's own choices.
`timescale 1ns/1ps
module tb_roi_calc;
  import datcon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  mph_t in_mph;
  roi_t out_roi;

  roi_calc dut (.*);

  int checks = 0, failures = 0, clipped = 0, seconds = 0;
  bit exp2 = 0;
  roi_t first;
  mph_t sent[$];

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  task automatic send(mph_t m);
    @(negedge clk); in_valid = 1; in_mph = m; #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 in_valid = 0;
    sent.push_back(m);
  endtask

  function automatic mph_t mk(bit eoe, int layer, int psi, int z);
    mph_t m; m = '0; m.eoe = eoe; m.layer = layer[0]; m.psi = 16'(psi); m.z = coord_t'(z); return m;
  endfunction

  initial begin
    in_valid = 0; in_mph = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(mk(0, 0, 0, 0));                 // ladder 0, corner u = 0, v = 0
    send(mk(0, 1, 65535, -5));            // last ladder, last column
    send(mk(0, 0, 1000, 60000));          // beyond the module end
    send(mk(0, 1, 30000, -1664));         // exactly at the central/outer border of layer 2
    send(mk(1, 0, 0, 0));
    for (int n = 0; n < 300; n++) begin
      if (n % 50 == 49) send(mk(1, 0, 0, 0));
      else send(mk(0, $urandom_range(0, 1), $urandom_range(0, 65535), int'($urandom_range(0, 10000)) - 5000));
    end
  end

  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  initial out_ready = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready && exp2) begin
    checks++;
    seconds++;
    exp2 = 0;
    if (out_roi.eoe || out_roi.layer != first.layer || out_roi.ladder != first.ladder ||
        out_roi.fwd == first.fwd || out_roi.u_min != first.u_min || out_roi.u_max != first.u_max ||
        out_roi.v_min != 0 || int'(out_roi.v_max) != ROI_V - 2 - int'(first.v_max)) begin
      failures++;
      $display("bad second ROI: v %0d..%0d after first v %0d..%0d", out_roi.v_min, out_roi.v_max,
               first.v_min, first.v_max);
    end
  end else if (rst_n && out_valid && out_ready) begin
    mph_t m;
    checks++;
    m = sent.pop_front();
    if (!out_roi.eoe && int'(out_roi.v_max) < ROI_V - 1) begin
      exp2 = 1; first = out_roi;
    end
    if (out_roi.eoe != m.eoe) begin failures++; $display("token mismatch"); end
    else if (!m.eoe) begin
      real ph, fz, lc, pc, vr;
      int nl, lad, u, v, ps, zz;
      bit bad;
      nl = m.layer ? PXD_LADDERS[1] : PXD_LADDERS[0];
      ps = m.psi; zz = m.z;
      ph = ps * nl / 65536.0;
      lad = $rtoi($floor(ph));
      u = $rtoi($floor((ph - lad) * PXD_U_PIXELS));
      fz = (zz < 0 ? -zz : zz) * 10.0;               // um
      pc = m.layer ? PXD_V_PITCH_C[1] : PXD_V_PITCH_C[0];
      lc = PXD_V_CENTRAL * pc;
      vr = (fz < lc) ? fz / pc : PXD_V_CENTRAL + (fz - lc) / PXD_V_PITCH_O;
      v = $rtoi($floor(vr));
      if (v > PXD_V_PIXELS - 1) v = PXD_V_PIXELS - 1;
      bad = 0;
      if (out_roi.layer != m.layer || int'(out_roi.ladder) != lad || out_roi.fwd != (zz >= 0)) bad = 1;
      // window around the pixel: the centre pixel is u_min + 40 unless clipped at the low edge
      if (out_roi.u_min != 0 && iabs(int'(out_roi.u_min) + ROI_U / 2 - u) > 1) bad = 1;
      if (out_roi.u_max != PXD_U_PIXELS - 1 && iabs(int'(out_roi.u_max) - ROI_U / 2 + 1 - u) > 1) bad = 1;
      if (out_roi.v_min != 0 && iabs(int'(out_roi.v_min) + ROI_V / 2 - v) > 1) bad = 1;
      if (out_roi.v_max != PXD_V_PIXELS - 1 && iabs(int'(out_roi.v_max) - ROI_V / 2 + 1 - v) > 1) bad = 1;
      // size: exact unless clipped
      if (out_roi.u_min != 0 && out_roi.u_max != PXD_U_PIXELS - 1 && out_roi.u_max - out_roi.u_min != ROI_U - 1) bad = 1;
      if (out_roi.v_min != 0 && out_roi.v_max != PXD_V_PIXELS - 1 && out_roi.v_max - out_roi.v_min != ROI_V - 1) bad = 1;
      // the pixel itself must be inside
      if (u < int'(out_roi.u_min) - 1 || u > int'(out_roi.u_max) + 1 ||
          v < int'(out_roi.v_min) - 1 || v > int'(out_roi.v_max) + 1) bad = 1;
      if (out_roi.u_max >= PXD_U_PIXELS || out_roi.v_max >= PXD_V_PIXELS) bad = 1;
      if (out_roi.u_min == 0 || out_roi.v_min == 0 || out_roi.u_max == PXD_U_PIXELS - 1 ||
          out_roi.v_max == PXD_V_PIXELS - 1) clipped++;
      if (bad) begin
        failures++;
        $display("mismatch: L%0d psi %0d z %0d -> ladder %0d u %0d..%0d v %0d..%0d, ref ladder %0d u %0d v %0d",
                 m.layer, ps, zz, out_roi.ladder, out_roi.u_min, out_roi.u_max,
                 out_roi.v_min, out_roi.v_max, lad, u, v);
      end
    end
    if (sent.size() == 0 && !in_valid) begin
      checks++;
      if (clipped < 4 || seconds == 0) begin
        failures++; $display("only %0d clipped windows, %0d second ROIs", clipped, seconds);
      end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
