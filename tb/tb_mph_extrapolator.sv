// tb_mph_extrapolator -- self-checking test of the extrapolation to the PXD layers.
// Random 3D tracks (alpha restricted to the detector acceptance, 30..226 of 256 bins). For
// each track the expected MPHs on both PXD layers are computed in floating point from the bin
// centres with the exact circle formula psi = phi0 + asin(R*kappa/2) and the line
// z = (s - R cos(alpha)) / sin(alpha). psi must agree within 0.03 deg (6 phase units, the
// small-angle form included), z within 30 um. Tokens must pass; output is stalled at random.
// The expected values follow the method's equations as this design implements them; the
// stimulus, the tolerances and the number formats checked are this design's own choices.
`timescale 1ns/1ps
module tb_mph_extrapolator;
  import datcon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  track3d_t in_trk;
  mph_t out_mph;

  mph_extrapolator dut (.*);

  int checks = 0, failures = 0;
  real epsi[$], ez[$];
  int  elay[$], etok[$];
  localparam real PI_ = 3.14159265358979323846;

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  initial begin
    in_valid = 0; in_trk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      track3d_t t;
      t = '0;
      if (n % 40 == 39) begin
        t.eoe = 1; etok.push_back(1); elay.push_back(0); epsi.push_back(0.0); ez.push_back(0.0);
      end else begin
        real phi0, k, al, sc;
        int ip, ik, ia, is;
        t.phi = 9'($urandom_range(0, 511)); t.kappa = 6'($urandom_range(0, 63));
        t.alpha = 8'($urandom_range(30, 226)); t.s = 6'($urandom_range(0, 63));
        ip = t.phi; ik = t.kappa; ia = t.alpha; is = t.s;
        phi0 = (ip + 0.5) * 2.0 * PI_ / 512.0;
        k    = ((ik - 32) * 16384.0 + 8192.0) / 4294967296.0;   // per 10 um
        al   = (ia + 0.5) * PI_ / 256.0;
        sc   = (is - 32) * 128.0 + 64.0;
        for (int l = 0; l < 2; l++) begin
          real R, psi;
          R = PXD_RADIUS[l];
          psi = (phi0 + $asin(R * k / 2.0)) * 65536.0 / (2.0 * PI_);
          etok.push_back(0); elay.push_back(l);
          epsi.push_back(psi);
          ez.push_back((sc - R * $cos(al)) / $sin(al));
        end
      end
      @(negedge clk); in_valid = 1; in_trk = t; #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 in_valid = 0;
    end
  end

  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  initial out_ready = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (etok.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      if (out_mph.eoe != etok[0][0]) begin failures++; $display("token mismatch"); end
      else if (!out_mph.eoe) begin
        real dp, zmax;
        zmax = 131071.0;
        dp = real'(out_mph.psi) - epsi[0];
        while (dp > 32768.0) dp -= 65536.0;
        while (dp < -32768.0) dp += 65536.0;
        if (int'(out_mph.layer) != elay[0] || fabs(dp) > 6.0 ||
            (fabs(ez[0]) < zmax && fabs(real'(out_mph.z) - ez[0]) > 3.0)) begin
          failures++;
          $display("mismatch: layer %0d/%0d psi %0d/%f z %f/%f", out_mph.layer, elay[0],
                   out_mph.psi, epsi[0], real'(out_mph.z), ez[0]);
        end
      end
      void'(etok.pop_front()); void'(elay.pop_front()); void'(epsi.pop_front()); void'(ez.pop_front());
      if (etok.size() == 0) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outputs missing", etok.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
