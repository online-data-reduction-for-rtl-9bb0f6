// tb_svd_hit_coord -- self-checking test of the SVD coordinate translation.
// Random p-side and n-side clusters on all layers, ladders and sensors. Expected global
// positions are computed in floating point from the flat-ladder geometry: a p-side cluster
// must land within 20 um of R*n + u*t, an n-side cluster within 10 um in z and within 100 um of
// sqrt(R^2 + u^2) in r when a p-side cluster of the same sensor came just before it (R
// otherwise). End-of-event tokens must appear on both outputs. Outputs are stalled at random.
// The expected values follow the method's equations as this design implements them; the
// stimulus, the tolerances and the number formats checked are this design's own choices.
`timescale 1ns/1ps
module tb_svd_hit_coord;
  import datcon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, xy_valid, xy_ready, rz_valid, rz_ready;
  svd_cluster_t in_clu;
  hit_xy_t xy_hit;
  hit_rz_t rz_hit;

  svd_hit_coord dut (.*);

  int checks = 0, failures = 0;
  real exy[$][2];
  real erz[$][2];
  int  eoe_xy = 0, eoe_rz = 0;

  localparam real TWO_PI = 6.283185307179586;
  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  task automatic send(svd_cluster_t c);
    @(negedge clk);
    in_valid = 1; in_clu = c;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  initial begin
    real last_u;
    int  last_id;
    in_valid = 0; in_clu = '0; last_id = -1; last_u = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      svd_cluster_t c;
      int L, id;
      real R, beta, u, z;
      c = '0;
      L = $urandom_range(0, 3);
      c.layer  = 2'(L);
      c.ladder = 4'($urandom_range(0, SVD_LADDERS[L] - 1));
      c.sensor = 3'($urandom_range(0, SVD_SENSORS[L] - 1));
      c.pside  = (n % 3 != 2);      // p, p, n, ...: every n follows a p
      if (n % 3 == 2 && $urandom_range(0, 1) == 1) begin   // same sensor as the p before
        c.layer = 2'(last_id / 128); c.ladder = 4'((last_id / 8) % 16); c.sensor = 3'(last_id % 8);
        L = last_id / 128;
      end
      id = L * 128 + int'(c.ladder) * 8 + int'(c.sensor);
      R  = SVD_RADIUS[L];
      if (c.pside) begin
        c.pos2 = 11'($urandom_range(0, 2 * 767));
        beta = TWO_PI * c.ladder / SVD_LADDERS[L];
        u = (real'(c.pos2) - 767.0) * SVD_P_PITCH[L] / 20.0;
        exy.push_back('{R * $cos(beta) - u * $sin(beta), R * $sin(beta) + u * $cos(beta)});
        last_u = u; last_id = id;
      end else begin
        real r;
        c.pos2 = 11'($urandom_range(0, 2 * (SVD_N_STRIPS[L] - 1)));
        z = (2.0 * c.sensor - (SVD_SENSORS[L] - 1)) * SVD_SENSOR_LEN / 2.0
          + (real'(c.pos2) - (SVD_N_STRIPS[L] - 1)) * SVD_N_PITCH[L] / 20.0;
        r = (id == last_id) ? $sqrt(R * R + last_u * last_u) : R;
        erz.push_back('{r, z});
      end
      send(c);
      if (n % 97 == 96) begin
        c = '0; c.eoe = 1; send(c); last_id = -1;
        eoe_xy++; eoe_rz++;
      end
    end
  end

  always @(posedge clk) begin xy_ready <= ($urandom_range(0, 2) != 0); rz_ready <= ($urandom_range(0, 2) != 0); end
  initial begin xy_ready = 0; rz_ready = 0; end

  always @(posedge clk) if (rst_n) begin
    if (xy_valid && xy_ready) begin
      checks++;
      if (xy_hit.eoe) begin
        if (eoe_xy == 0) begin failures++; $display("unexpected xy token"); end
        else eoe_xy--;
      end else if (exy.size() == 0) begin failures++; $display("unexpected xy hit"); end
      else begin
        if (fabs(real'(xy_hit.x) - exy[0][0]) > 2.0 || fabs(real'(xy_hit.y) - exy[0][1]) > 2.0) begin
          failures++; $display("xy mismatch: got %f %f exp %f %f", real'(xy_hit.x), real'(xy_hit.y), exy[0][0], exy[0][1]);
        end
        void'(exy.pop_front());
      end
    end
    if (rz_valid && rz_ready) begin
      checks++;
      if (rz_hit.eoe) begin
        if (eoe_rz == 0) begin failures++; $display("unexpected rz token"); end
        else eoe_rz--;
      end else if (erz.size() == 0) begin failures++; $display("unexpected rz hit"); end
      else begin
        if (fabs(real'(rz_hit.r) - erz[0][0]) > 10.0 || fabs(real'(rz_hit.z) - erz[0][1]) > 1.0) begin
          failures++; $display("rz mismatch: got %f %f exp %f %f", real'(rz_hit.r), real'(rz_hit.z), erz[0][0], erz[0][1]);
        end
        void'(erz.pop_front());
      end
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    if (exy.size() != 0 || erz.size() != 0 || eoe_xy != 0 || eoe_rz != 0) begin
      failures++; $display("missing outputs: %0d %0d %0d %0d", exy.size(), erz.size(), eoe_xy, eoe_rz);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
