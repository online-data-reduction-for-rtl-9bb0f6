// tb_conformal_transform -- self-checking test of the conformal transform.
// Random hits at SVD radii (38..140 mm) in all quadrants, plus end-of-event tokens. The
// expected outputs a = 2*y*2^32/r^2 and b = -2*x*2^32/r^2 are computed in floating point;
// the hardware truncates each quotient, so one quotient LSB (2 output LSBs) is allowed.
// The time from taking a hit to presenting its result is checked against the 55 cycles the
// block documents, and a hit is never taken while a result is pending.
// The expected values follow the method's equations as this design implements them; the
// stimulus, the tolerances and the number formats checked are this design's own choices.
`timescale 1ns/1ps
module tb_conformal_transform;
  import datcon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  hit_xy_t in_hit;
  hough_in_t out_h;

  conformal_transform dut (.*);

  int checks = 0, failures = 0;
  real ea[$], eb[$];
  int  etok[$];           // 1 for a token, 0 for a hit, in order
  longint cyc = 0, t_acc[$];

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  always @(posedge clk) cyc++;

  initial begin
    in_valid = 0; in_hit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      hit_xy_t h;
      h = '0;
      if (n % 25 == 24) h.eoe = 1;
      else begin
        real r, ang, x, y;
        r   = 3800.0 + ($urandom_range(0, 10000) / 10000.0) * 10200.0;
        ang = ($urandom_range(0, 65535) / 65536.0) * 6.283185307179586;
        x = $floor(r * $cos(ang)); y = $floor(r * $sin(ang));
        h.layer = 2'($urandom_range(0, 3));
        h.x = coord_t'($rtoi(x)); h.y = coord_t'($rtoi(y));
        ea.push_back( 2.0 * y * 4294967296.0 / (x * x + y * y));
        eb.push_back(-2.0 * x * 4294967296.0 / (x * x + y * y));
      end
      etok.push_back(h.eoe ? 1 : 0);
      @(negedge clk);
      in_valid = 1; in_hit = h;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      t_acc.push_back(cyc);
      #1 in_valid = 0;
    end
  end

  always @(posedge clk) out_ready <= ($urandom_range(0, 4) != 0);
  initial out_ready = 1;

  logic prev_valid = 0;
  always @(posedge clk) begin
    prev_valid <= out_valid && !out_ready;
    if (rst_n && out_valid && !prev_valid) begin
      // a new result appears
      if (etok.size() > 0 && etok[0] == 0 && t_acc.size() > 0) begin
        checks++;
        if (cyc - t_acc[0] != 55) begin
          failures++; $display("latency %0d, expected 55", cyc - t_acc[0]);
        end
      end
    end
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (etok.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        if (out_h.eoe != etok[0][0]) begin failures++; $display("token mismatch"); end
        else if (!out_h.eoe) begin
          if (fabs(real'(out_h.a) - ea[0]) > 2.0 || fabs(real'(out_h.b) - eb[0]) > 2.0) begin
            failures++; $display("mismatch: got %f %f exp %f %f", real'(out_h.a), real'(out_h.b), ea[0], eb[0]);
          end
          void'(ea.pop_front()); void'(eb.pop_front());
        end
        void'(etok.pop_front());
        void'(t_acc.pop_front());
        if (etok.size() == 0 && ea.size() == 0) begin
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: %0d results missing", etok.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
