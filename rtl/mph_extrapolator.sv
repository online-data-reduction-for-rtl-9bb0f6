// mph_extrapolator -- extrapolates each 3D track to the two PXD layers and computes the
// most probable hit (MPH) there.
//
// x-y plane: the track is the circle through the origin that leaves it at azimuth phi0 with
// signed curvature kappa. At radius R it lies at azimuth
//     psi = phi0 + asin(R*kappa/2) ~ phi0 + R*kappa/2,
// computed from the centres of the phi0 and kappa bins. The small-angle form is exact to
// 0.4 mrad over the curvature range (about 9 um at 22 mm, below the pixel pitch).
// r-z plane: the track is the straight line r*cos(alpha) + z*sin(alpha) = s, so at r = R
//     z = s / sin(alpha) - R * cot(alpha),
// with 1/sin and cot of the alpha bin centres held in two 256-entry tables (Q12) that are
// computed at elaboration. z saturates at the coordinate range.
//
// Interface: track3d_t stream in, mph_t stream out; per track the MPH on PXD layer 1, then on
// layer 2. End-of-event tokens pass through. Timing: two cycles per track.
//
// Extrapolating the 3D tracks to the PXD layers to obtain the MPHs is the method's; treating
// each PXD layer as a cylinder of fixed radius and the fixed-point forms are this design's.
module mph_extrapolator
  import datcon_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  track3d_t in_trk,
  output logic     out_valid,
  input  logic     out_ready,
  output mph_t     out_mph
);

  localparam int N_ALPHA = 256;
  typedef logic signed [23:0] q12_t;
  typedef q12_t alpha_tab_t [N_ALPHA];

  function automatic alpha_tab_t make_tab(bit want_cot);
    alpha_tab_t t;
    for (int k = 0; k < N_ALPHA; k++) begin
      real a;
      a = PI * (k + 0.5) / N_ALPHA;
      t[k] = q12_t'(round_real((want_cot ? $cos(a) / $sin(a) : 1.0 / $sin(a)) * 4096.0));
    end
    return t;
  endfunction
  localparam alpha_tab_t CSC = make_tab(1'b0);
  localparam alpha_tab_t COT = make_tab(1'b1);

  // psi increment per unit of (2*kappa_bin - 63): R*256/(32*pi), applied with >>> 8
  localparam int KPH [PXD_LAYERS] = '{round_real(PXD_RADIUS[0] * 256.0 / (32.0 * PI)),
                                      round_real(PXD_RADIUS[1] * 256.0 / (32.0 * PI))};

  logic layer;          // 0 for PXD layer 1, 1 for layer 2
  logic can_out;
  assign can_out  = !out_valid || out_ready;
  assign in_ready = can_out && (in_trk.eoe || layer);

  logic signed [31:0] dpsi, s_c, rl, zr;
  logic signed [55:0] zw;
  logic [15:0]        psi;
  always_comb begin
    rl   = PXD_RADIUS[layer];
    dpsi = ((2 * int'(in_trk.kappa) - 63) * KPH[layer]) >>> 8;
    psi  = 16'({in_trk.phi, 7'd64} + 16'(dpsi));
    s_c  = (int'(in_trk.s) - 32) * 128 + 64;
    zw   = (56'(s_c) * 56'(CSC[in_trk.alpha]) - 56'(rl) * 56'(COT[in_trk.alpha])) >>> 12;
    if (zw > 56'((1 <<< (COORD_W-1)) - 1))  zr = (1 <<< (COORD_W-1)) - 1;
    else if (zw < -56'(1 <<< (COORD_W-1)))  zr = -(1 <<< (COORD_W-1));
    else                                    zr = 32'(zw);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_mph   <= '0;
      layer     <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && can_out) begin
        out_valid <= 1'b1;
        if (in_trk.eoe) begin
          out_mph <= '{eoe: 1'b1, default: '0};
          layer   <= 1'b0;
        end else begin
          out_mph.eoe   <= 1'b0;
          out_mph.layer <= layer;
          out_mph.psi   <= psi;
          out_mph.z     <= coord_t'(zr);
          layer         <= !layer;
        end
      end
    end
  end

endmodule
