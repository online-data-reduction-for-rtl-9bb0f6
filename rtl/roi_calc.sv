// roi_calc -- turns a most probable hit on a PXD layer into a region of interest in the
// pixel coordinates of one PXD module.
//
// The layer is divided in azimuth into its ladders (8 on layer 1, 12 on layer 2); ladder l
// covers the phase range [l/N, (l+1)/N) of a turn and its 250 pixel columns (u) are spread
// evenly over it. Along the beam each ladder holds two modules, one at z < 0 and one at
// z >= 0, each 768 pixel rows (v) counted from z = 0 outwards: 256 rows of 55 um (layer 1)
// or 65 um (layer 2) pitch, then 512 rows of 70 um. The ROI is a fixed window of
// 80 (u) x 120 (v) pixels, u-40..u+39 and v-60..v+59 around the MPH pixel, clipped at the
// module edges. When the window reaches past z = 0 (v < 60) its remainder lies on the other
// module of the ladder, and a second ROI is sent for it: same columns, rows 0..59-v.
//
// Interface: mph_t stream in, roi_t stream out (valid/ready); end-of-event tokens pass.
// Timing: one MPH per cycle, one register stage; an MPH that needs the second ROI holds the
// input for one more cycle.
//
// The ROI size, the module size and the pixel pitches are the method's; the cylindrical
// ladder model, the pixel numbering, the clipping at module edges and the second ROI across
// z = 0 are this design's.
module roi_calc
  import datcon_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  mph_t in_mph,
  output logic out_valid,
  input  logic out_ready,
  output roi_t out_roi
);

  // length of the central (small-pitch) region in 10 um units
  localparam int LC0 = PXD_V_CENTRAL * PXD_V_PITCH_C[0] / 10;
  localparam int LC1 = PXD_V_CENTRAL * PXD_V_PITCH_C[1] / 10;

  logic [19:0]        t;
  logic [3:0]         ladder;
  logic signed [31:0] u, v, az, lc, vc0, vc1, vo;
  roi_t               r, r2;
  logic               need2;
  logic               pend2;      // second ROI waiting
  roi_t               roi2;

  always_comb begin
    t      = 20'(in_mph.psi) * (in_mph.layer ? 20'(PXD_LADDERS[1]) : 20'(PXD_LADDERS[0]));
    ladder = t[19:16];
    u      = 32'((32'(t[15:0]) * PXD_U_PIXELS) >> 16);
    az     = in_mph.z[COORD_W-1] ? -32'(in_mph.z) : 32'(in_mph.z);
    lc     = in_mph.layer ? LC1 : LC0;
    vc0    = (az * 10) / PXD_V_PITCH_C[0];
    vc1    = (az * 10) / PXD_V_PITCH_C[1];
    vo     = PXD_V_CENTRAL + ((az - lc) * 10) / PXD_V_PITCH_O;
    if (az < lc) v = in_mph.layer ? vc1 : vc0;
    else         v = vo;
    if (v > PXD_V_PIXELS - 1) v = PXD_V_PIXELS - 1;

    r.eoe    = 1'b0;
    r.layer  = in_mph.layer;
    r.ladder = ladder;
    r.fwd    = !in_mph.z[COORD_W-1];
    r.u_min  = 8'((u < ROI_U / 2) ? 0 : u - ROI_U / 2);
    r.u_max  = 8'((u + ROI_U / 2 - 1 > PXD_U_PIXELS - 1) ? PXD_U_PIXELS - 1 : u + ROI_U / 2 - 1);
    r.v_min  = 10'((v < ROI_V / 2) ? 0 : v - ROI_V / 2);
    r.v_max  = 10'((v + ROI_V / 2 - 1 > PXD_V_PIXELS - 1) ? PXD_V_PIXELS - 1 : v + ROI_V / 2 - 1);

    need2    = (v < ROI_V / 2);
    r2       = r;
    r2.fwd   = !r.fwd;
    r2.v_min = '0;
    r2.v_max = 10'(ROI_V / 2 - 1 - v);
  end

  assign in_ready = (!out_valid || out_ready) && !pend2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_roi   <= '0;
      pend2     <= 1'b0;
      roi2      <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (pend2 && (!out_valid || out_ready)) begin
        out_valid <= 1'b1;
        out_roi   <= roi2;
        pend2     <= 1'b0;
      end else if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        if (in_mph.eoe) out_roi <= '{eoe: 1'b1, default: '0};
        else begin
          out_roi <= r;
          pend2   <= need2;
          roi2    <= r2;
        end
      end
    end
  end

endmodule
