// datcon_top -- DATCON region-of-interest finder: from fired SVD strips to regions of
// interest (ROIs) on the PXD pixel detector.
//
// Data path, one event at a time, all stages joined by valid/ready streams that carry an
// end-of-event token behind the last item of each event:
//
//   strips -> svd_clusterer -> svd_hit_coord -+-> (x,y) -> conformal_transform -> hough_engine
//                                             |                                  (phi0, kappa)
//                                             +-> (r,z) ------------------------> hough_engine
//                                                                                 (alpha, s)
//   both candidate lists -> track_combiner -> mph_extrapolator -> roi_calc -> ROIs
//
// The r-phi Hough engine has 512 angle bins over a full turn and 64 signed-curvature bins of
// 2^14/2^32 per 10 um (0.38 /m each, |kappa| up to 12.2 /m); the r-z engine has 256 angle
// bins over a half turn and 64 bins of 1.28 mm in s (|s| up to 40.96 mm). Both require hits
// in at least three different SVD layers.
//
// Interface: svd_strip_t stream in (strips sorted by sensor side and strip within an event,
// then an end-of-event token), roi_t stream out (ROIs of the event, then an end-of-event
// token). trk_overflow pulses when a 2D track candidate is dropped because a candidate list
// is full; hough_busy shows either Hough engine working.
//
// The chain of processing steps is the method's; the stream protocol, number formats and
// geometry model are this design's (see the individual blocks).
module datcon_top
  import datcon_pkg::*;
#(
  parameter int MAX_TRK      = 32,
  parameter int PHI_MARGIN   = 8192,   // r-phi vote margin, half a curvature bin
  parameter int THETA_MARGIN = 128     // r-z vote margin, one s bin (1.28 mm)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       strip_valid,
  output logic       strip_ready,
  input  svd_strip_t strip,
  output logic       roi_valid,
  input  logic       roi_ready,
  output roi_t       roi,
  output logic       trk_overflow,
  output logic       hough_busy
);

  logic clu_valid, clu_ready;
  svd_cluster_t clu;
  logic xy_valid, xy_ready, rz_valid, rz_ready;
  hit_xy_t xy_hit;
  hit_rz_t rz_hit;
  logic cf_valid, cf_ready;
  hough_in_t cf_h, rz_h;
  logic cxy_valid, cxy_ready, crz_valid, crz_ready;
  hough_cand_t cxy, crz;
  logic trk_valid, trk_ready;
  track3d_t trk;
  logic mph_valid, mph_ready;
  mph_t mph;
  logic busy_phi, busy_theta;

  svd_clusterer u_clusterer (
    .clk, .rst_n,
    .in_valid(strip_valid), .in_ready(strip_ready), .in_strip(strip),
    .out_valid(clu_valid), .out_ready(clu_ready), .out_clu(clu));

  svd_hit_coord u_coord (
    .clk, .rst_n,
    .in_valid(clu_valid), .in_ready(clu_ready), .in_clu(clu),
    .xy_valid, .xy_ready, .xy_hit,
    .rz_valid, .rz_ready, .rz_hit);

  conformal_transform u_conformal (
    .clk, .rst_n,
    .in_valid(xy_valid), .in_ready(xy_ready), .in_hit(xy_hit),
    .out_valid(cf_valid), .out_ready(cf_ready), .out_h(cf_h));

  hough_engine #(
    .N_ANG(512), .FULL_TURN(1'b1), .N_PAR(64),
    .PAR_OFFSET(1 << 19), .PAR_SHIFT(14), .PAR_MARGIN(PHI_MARGIN), .FWD_CHECK(1'b1), .MIN_LAYERS(3)
  ) u_hough_phi (
    .clk, .rst_n,
    .in_valid(cf_valid), .in_ready(cf_ready), .in_h(cf_h),
    .out_valid(cxy_valid), .out_ready(cxy_ready), .out_c(cxy), .busy(busy_phi));

  // r-z hits enter the theta-s engine as A = r, B = z
  always_comb begin
    rz_h.eoe   = rz_hit.eoe;
    rz_h.layer = rz_hit.layer;
    rz_h.a     = conf_t'(rz_hit.r);
    rz_h.b     = conf_t'(rz_hit.z);
  end

  hough_engine #(
    .N_ANG(256), .FULL_TURN(1'b0), .N_PAR(64),
    .PAR_OFFSET(4096), .PAR_SHIFT(7), .PAR_MARGIN(THETA_MARGIN), .FWD_CHECK(1'b0), .MIN_LAYERS(3)
  ) u_hough_theta (
    .clk, .rst_n,
    .in_valid(rz_valid), .in_ready(rz_ready), .in_h(rz_h),
    .out_valid(crz_valid), .out_ready(crz_ready), .out_c(crz), .busy(busy_theta));

  track_combiner #(.MAX_TRK(MAX_TRK)) u_combiner (
    .clk, .rst_n,
    .xy_valid(cxy_valid), .xy_ready(cxy_ready), .xy_cand(cxy),
    .rz_valid(crz_valid), .rz_ready(crz_ready), .rz_cand(crz),
    .out_valid(trk_valid), .out_ready(trk_ready), .out_trk(trk),
    .overflow(trk_overflow));

  mph_extrapolator u_extrap (
    .clk, .rst_n,
    .in_valid(trk_valid), .in_ready(trk_ready), .in_trk(trk),
    .out_valid(mph_valid), .out_ready(mph_ready), .out_mph(mph));

  roi_calc u_roi (
    .clk, .rst_n,
    .in_valid(mph_valid), .in_ready(mph_ready), .in_mph(mph),
    .out_valid(roi_valid), .out_ready(roi_ready), .out_roi(roi));

  assign hough_busy = busy_phi || busy_theta;

endmodule
