// datcon_pkg -- types, geometry constants and lookup-table generators shared by the
// DATCON region-of-interest data path.
//
// Number formats (this design's choice; the track-finding method fixes none of them):
//   * lengths are signed fixed point with an LSB of 10 um (coord_t, 18 bits, +-1.31 m);
//   * trigonometric values are Q2.14 (16384 = 1.0);
//   * conformal coordinates x' = x/r^2 carry a scale of 2^32 per 1/LSB (conf_t, 24 bits);
//   * azimuthal angles of most probable hits are 16-bit phases (65536 = one turn).
//
// Geometry. The radii of the innermost (39 mm) and outermost (135 mm) SVD layer, the strip
// counts and pitches of the SVD sensors, the total of 172 SVD sensors and the PXD module size
// (250 x 768 pixels) with its pixel pitches come from the detector description the design
// serves. The radii of the middle SVD layers (80, 104 mm), the ladder counts per layer
// (7/10/12/16 SVD, 8/12 PXD), the sensors per ladder (2/3/4/5) and the PXD radii (14, 22 mm)
// are the usual Belle II values; sensors are modelled as flat, non-overlapping tiles of a
// ladder whose plane normal points at azimuth 2*pi*ladder/N.
//
// The cosine tables are built by constant functions at elaboration, so no table file exists.
package datcon_pkg;

  // ---------------------------------------------------------------- number formats
  localparam int COORD_W = 18;              // 10 um LSB
  localparam int CONF_W  = 24;              // x' * 2^32 (per 10 um)
  localparam int TRIG_W  = 16;              // Q2.14
  localparam int TRIG_FRAC = 14;

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic signed [CONF_W-1:0]  conf_t;
  typedef logic signed [TRIG_W-1:0]  trig_t;

  // ---------------------------------------------------------------- SVD geometry
  localparam int SVD_LAYERS = 4;            // layers 3..6 -> index 0..3
  localparam int SVD_P_STRIPS = 768;        // r-phi (p-side) strips per sensor

  localparam int SVD_RADIUS   [SVD_LAYERS] = '{3900, 8000, 10400, 13500};   // 10 um units
  localparam int SVD_LADDERS  [SVD_LAYERS] = '{7, 10, 12, 16};
  localparam int SVD_SENSORS  [SVD_LAYERS] = '{2, 3, 4, 5};
  localparam int SVD_P_PITCH  [SVD_LAYERS] = '{50, 75, 75, 75};             // um
  localparam int SVD_N_PITCH  [SVD_LAYERS] = '{160, 240, 240, 240};         // um
  localparam int SVD_N_STRIPS [SVD_LAYERS] = '{768, 512, 512, 512};
  localparam int SVD_SENSOR_LEN = 12288;    // 122.88 mm = 768 x 160 um = 512 x 240 um
  localparam int SVD_MAX_LADDERS = 16;

  // ---------------------------------------------------------------- PXD geometry
  localparam int PXD_LAYERS = 2;
  localparam int PXD_RADIUS  [PXD_LAYERS] = '{1400, 2200};   // 10 um units
  localparam int PXD_LADDERS [PXD_LAYERS] = '{8, 12};
  localparam int PXD_U_PIXELS = 250;        // 50 um pitch in r-phi
  localparam int PXD_V_PIXELS = 768;
  localparam int PXD_V_CENTRAL = 256;       // small-pitch pixels next to z = 0
  localparam int PXD_V_PITCH_C [PXD_LAYERS] = '{55, 65};     // um, central region
  localparam int PXD_V_PITCH_O = 70;        // um, forward/backward region

  // ---------------------------------------------------------------- ROI size
  localparam int ROI_U = 80;
  localparam int ROI_V = 120;

  // ---------------------------------------------------------------- stream payloads
  // Every stream carries an end-of-event token (eoe = 1, other fields unused) after the last
  // item of an event.
  typedef struct packed {
    logic       eoe;
    logic [1:0] layer;      // SVD layer 3..6 as 0..3
    logic [3:0] ladder;
    logic [2:0] sensor;
    logic       pside;      // 1: p-side (r-phi strips), 0: n-side (z strips)
    logic [9:0] strip;
  } svd_strip_t;

  typedef struct packed {
    logic        eoe;
    logic [1:0]  layer;
    logic [3:0]  ladder;
    logic [2:0]  sensor;
    logic        pside;
    logic [10:0] pos2;      // first + last strip: centre in half-strip units
    logic [4:0]  size;      // strips in the cluster, saturating
  } svd_cluster_t;

  typedef struct packed {
    logic       eoe;
    logic [1:0] layer;
    coord_t     x;
    coord_t     y;
  } hit_xy_t;

  typedef struct packed {
    logic       eoe;
    logic [1:0] layer;
    coord_t     r;
    coord_t     z;
  } hit_rz_t;

  // Hough input: the engine evaluates A*cos(t) + B*sin(t) over its angle range.
  typedef struct packed {
    logic       eoe;
    logic [1:0] layer;
    conf_t      a;
    conf_t      b;
  } hough_in_t;

  // Hough output: one cluster of cells over threshold, or the end-of-event token.
  typedef struct packed {
    logic       eoe;
    logic [8:0] ang;        // angle bin
    logic [5:0] par;        // curvature / distance bin
  } hough_cand_t;

  typedef struct packed {
    logic       eoe;
    logic [8:0] phi;        // phi0 bin (512 per turn)
    logic [5:0] kappa;      // signed curvature bin, 32 = straight
    logic [7:0] alpha;      // Hough angle bin of the r-z line (256 per half turn)
    logic [5:0] s;          // Hesse distance bin, 32 = through the origin
  } track3d_t;

  typedef struct packed {
    logic        eoe;
    logic        layer;     // PXD layer 1, 2 as 0, 1
    logic [15:0] psi;       // azimuth of the most probable hit, 65536 per turn
    coord_t      z;
  } mph_t;

  typedef struct packed {
    logic       eoe;
    logic       layer;
    logic [3:0] ladder;
    logic       fwd;        // 1: module at z >= 0, 0: module at z < 0
    logic [7:0] u_min;
    logic [7:0] u_max;
    logic [9:0] v_min;
    logic [9:0] v_max;
  } roi_t;

  // ---------------------------------------------------------------- table generators
  localparam real PI = 3.14159265358979323846;

  function automatic int round_real(real v);
    return $rtoi($floor(v + 0.5));
  endfunction

  // cos(2*pi*k/n) in Q2.14
  function automatic trig_t qcos(int k, int n);
    return trig_t'(round_real($cos(2.0 * PI * k / n) * 16384.0));
  endfunction

  function automatic trig_t qsin(int k, int n);
    return trig_t'(round_real($sin(2.0 * PI * k / n) * 16384.0));
  endfunction

endpackage
