// svd_hit_coord -- translates SVD clusters from sensor coordinates into global coordinates.
//
// p-side clusters measure the r-phi position u across the ladder. With the ladder plane at
// distance R from the beam axis and its normal at azimuth beta = 2*pi*ladder/N_ladders, the
// hit lies at
//     x = R*cos(beta) - u*sin(beta),   y = R*sin(beta) + u*cos(beta),
// with u = (pos2 - 767) * pitch / 2 measured from the sensor centre.
// n-side clusters measure z along the ladder: z = z_sensor + (pos2 - (N_n - 1)) * pitch / 2,
// with sensors tiled end to end and centred on z = 0. The n side alone does not know u, so
// the radius of an n-side hit is taken from the most recent p-side cluster of the same sensor
// in the same event, r = R + d - d^2/(2R) with d = u^2/(2R) (a series for sqrt(R^2 + u^2),
// within 40 um on the innermost layer), or R if there is none. A readout that sends the p-side strips of a sensor before its n-side strips thus
// gives exact radii whenever a sensor holds one particle.
//
// Interface: one svd_cluster_t input stream, two output streams: hit_xy_t for p-side hits
// (towards the r-phi track finder) and hit_rz_t for n-side hits (towards the r-z track
// finder). The end-of-event token is copied to both outputs and is taken only when both
// outputs can accept it. Lengths are in 10 um units.
//
// Timing: one cluster per cycle, one register stage.
//
// The split into an (x, y) path for p-side and a z path for n-side strips follows the
// method's data flow; the flat-ladder geometry model and the choice of R as the radius of an
// n-side hit are this design's simplifications.
module svd_hit_coord
  import datcon_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  svd_cluster_t in_clu,
  output logic         xy_valid,
  input  logic         xy_ready,
  output hit_xy_t      xy_hit,
  output logic         rz_valid,
  input  logic         rz_ready,
  output hit_rz_t      rz_hit
);

  // ladder normal direction, flattened: entry layer*16 + ladder
  typedef trig_t ladder_tab_t [SVD_LAYERS*SVD_MAX_LADDERS];

  function automatic ladder_tab_t make_tab(bit want_sin);
    ladder_tab_t t;
    for (int i = 0; i < SVD_LAYERS*SVD_MAX_LADDERS; i++) begin
      int n, k;
      n = SVD_LADDERS[i / SVD_MAX_LADDERS];
      k = i % SVD_MAX_LADDERS;
      t[i] = (k < n) ? (want_sin ? qsin(k, n) : qcos(k, n)) : trig_t'(0);
    end
    return t;
  endfunction

  localparam ladder_tab_t LCOS = make_tab(1'b0);
  localparam ladder_tab_t LSIN = make_tab(1'b1);

  // 2^24 / (2R) per layer for the radius correction
  localparam int INV2R [SVD_LAYERS] = '{round_real(16777216.0 / (2.0 * SVD_RADIUS[0])),
                                        round_real(16777216.0 / (2.0 * SVD_RADIUS[1])),
                                        round_real(16777216.0 / (2.0 * SVD_RADIUS[2])),
                                        round_real(16777216.0 / (2.0 * SVD_RADIUS[3]))};

  // last p-side cluster: sensor identity and u
  logic               lastp_valid;
  logic [8:0]         lastp_id;
  logic signed [31:0] lastp_u;

  // ------------------------------------------------------------ combinational geometry
  logic signed [31:0] radius, p_pitch, n_pitch, n_off, nsens;
  logic signed [31:0] u, v, zc;
  logic signed [47:0] xw, yw, du, du2;
  logic signed [31:0] rn;
  trig_t              cb, sb;

  always_comb begin
    radius  = SVD_RADIUS[in_clu.layer];
    p_pitch = SVD_P_PITCH[in_clu.layer];
    n_pitch = SVD_N_PITCH[in_clu.layer];
    n_off   = SVD_N_STRIPS[in_clu.layer] - 1;
    nsens   = SVD_SENSORS[in_clu.layer];
    cb      = LCOS[{in_clu.layer, in_clu.ladder}];
    sb      = LSIN[{in_clu.layer, in_clu.ladder}];
    // pitch in um, pos2 in half strips: (pos2 - off) * pitch / 2 um = ... / 20 in 10 um units
    u  = ((int'(in_clu.pos2) - 32'(SVD_P_STRIPS - 1)) * p_pitch) / 20;
    v  = ((int'(in_clu.pos2) - n_off) * n_pitch) / 20;
    zc = (2 * int'(in_clu.sensor) - (nsens - 1)) * (SVD_SENSOR_LEN / 2);
    xw = 48'(radius) * 48'(cb) - 48'(u) * 48'(sb);
    yw = 48'(radius) * 48'(sb) + 48'(u) * 48'(cb);
    du = (48'(lastp_u) * 48'(lastp_u) * 48'(INV2R[in_clu.layer])) >>> 24;
    du2 = (du * du * 48'(INV2R[in_clu.layer])) >>> 24;
    rn = (lastp_valid && lastp_id == {in_clu.layer, in_clu.ladder, in_clu.sensor})
         ? radius + 32'(du) - 32'(du2) : radius;
  end

  // ------------------------------------------------------------ output registers
  logic xy_free, rz_free;
  assign xy_free  = !xy_valid || xy_ready;
  assign rz_free  = !rz_valid || rz_ready;
  assign in_ready = in_clu.eoe ? (xy_free && rz_free) : (in_clu.pside ? xy_free : rz_free);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xy_valid <= 1'b0;
      rz_valid <= 1'b0;
      xy_hit   <= '0;
      rz_hit   <= '0;
      lastp_valid <= 1'b0;
      lastp_id    <= '0;
      lastp_u     <= '0;
    end else begin
      if (xy_valid && xy_ready) xy_valid <= 1'b0;
      if (rz_valid && rz_ready) rz_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_clu.eoe) begin
          xy_valid <= 1'b1;
          rz_valid <= 1'b1;
          xy_hit   <= '{eoe: 1'b1, default: '0};
          rz_hit   <= '{eoe: 1'b1, default: '0};
          lastp_valid <= 1'b0;
        end else if (in_clu.pside) begin
          xy_valid     <= 1'b1;
          xy_hit.eoe   <= 1'b0;
          xy_hit.layer <= in_clu.layer;
          xy_hit.x     <= coord_t'(xw >>> TRIG_FRAC);
          xy_hit.y     <= coord_t'(yw >>> TRIG_FRAC);
          lastp_valid  <= 1'b1;
          lastp_id     <= {in_clu.layer, in_clu.ladder, in_clu.sensor};
          lastp_u      <= u;
        end else begin
          rz_valid     <= 1'b1;
          rz_hit.eoe   <= 1'b0;
          rz_hit.layer <= in_clu.layer;
          rz_hit.r     <= coord_t'(rn);
          rz_hit.z     <= coord_t'(zc + v);
        end
      end
    end
  end

endmodule
