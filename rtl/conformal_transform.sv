// conformal_transform -- maps SVD hits in the x-y plane to conformal coordinates.
//
// For a hit (x, y) it computes r^2 = x^2 + y^2 and
//     x' = x / r^2,   y' = y / r^2.
// Circles through the origin (tracks from the interaction point, d0 = 0) become straight lines
// in (x', y'), which the Hough transform then finds. The outputs are scaled by 2^32 (per 10 um
// input LSB), which keeps about 20 significant bits for SVD radii of 39..135 mm.
//
// Structure: r^2 is formed with two multipliers, then two bit-serial dividers work on |x|*2^32
// and |y|*2^32 in parallel and the sign is restored at the end. A hit at r = 0 gives 0.
//
// Interface: valid/ready stream of hit_xy_t in, hough_in_t out with a = 2*y', b = -2*x' and
// the layer copied, which is the form the phi-rho Hough engine evaluates
// (a*cos(phi0) + b*sin(phi0) = rho; see hough_engine). End-of-event tokens pass through.
//
// Timing: a result is presented 55 cycles after its hit is taken (50 divide steps plus
// load, result and output registers); the next hit is taken when the result has left.
// Tokens pass in one cycle.
//
// The transformation itself is the method's; widths, scaling and the serial divider are this
// design's choices.
module conformal_transform
  import datcon_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  hit_xy_t   in_hit,
  output logic      out_valid,
  input  logic      out_ready,
  output hough_in_t out_h
);

  localparam int DW = 50;
  localparam int VW = 36;
  localparam int SCALE = 32;

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_OUT} state_t;
  state_t state;

  logic [1:0]    layer_q;
  logic          sx_q, sy_q;
  logic          start;
  logic [DW-1:0] nx, ny;
  logic [VW-1:0] r2;
  logic          busy_x, busy_y, done_x, done_y;
  logic [DW-1:0] qx, qy;
  logic [VW-1:0] remx, remy;
  logic          zero_q;

  logic [COORD_W-1:0] ax, ay;
  always_comb begin
    ax = in_hit.x[COORD_W-1] ? COORD_W'(-in_hit.x) : in_hit.x;
    ay = in_hit.y[COORD_W-1] ? COORD_W'(-in_hit.y) : in_hit.y;
    nx = DW'(ax) << SCALE;
    ny = DW'(ay) << SCALE;
    r2 = VW'(ax) * VW'(ax) + VW'(ay) * VW'(ay);
  end

  assign in_ready = (state == S_IDLE) && (!out_valid || out_ready);
  assign start    = in_valid && in_ready && !in_hit.eoe;

  seq_divider #(.DW(DW), .VW(VW)) u_div_x (
    .clk, .rst_n, .start, .dividend(nx), .divisor(r2),
    .busy(busy_x), .done(done_x), .quotient(qx), .remainder(remx));
  seq_divider #(.DW(DW), .VW(VW)) u_div_y (
    .clk, .rst_n, .start, .dividend(ny), .divisor(r2),
    .busy(busy_y), .done(done_y), .quotient(qy), .remainder(remy));

  // saturate a quotient to the conf_t range, apply the sign and the factor 2
  function automatic conf_t scale2(logic [DW-1:0] q, logic neg, logic zero);
    logic signed [DW+1:0] v;
    if (zero) return '0;
    v = $signed({2'b00, q});
    if (v > (1 <<< (CONF_W-2)) - 1) v = (1 <<< (CONF_W-2)) - 1;
    v = 2 * v;
    return conf_t'(neg ? -v : v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
      out_h     <= '0;
      layer_q   <= '0;
      sx_q      <= 1'b0;
      sy_q      <= 1'b0;
      zero_q    <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: if (in_valid && in_ready) begin
          if (in_hit.eoe) begin
            out_valid <= 1'b1;
            out_h     <= '{eoe: 1'b1, default: '0};
          end else begin
            layer_q <= in_hit.layer;
            sx_q    <= in_hit.x[COORD_W-1];
            sy_q    <= in_hit.y[COORD_W-1];
            zero_q  <= (r2 == '0);
            state   <= S_DIV;
          end
        end
        S_DIV: if (done_x) state <= S_OUT;
        S_OUT: if (!out_valid || out_ready) begin
          out_valid   <= 1'b1;
          out_h.eoe   <= 1'b0;
          out_h.layer <= layer_q;
          out_h.a     <= scale2(qy, sy_q, zero_q);    //  2 y'
          out_h.b     <= scale2(qx, !sx_q, zero_q);   // -2 x'
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
