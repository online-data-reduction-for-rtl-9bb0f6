// hough_engine -- Hough transformation of one event's hits with a layer-mask accumulator,
// a three-layer threshold and clustering of neighbouring cells.
//
// Every hit is a curve p(t) = A*cos(t) + B*sin(t) in the (t, p) Hough space. Hits of one
// track cross in one point, so the track shows up as a cell that curves from several detector
// layers pass through. Two instances serve the two projections of the track finding:
//   * phi-rho: A = 2y', B = -2x' from the conformal transform, t = phi0 over a full turn.
//     Then p = 2 sin(psi - phi0)/r is the signed curvature of the circle through the
//     origin that leaves it at azimuth phi0 (psi: azimuth of the hit). This is the usual
//     rho = 2(x' cos(phi) + y' sin(phi)) with phi = phi0 + 90 deg as the direction of the
//     circle centre. FWD_CHECK keeps only the half of the curve where the hit lies ahead of
//     the track (x' cos(phi0) + y' sin(phi0) > 0), so each track appears once.
//   * theta-s: A = r, B = z, t = alpha over a half turn; p = r cos(alpha) + z sin(alpha) is
//     the Hesse distance s of a straight line in the r-z plane.
//
// Accumulator: one bit per (layer, angle bin, parameter bin), stored as N_ANG rows of N_PAR
// bits per layer. A hit is voted into one angle row per cycle: p is evaluated at both edges
// of the angle bin and every parameter bin between the two values, widened by PAR_MARGIN on
// both sides, is marked. So the curve leaves no gaps however steep it is, and the margin
// absorbs the hit resolution: without it the three nearly parallel curves of the outer layers
// can miss a common cell for a bin or two and split one track into two candidates.
//
// Read-out, after the end-of-event token: the rows are scanned in angle order, one per cycle,
// and cleared as they are read. A cell passes when hits from at least MIN_LAYERS different
// layers marked it. Passing cells of one parameter column form runs along the angle axis.
// Each open run carries the bounding box (angle and parameter range) of the cluster it
// belongs to. Open runs of neighbouring columns form a segment; at every row the boxes of a
// segment are united and handed to each passing cell of the new row that touches the segment
// (same or diagonal neighbour column). A segment that no passing cell touches is a finished
// cluster and is reported as the centre of its box. So a band of 8-connected cells, the
// usual shape of a track's peak however it is tilted, gives one candidate (a band that forks
// can give two). After the last row an end-of-event token follows.
//
// Interface: hough_in_t stream in, hough_cand_t stream out (valid/ready).
// Timing: after reset N_ANG cycles clear the memory; each hit takes N_ANG cycles; the read-out
// takes N_ANG + 1 rows of one cycle each plus one cycle per candidate, then the token.
//
// Lint note: verilator reports ALWCOMBORDER on seg_f/cont_f and seg/cont. The forward pass
// reads element c-1 and the backward pass element c+1, each assigned in an earlier iteration
// of the same loop, so the logic is a combinational chain across the columns, not a latch.
//
// The transformation equations, the discrete Hough space and the requirement of hits in three
// different layers are the method's. The bin counts follow from the 0.7 deg binning visible in
// the angular resolution (512 bins per turn in phi, 256 per half turn in theta); the parameter
// ranges, the band voting and the cluster rule are this design's choices.
module hough_engine
  import datcon_pkg::*;
#(
  parameter int N_ANG      = 512,       // angle bins (at most 512)
  parameter bit FULL_TURN  = 1'b1,      // angle range: 1 = 360 deg, 0 = 180 deg
  parameter int N_PAR      = 64,        // parameter bins (at most 64)
  parameter int PAR_OFFSET = 1 << 19,   // bin = (p + PAR_OFFSET) >>> PAR_SHIFT
  parameter int PAR_SHIFT  = 14,
  parameter int PAR_MARGIN = 0,         // band widened by this much on both sides (raw p)
  parameter bit FWD_CHECK  = 1'b1,
  parameter int MIN_LAYERS = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  hough_in_t   in_h,
  output logic        out_valid,
  input  logic        out_ready,
  output hough_cand_t out_c,
  output logic        busy          // clearing, voting or reading out
);

  localparam int AW = 10;           // angle counter width, counts to N_ANG
  localparam int RW = $clog2(N_ANG); // accumulator row address width
  localparam int TAB_N = FULL_TURN ? N_ANG : 2 * N_ANG;   // table steps per turn

  // ------------------------------------------------------------ trig tables at bin edges
  typedef trig_t edge_tab_t [N_ANG+1];
  function automatic edge_tab_t make_tab(bit want_sin);
    edge_tab_t t;
    for (int k = 0; k <= N_ANG; k++) t[k] = want_sin ? qsin(k, TAB_N) : qcos(k, TAB_N);
    return t;
  endfunction
  localparam edge_tab_t ECOS = make_tab(1'b0);
  localparam edge_tab_t ESIN = make_tab(1'b1);

  // ------------------------------------------------------------ state
  typedef enum logic [2:0] {S_CLEAR, S_IDLE, S_VOTE, S_SCAN, S_EMIT, S_DONE} state_t;
  state_t state;

  logic [N_PAR-1:0] acc [SVD_LAYERS][N_ANG];
  logic [AW-1:0]    row;
  hough_in_t        hit_q;

  // per parameter column: is a run open, and the extent of the cluster it carries
  logic [N_PAR-1:0] col_active, end_mask;
  logic [8:0]       a_min [N_PAR];
  logic [8:0]       a_max [N_PAR];
  logic [5:0]       c_min [N_PAR];
  logic [5:0]       c_max [N_PAR];

  // ------------------------------------------------------------ vote band of one row
  logic signed [47:0] p0w, p1w, f0w, f1w;
  logic signed [47:0] b0, b1, lo, hi;
  logic               fwd_ok, in_range;
  logic [N_PAR-1:0]   vote_mask;
  localparam int TW = $clog2(N_ANG + 1); // table index width
  logic [TW-1:0]      ti0, ti1;

  always_comb begin
    ti0 = TW'(row);
    ti1 = TW'(row + 1'b1);
    p0w = (48'(hit_q.a) * 48'(ECOS[ti0]) + 48'(hit_q.b) * 48'(ESIN[ti0])) >>> TRIG_FRAC;
    p1w = (48'(hit_q.a) * 48'(ECOS[ti1])     + 48'(hit_q.b) * 48'(ESIN[ti1]))     >>> TRIG_FRAC;
    f0w = 48'(hit_q.a) * 48'(ESIN[ti0]) - 48'(hit_q.b) * 48'(ECOS[ti0]);
    f1w = 48'(hit_q.a) * 48'(ESIN[ti1])     - 48'(hit_q.b) * 48'(ECOS[ti1]);
    b0  = ((p0w < p1w) ? p0w : p1w) - 48'(PAR_MARGIN);
    b1  = ((p0w < p1w) ? p1w : p0w) + 48'(PAR_MARGIN);
    lo  = (b0 + 48'(PAR_OFFSET)) >>> PAR_SHIFT;
    hi  = (b1 + 48'(PAR_OFFSET)) >>> PAR_SHIFT;
    fwd_ok   = !FWD_CHECK || (f0w + f1w > 0);
    in_range = (hi >= 0) && (lo < 48'(N_PAR));
    for (int c = 0; c < N_PAR; c++)
      vote_mask[c] = fwd_ok && in_range && (48'(c) >= lo) && (48'(c) <= hi);
  end

  // ------------------------------------------------------------ threshold of one row
  logic [N_PAR-1:0] pass;
  always_comb begin
    for (int c = 0; c < N_PAR; c++) begin
      int n;
      n = 0;
      for (int l = 0; l < SVD_LAYERS; l++) n += int'(acc[l][row[RW-1:0]][c]);
      pass[c] = (row < AW'(N_ANG)) && (n >= MIN_LAYERS);
    end
  end

  // Cluster bookkeeping for the row being scanned. A segment is a horizontal run of columns
  // that passed in the previous row (open runs). Its boxes are united (forward and backward
  // pass), handed to every column of this row that touches it (same or diagonal neighbour),
  // and reported when no such column exists.
  typedef struct packed {
    logic [8:0] amin;
    logic [8:0] amax;
    logic [5:0] cmin;
    logic [5:0] cmax;
  } box_t;

  function automatic box_t unite(box_t x, box_t y);
    box_t u;
    u.amin = (x.amin < y.amin) ? x.amin : y.amin;
    u.amax = (x.amax > y.amax) ? x.amax : y.amax;
    u.cmin = (x.cmin < y.cmin) ? x.cmin : y.cmin;
    u.cmax = (x.cmax > y.cmax) ? x.cmax : y.cmax;
    return u;
  endfunction

  box_t             own   [N_PAR];
  box_t             seg_f [N_PAR];
  box_t             seg   [N_PAR];
  box_t             nbox  [N_PAR];
  logic [N_PAR-1:0] cont_f, cont, finish;

  always_comb begin
    for (int c = 0; c < N_PAR; c++)
      own[c] = '{amin: a_min[c], amax: a_max[c], cmin: c_min[c], cmax: c_max[c]};
    // forward pass: box and continuation of the segment up to column c
    for (int c = 0; c < N_PAR; c++) begin
      logic touch;
      touch = pass[c] || (c > 0 && pass[(c > 0) ? c - 1 : 0])
                      || (c < N_PAR - 1 && pass[(c < N_PAR - 1) ? c + 1 : c]);
      if (c > 0 && col_active[c] && col_active[(c > 0) ? c - 1 : 0]) begin
        seg_f[c]  = unite(seg_f[(c > 0) ? c - 1 : 0], own[c]);
        cont_f[c] = cont_f[(c > 0) ? c - 1 : 0] || touch;
      end else begin
        seg_f[c]  = own[c];
        cont_f[c] = touch;
      end
    end
    // backward pass: every column of a segment sees the whole segment
    for (int c = N_PAR - 1; c >= 0; c--) begin
      if (c < N_PAR - 1 && col_active[c] && col_active[(c < N_PAR - 1) ? c + 1 : c]) begin
        seg[c]  = seg[(c < N_PAR - 1) ? c + 1 : c];
        cont[c] = cont[(c < N_PAR - 1) ? c + 1 : c];
      end else begin
        seg[c]  = seg_f[c];
        cont[c] = cont_f[c];
      end
    end
    // new box of each passing column; finished segments, marked at their lowest column
    for (int c = 0; c < N_PAR; c++) begin
      nbox[c] = '{amin: row[8:0], amax: row[8:0], cmin: 6'(c), cmax: 6'(c)};
      if (col_active[c]) nbox[c] = unite(nbox[c], seg[c]);
      if (c > 0 && col_active[(c > 0) ? c - 1 : 0]) nbox[c] = unite(nbox[c], seg[(c > 0) ? c - 1 : 0]);
      if (c < N_PAR - 1 && col_active[(c < N_PAR - 1) ? c + 1 : c])
        nbox[c] = unite(nbox[c], seg[(c < N_PAR - 1) ? c + 1 : c]);
      finish[c] = col_active[c] && !cont[c] && !(c > 0 && col_active[(c > 0) ? c - 1 : 0]);
    end
  end

  // ------------------------------------------------------------ accumulator memory
  // cleared row by row after reset and while it is read out; written one row per vote cycle
  always_ff @(posedge clk) begin
    if (state == S_CLEAR || (state == S_SCAN && row < AW'(N_ANG)))
      for (int l = 0; l < SVD_LAYERS; l++) acc[l][row[RW-1:0]] <= '0;
    else if (state == S_VOTE)
      acc[hit_q.layer][row[RW-1:0]] <= acc[hit_q.layer][row[RW-1:0]] | vote_mask;
  end

  // ------------------------------------------------------------ lowest pending end
  logic [5:0] pick;
  always_comb begin
    pick = '0;
    for (int c = N_PAR - 1; c >= 0; c--) if (end_mask[c]) pick = 6'(c);
  end

  assign in_ready = (state == S_IDLE);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_CLEAR;
      row         <= '0;
      hit_q       <= '0;
      out_valid   <= 1'b0;
      out_c       <= '0;
      col_active  <= '0;
      end_mask    <= '0;
      for (int c = 0; c < N_PAR; c++) begin
        a_min[c] <= '0;
        a_max[c] <= '0;
        c_min[c] <= '0;
        c_max[c] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_CLEAR: begin
          if (row == AW'(N_ANG - 1)) begin
            row   <= '0;
            state <= S_IDLE;
          end else row <= row + 1'b1;
        end

        S_IDLE: if (in_valid) begin
          row <= '0;
          if (in_h.eoe) state <= S_SCAN;
          else begin
            hit_q <= in_h;
            state <= S_VOTE;
          end
        end

        S_VOTE: begin
          if (row == AW'(N_ANG - 1)) begin
            row   <= '0;
            state <= S_IDLE;
          end else row <= row + 1'b1;
        end

        S_SCAN: begin
          // row == N_ANG is a virtual empty row that closes all open runs
          for (int c = 0; c < N_PAR; c++) begin
            col_active[c] <= pass[c];
            if (pass[c]) begin
              a_min[c] <= nbox[c].amin;
              a_max[c] <= nbox[c].amax;
              c_min[c] <= nbox[c].cmin;
              c_max[c] <= nbox[c].cmax;
            end else if (finish[c]) begin
              a_min[c] <= seg[c].amin;
              a_max[c] <= seg[c].amax;
              c_min[c] <= seg[c].cmin;
              c_max[c] <= seg[c].cmax;
            end
          end
          end_mask <= finish;
          state <= S_EMIT;
        end

        S_EMIT: begin
          if (end_mask == '0) begin
            if (row == AW'(N_ANG)) state <= S_DONE;
            else begin
              row   <= row + 1'b1;
              state <= S_SCAN;
            end
          end else if (!out_valid || out_ready) begin
            out_valid      <= 1'b1;
            out_c.eoe      <= 1'b0;
            out_c.ang      <= 9'((10'(a_min[pick]) + 10'(a_max[pick])) >> 1);
            out_c.par      <= 6'((7'(c_min[pick]) + 7'(c_max[pick])) >> 1);
            end_mask[pick] <= 1'b0;
          end
        end

        S_DONE: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_c     <= '{eoe: 1'b1, default: '0};
          row       <= '0;
          state     <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (N_ANG <= 512 && N_PAR <= 64 && MIN_LAYERS >= 1 && MIN_LAYERS <= SVD_LAYERS)
      else $error("hough_engine: unsupported parameters");
  end

endmodule
