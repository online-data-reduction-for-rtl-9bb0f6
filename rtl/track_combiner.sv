// track_combiner -- combines the 2D track candidates of the r-phi and r-z projections into
// 3D tracks.
//
// The two Hough engines find tracks independently in the x-y plane (phi0, curvature) and in
// the r-z plane (theta, s). This block collects both candidate lists of an event in two
// buffers of MAX_TRK entries and, once both lists are complete (each ends with its
// end-of-event token), emits every pairing of an r-phi candidate with an r-z candidate as a
// 3D track, followed by an end-of-event token. Candidates beyond MAX_TRK in either list are
// dropped and counted; overflow pulses for each one dropped.
//
// The two 2D tracks carry no common label, so the pairing cannot be made unique from them
// alone; forming all pairs keeps every true combination at the cost of extra ROIs, which
// only lowers the data reduction, never the efficiency.
//
// Interface: two hough_cand_t input streams (valid/ready), one track3d_t output stream.
// Timing: candidates are taken one per cycle per input; pairs leave one per cycle.
//
// That 2D tracks are combined into 3D tracks is the method's; buffering, all-pairs
// combination and the list size are this design's choices.
module track_combiner
  import datcon_pkg::*;
#(
  parameter int MAX_TRK = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        xy_valid,
  output logic        xy_ready,
  input  hough_cand_t xy_cand,
  input  logic        rz_valid,
  output logic        rz_ready,
  input  hough_cand_t rz_cand,
  output logic        out_valid,
  input  logic        out_ready,
  output track3d_t    out_trk,
  output logic        overflow
);

  localparam int CW = $clog2(MAX_TRK + 1);

  typedef enum logic [1:0] {S_COLLECT, S_PAIR, S_EOE} state_t;
  state_t state;

  hough_cand_t xyb [MAX_TRK];
  hough_cand_t rzb [MAX_TRK];
  logic [CW-1:0] nxy, nrz, i, j;
  logic xy_done, rz_done;

  assign xy_ready = (state == S_COLLECT) && !xy_done;
  assign rz_ready = (state == S_COLLECT) && !rz_done;

  logic xy_take, rz_take;
  assign xy_take = xy_valid && xy_ready && !xy_cand.eoe;
  assign rz_take = rz_valid && rz_ready && !rz_cand.eoe;
  assign overflow = (xy_take && nxy == CW'(MAX_TRK)) || (rz_take && nrz == CW'(MAX_TRK));

  always_ff @(posedge clk) begin
    if (xy_take && nxy < CW'(MAX_TRK)) xyb[nxy[$clog2(MAX_TRK)-1:0]] <= xy_cand;
    if (rz_take && nrz < CW'(MAX_TRK)) rzb[nrz[$clog2(MAX_TRK)-1:0]] <= rz_cand;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_COLLECT;
      nxy       <= '0;
      nrz       <= '0;
      i         <= '0;
      j         <= '0;
      xy_done   <= 1'b0;
      rz_done   <= 1'b0;
      out_valid <= 1'b0;
      out_trk   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_COLLECT: begin
          if (xy_valid && xy_ready) begin
            if (xy_cand.eoe) xy_done <= 1'b1;
            else if (nxy < CW'(MAX_TRK)) nxy <= nxy + 1'b1;
          end
          if (rz_valid && rz_ready) begin
            if (rz_cand.eoe) rz_done <= 1'b1;
            else if (nrz < CW'(MAX_TRK)) nrz <= nrz + 1'b1;
          end
          if (xy_done && rz_done) begin
            i <= '0;
            j <= '0;
            state <= (nxy == '0 || nrz == '0) ? S_EOE : S_PAIR;
          end
        end
        S_PAIR: if (!out_valid || out_ready) begin
          out_valid     <= 1'b1;
          out_trk.eoe   <= 1'b0;
          out_trk.phi   <= xyb[i[$clog2(MAX_TRK)-1:0]].ang;
          out_trk.kappa <= xyb[i[$clog2(MAX_TRK)-1:0]].par;
          out_trk.alpha <= rzb[j[$clog2(MAX_TRK)-1:0]].ang[7:0];
          out_trk.s     <= rzb[j[$clog2(MAX_TRK)-1:0]].par;
          if (j == nrz - 1'b1) begin
            j <= '0;
            if (i == nxy - 1'b1) state <= S_EOE;
            else i <= i + 1'b1;
          end else j <= j + 1'b1;
        end
        S_EOE: if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_trk   <= '{eoe: 1'b1, default: '0};
          nxy       <= '0;
          nrz       <= '0;
          xy_done   <= 1'b0;
          rz_done   <= 1'b0;
          state     <= S_COLLECT;
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

endmodule
