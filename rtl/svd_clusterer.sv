// svd_clusterer -- joins neighbouring fired SVD strips into clusters.
//
// A charged particle usually fires two or three adjacent strips on each side of a
// double-sided strip sensor. This stage merges every run of consecutive strip IDs on the same
// sensor side into one cluster whose position is first + last strip, i.e. the run centre in
// half-strip units, and whose size is the number of strips (saturating at 31).
//
// Interface: valid/ready streams of svd_strip_t in and svd_cluster_t out. The input must be
// sorted by sensor side and strip ID within an event (the order a strip readout produces);
// each event ends with an end-of-event token, which flushes the open cluster and is passed on.
//
// Timing: one strip per cycle. A cluster leaves one cycle after the strip that closes it
// arrives; the end-of-event token costs one extra cycle when a cluster is still open.
//
// Merging neighbouring strip IDs is the method's first processing step; the stream format,
// the position encoding and the sorted-input requirement are this design's choices.
module svd_clusterer
  import datcon_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  svd_strip_t   in_strip,
  output logic         out_valid,
  input  logic         out_ready,
  output svd_cluster_t out_clu
);

  logic         pend_valid;
  svd_strip_t   pend_first;     // id fields and first strip of the open cluster
  logic [9:0]   pend_last;
  logic [4:0]   pend_size;

  logic can_out, accept, same_run, flush_only;

  assign can_out  = !out_valid || out_ready;
  assign same_run = pend_valid && !in_strip.eoe
                 && in_strip.layer  == pend_first.layer
                 && in_strip.ladder == pend_first.ladder
                 && in_strip.sensor == pend_first.sensor
                 && in_strip.pside  == pend_first.pside
                 && in_strip.strip  == pend_last + 10'd1;
  // An end-of-event token that finds an open cluster first flushes it, then is taken.
  assign flush_only = in_strip.eoe && pend_valid;
  assign in_ready   = can_out && !flush_only;
  assign accept     = in_valid && in_ready;

  function automatic svd_cluster_t make_cluster(svd_strip_t f, logic [9:0] last, logic [4:0] sz);
    svd_cluster_t c;
    c.eoe    = 1'b0;
    c.layer  = f.layer;
    c.ladder = f.ladder;
    c.sensor = f.sensor;
    c.pside  = f.pside;
    c.pos2   = {1'b0, f.strip} + {1'b0, last};
    c.size   = sz;
    return c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_clu    <= '0;
      pend_valid <= 1'b0;
      pend_first <= '0;
      pend_last  <= '0;
      pend_size  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && can_out && flush_only) begin
        out_valid  <= 1'b1;
        out_clu    <= make_cluster(pend_first, pend_last, pend_size);
        pend_valid <= 1'b0;
      end else if (accept) begin
        if (in_strip.eoe) begin
          out_valid <= 1'b1;
          out_clu   <= '0;
          out_clu.eoe <= 1'b1;
        end else if (same_run) begin
          pend_last <= in_strip.strip;
          if (pend_size != 5'd31) pend_size <= pend_size + 5'd1;
        end else begin
          if (pend_valid) begin
            out_valid <= 1'b1;
            out_clu   <= make_cluster(pend_first, pend_last, pend_size);
          end
          pend_valid <= 1'b1;
          pend_first <= in_strip;
          pend_last  <= in_strip.strip;
          pend_size  <= 5'd1;
        end
      end
    end
  end

  // Stream rule: while the consumer stalls, valid stays high and the payload stays put.
  logic         stalled_q;
  svd_cluster_t clu_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stalled_q <= 1'b0;
      clu_q     <= '0;
    end else begin
      stalled_q <= out_valid && !out_ready;
      clu_q     <= out_clu;
      if (stalled_q) assert (out_valid && out_clu == clu_q)
        else $error("svd_clusterer: output changed while stalled");
    end
  end

endmodule
