// hit_warrior -- duplicate-track removal ("cleanup") after the track fitter.
//
// Overlapping roads and the combinations within them can yield the same track more than
// once. Tracks of an event are held in a buffer of DEPTH entries. Each incoming track is
// compared, in one clock, with every stored track: two tracks are duplicates when they
// share at least MIN_SHARED real hits (same layer, same coordinates). Of a group of
// duplicates only the one with the smallest chi-square is kept. At the end of the event
// the surviving tracks are sent on, followed by the end-of-event word.
//
// That duplicate tracks are removed before the read-out buffer follows the design; the
// shared-hit criterion, MIN_SHARED, DEPTH and keeping the best chi-square are this
// implementation's choices. A track arriving when the buffer is full is dropped and
// counted in ovf_cnt; removed duplicates are counted in dup_cnt.
//
// Timing: one track per clock in. The flush takes one clock per surviving track plus one
// for the end-of-event word; input is held off (in_ready low) meanwhile.
module hit_warrior
  import ftk_pkg::*;
#(
  parameter int DEPTH      = 32,
  parameter int MIN_SHARED = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  track_word_t  in_word,
  output logic         out_valid,
  input  logic         out_ready,
  output track_word_t  out_word,
  output logic [31:0]  dup_cnt,
  output logic [31:0]  ovf_cnt
);

  localparam int DW = $clog2(DEPTH);

  track_t           tbuf [DEPTH];
  logic [DEPTH-1:0] bv;
  logic             flush_q;

  logic [DEPTH-1:0] dup, better;
  logic             keep_old, free_found, occ_found;
  logic [DW-1:0]    free_idx, occ_idx;
  logic             in_fire, can_out;

  assign in_ready = !flush_q;
  assign in_fire  = in_valid && in_ready;
  assign can_out  = !out_valid || out_ready;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      int shared;
      shared = 0;
      for (int l = 0; l < NLAYERS; l++)
        if (tbuf[i].hitmap[l] && in_word.trk.hitmap[l] &&
            tbuf[i].hits[l] == in_word.trk.hits[l])
          shared++;
      dup[i]    = bv[i] && (shared >= MIN_SHARED);
      better[i] = dup[i] && (tbuf[i].chi2 <= in_word.trk.chi2);
    end
    keep_old = |better;
    free_found = 1'b0;
    free_idx   = '0;
    occ_found  = 1'b0;
    occ_idx    = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!(bv[i] && !dup[i])) begin
        free_found = 1'b1;
        free_idx   = DW'(i);
      end
      if (bv[i]) begin
        occ_found = 1'b1;
        occ_idx   = DW'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_fire && !in_word.eoe && !keep_old && free_found)
      tbuf[free_idx] <= in_word.trk;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bv        <= '0;
      flush_q   <= 1'b0;
      out_valid <= 1'b0;
      out_word  <= '0;
      dup_cnt   <= '0;
      ovf_cnt   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_fire) begin
        if (in_word.eoe) begin
          flush_q <= 1'b1;
        end else if (keep_old) begin
          dup_cnt <= dup_cnt + 1;
        end else begin
          dup_cnt <= dup_cnt + 32'($countones(dup));
          if (free_found) bv <= (bv & ~dup) | (DEPTH'(1) << free_idx);
          else            ovf_cnt <= ovf_cnt + 1;
        end
      end
      if (flush_q && can_out) begin
        out_valid <= 1'b1;
        if (occ_found) begin
          out_word.eoe <= 1'b0;
          out_word.trk <= tbuf[occ_idx];
          bv[occ_idx]  <= 1'b0;
        end else begin
          out_word     <= '0;
          out_word.eoe <= 1'b1;
          flush_q      <= 1'b0;
        end
      end
    end
  end

endmodule
