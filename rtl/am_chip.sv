// am_chip -- Associative Memory chip: parallel pattern matching on superstrips.
//
// The chip stores NPATT patterns. A pattern is one superstrip per detector layer plus
// the sector number the fitter needs. Every pattern has its own comparison logic:
// whenever a superstrip arrives on a layer's bus, all patterns compare it with their
// own superstrip for that layer at once and set a per-layer match flag. At the end of
// the event a pattern whose flags cover all layers, or all but MISSED_MAX of them, is
// a road. Matching with one missing layer follows the design; the flag-per-layer
// mechanism is the classic associative-memory scheme.
//
// Road readout: at end of event the matched set and the layer flags are copied into a
// readout register and the match flags are cleared, so the next event's superstrips can
// enter while the roads of this one are read out (one road per clock, lowest pattern
// address first). Chips form a pipeline: a chip passes on the roads of the chip
// before it (port up_*) ahead of its own, and sends the end-of-event word only once
// its own roads are out and the upstream end-of-event word has arrived (FIRST chips
// need no upstream). The road carries the stored superstrips and sector, so the
// Data Organizer needs no second copy of the pattern bank; this is a choice of this
// implementation.
//
// Interface: cfg_* writes pattern cfg_addr; patterns never written do not match (cleared
// at reset). ss_valid/ss: one superstrip per layer per clock, always accepted.
// eoe_valid/eoe_ready: end of event, accepted when the previous event's readout is done.
// up_* and rd_*: valid/ready road streams of road_word_t.
module am_chip
  import ftk_pkg::*;
#(
  parameter int NPATT      = 10000,  // patterns per chip (90 nm standard-cell figure)
  parameter int CHIP_ID    = 0,      // position in the pipeline; road id = CHIP_ID*NPATT + address
  parameter bit FIRST      = 1'b1,   // no upstream chip
  parameter int MISSED_MAX = 1,      // layers a road may miss
  localparam int AW = $clog2(NPATT)
) (
  input  logic                clk,
  input  logic                rst_n,
  // pattern bank loading
  input  logic                cfg_we,
  input  logic [AW-1:0]       cfg_addr,
  input  pattern_t            cfg_pat,
  // superstrip buses
  input  logic [NLAYERS-1:0]  ss_valid,
  input  ss_t  [NLAYERS-1:0]  ss,
  input  logic                eoe_valid,
  output logic                eoe_ready,
  // roads from the previous chip
  input  logic                up_valid,
  output logic                up_ready,
  input  road_word_t          up_word,
  // roads out
  output logic                rd_valid,
  input  logic                rd_ready,
  output road_word_t          rd_word
);

  pattern_t            pat_mem [NPATT];
  logic [NPATT-1:0]    pat_ok;
  logic [NLAYERS-1:0]  match_q [NPATT];
  logic [NLAYERS-1:0]  rmap_q  [NPATT];
  logic [NPATT-1:0]    rvec_q;
  logic                pend_q;

  logic                eoe_fire, can_out, loc_found, take_up, take_loc, send_eoe;
  logic [AW-1:0]       loc_idx;

  assign eoe_ready = !pend_q;
  assign eoe_fire  = eoe_valid && eoe_ready;
  assign can_out   = !rd_valid || rd_ready;

  // Lowest pending road.
  always_comb begin
    loc_found = 1'b0;
    loc_idx   = '0;
    for (int p = NPATT - 1; p >= 0; p--)
      if (rvec_q[p]) begin
        loc_found = 1'b1;
        loc_idx   = AW'(p);
      end
  end

  assign take_up  = can_out && !FIRST && up_valid && !up_word.eoe;
  assign take_loc = can_out && !take_up && loc_found;
  assign send_eoe = can_out && pend_q && !loc_found && !take_up &&
                    (FIRST || (up_valid && up_word.eoe));
  assign up_ready = take_up || (send_eoe && !FIRST);

  // Pattern store.
  always_ff @(posedge clk) begin
    if (cfg_we) pat_mem[cfg_addr] <= cfg_pat;
  end

  // Comparison logic of every pattern, and the end-of-event capture.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= 1'b0;
      for (int p = 0; p < NPATT; p++) begin
        pat_ok[p]  <= 1'b0;
        rvec_q[p]  <= 1'b0;
        match_q[p] <= '0;
        rmap_q[p]  <= '0;
      end
    end else begin
      if (cfg_we) pat_ok[cfg_addr] <= 1'b1;
      if (eoe_fire || (|ss_valid)) begin
        for (int p = 0; p < NPATT; p++) begin
          logic [NLAYERS-1:0] now;
          for (int l = 0; l < NLAYERS; l++)
            now[l] = ss_valid[l] && (pat_mem[p].ss[l] == ss[l]);
          if (eoe_fire) begin
            // Superstrips in the end-of-event clock already belong to the next event.
            rmap_q[p] <= match_q[p];
            rvec_q[p] <= pat_ok[p] && ($countones(match_q[p]) >= NLAYERS - MISSED_MAX);
            match_q[p] <= now;
          end else begin
            match_q[p] <= match_q[p] | now;
          end
        end
        if (eoe_fire) pend_q <= 1'b1;
      end
      if (take_loc) rvec_q[loc_idx] <= 1'b0;
      if (send_eoe) pend_q <= 1'b0;
    end
  end

  // Output register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_word  <= '0;
    end else if (can_out) begin
      rd_valid <= take_up || take_loc || send_eoe;
      if (take_up) begin
        rd_word <= up_word;
      end else if (take_loc) begin
        rd_word.eoe         <= 1'b0;
        rd_word.road.id     <= road_id_t'(CHIP_ID * NPATT + int'(loc_idx));
        rd_word.road.sector <= pat_mem[loc_idx].sector;
        rd_word.road.hitmap <= rmap_q[loc_idx];
        rd_word.road.ss     <= pat_mem[loc_idx].ss;
      end else if (send_eoe) begin
        rd_word     <= '0;
        rd_word.eoe <= 1'b1;
      end
    end
  end

  // A road address always names a written pattern.
  a_road_written: assert property (@(posedge clk) disable iff (!rst_n)
    take_loc |-> pat_ok[loc_idx]);

endmodule
