// cluster_finder -- one-layer cluster finder of the Data Formatter.
//
// Raw hits of one layer arrive as a valid/ready stream, sorted by (eta, phi) channel,
// and an event ends with an end-of-event word (in_eoe = 1). Hits on consecutive phi
// channels with the same eta channel form one cluster. A cluster is emitted when the
// next hit does not continue it, or at end of event. Its coordinate is the centroid in
// half-channel units: phi = first + last channel, eta = 2 * eta channel.
//
// That clustering is done in the Data Formatter, per layer, follows the design; the
// one-dimensional adjacency rule, the sorted input and the centroid format are this
// implementation's choices.
//
// Timing: one input word per clock. An end-of-event word that closes an open cluster
// is taken at once but leaves in two clocks (cluster, then end-of-event), and the next
// word waits one clock. The output is a register; in_ready
// falls only while the output register is full and not taken.
module cluster_finder
  import ftk_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  logic     in_eoe,
  input  raw_hit_t in_hit,
  output logic     out_valid,
  input  logic     out_ready,
  output logic     out_eoe,
  output hit_t     out_hit
);

  logic            open_q, eoe_pend_q;
  logic [CH_W-1:0] first_q, last_q, eta_q;
  logic            can_out, adjacent;

  assign can_out  = !out_valid || out_ready;
  assign adjacent = open_q && (in_hit.eta == eta_q) && (in_hit.phi == last_q + CH_W'(1));

  // A word is consumed unless it must push out a cluster while the output is full, or
  // the end-of-event word of the previous event is still waiting to leave. in_ready
  // does not look at in_valid, so an upstream fan-out may wait for it.
  always_comb begin
    if (eoe_pend_q)     in_ready = 1'b0;
    else if (in_eoe)    in_ready = can_out;
    else if (adjacent)  in_ready = 1'b1;
    else if (open_q)    in_ready = can_out;
    else                in_ready = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q     <= 1'b0;
      eoe_pend_q <= 1'b0;
      first_q    <= '0;
      last_q     <= '0;
      eta_q      <= '0;
      out_valid  <= 1'b0;
      out_eoe    <= 1'b0;
      out_hit    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (eoe_pend_q) begin
        // second clock of an end of event that closed a cluster
        if (can_out) begin
          out_valid  <= 1'b1;
          out_eoe    <= 1'b1;
          out_hit    <= '0;
          eoe_pend_q <= 1'b0;
        end
      end else if (in_valid && in_ready) begin
        if (in_eoe) begin
          out_valid <= 1'b1;
          if (open_q) begin
            out_eoe     <= 1'b0;
            out_hit.phi <= COORD_W'(first_q) + COORD_W'(last_q);
            out_hit.eta <= {eta_q, 1'b0};
            open_q      <= 1'b0;
            eoe_pend_q  <= 1'b1;
          end else begin
            out_eoe <= 1'b1;
            out_hit <= '0;
          end
        end else if (adjacent) begin
          last_q <= in_hit.phi;
        end else begin
          if (open_q) begin
            out_valid   <= 1'b1;
            out_eoe     <= 1'b0;
            out_hit.phi <= COORD_W'(first_q) + COORD_W'(last_q);
            out_hit.eta <= {eta_q, 1'b0};
          end
          open_q  <= 1'b1;
          first_q <= in_hit.phi;
          last_q  <= in_hit.phi;
          eta_q   <= in_hit.eta;
        end
      end
    end
  end

endmodule
