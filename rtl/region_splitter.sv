// region_splitter -- distributes the detector hits over the phi regions.
//
// The tracker is cut into NREGIONS wedges in phi, each served by its own crate. A region
// takes the hits of its wedge plus OVERLAP channels on each side, so that a track near a
// boundary is still found whole in one region; a hit in an overlap goes to both
// neighbours. Phi is circular: the last region's overlap wraps to channel 0. The
// end-of-event word of each layer goes to every region.
//
// Splitting into 8 overlapping phi regions follows the design. Cutting in raw channel
// number (equal wedges of 2^CH_W / NREGIONS channels) and the OVERLAP width are this
// implementation's choices.
//
// Timing: combinational. A hit is passed when every region it goes to is ready
// (in_ready), so all copies leave in the same clock.
module region_splitter
  import ftk_pkg::*;
#(
  parameter int NREGIONS = 8,
  parameter int OVERLAP  = 256  // channels shared with each neighbour
) (
  input  logic     [NLAYERS-1:0]                in_valid,
  output logic     [NLAYERS-1:0]                in_ready,
  input  logic     [NLAYERS-1:0]                in_eoe,
  input  raw_hit_t [NLAYERS-1:0]                in_hit,
  output logic     [NREGIONS-1:0][NLAYERS-1:0]  out_valid,
  input  logic     [NREGIONS-1:0][NLAYERS-1:0]  out_ready,
  output logic     [NREGIONS-1:0][NLAYERS-1:0]  out_eoe,
  output raw_hit_t [NREGIONS-1:0][NLAYERS-1:0]  out_hit
);

  localparam int WEDGE = (1 << CH_W) / NREGIONS;

  logic [NREGIONS-1:0][NLAYERS-1:0] dest;

  always_comb begin
    for (int l = 0; l < NLAYERS; l++) begin
      in_ready[l] = 1'b1;
      for (int r = 0; r < NREGIONS; r++) begin
        logic [CH_W-1:0] d;
        d = in_hit[l].phi - CH_W'(r * WEDGE) + CH_W'(OVERLAP);
        dest[r][l] = in_eoe[l] || (int'(d) < WEDGE + 2 * OVERLAP);
        if (dest[r][l] && !out_ready[r][l]) in_ready[l] = 1'b0;
      end
      for (int r = 0; r < NREGIONS; r++) begin
        out_valid[r][l] = in_valid[l] && in_ready[l] && dest[r][l];
        out_eoe[r][l]   = in_eoe[l];
        out_hit[r][l]   = in_hit[l];
      end
    end
  end

endmodule
