// data_formatter -- Data Formatter of one FTK region: cluster finding split by layer.
//
// The Data Formatter receives the raw pixel and SCT hits of its region and turns them
// into clusters, one independent cluster finder per detector layer, so that the 11
// layers are processed in parallel. Each layer is a valid/ready stream of raw hits that
// ends every event with an end-of-event word; the output is one stream of clustered
// hits per layer with the same end-of-event framing (see cluster_finder for the
// clustering rule and the centroid format).
//
// Clustering in the Data Formatter, split by layer, follows the design. The
// per-layer streams and their framing are this implementation's choices.
//
// Timing: each layer takes one raw hit per clock; a cluster leaves one clock after the
// hit that closes it.
module data_formatter
  import ftk_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic     [NLAYERS-1:0]  raw_valid,
  output logic     [NLAYERS-1:0]  raw_ready,
  input  logic     [NLAYERS-1:0]  raw_eoe,
  input  raw_hit_t [NLAYERS-1:0]  raw_hit,
  output logic     [NLAYERS-1:0]  cl_valid,
  input  logic     [NLAYERS-1:0]  cl_ready,
  output logic     [NLAYERS-1:0]  cl_eoe,
  output hit_t     [NLAYERS-1:0]  cl_hit
);

  for (genvar l = 0; l < NLAYERS; l++) begin : g_layer
    cluster_finder u_cf (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (raw_valid[l]),
      .in_ready (raw_ready[l]),
      .in_eoe   (raw_eoe[l]),
      .in_hit   (raw_hit[l]),
      .out_valid(cl_valid[l]),
      .out_ready(cl_ready[l]),
      .out_eoe  (cl_eoe[l]),
      .out_hit  (cl_hit[l])
    );
  end

endmodule
