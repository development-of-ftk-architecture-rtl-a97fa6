// ftk_top -- Fast TracKer: hardware track reconstruction for the Level-2 trigger.
//
// The silicon hits of every Level-1-accepted event enter per layer (11 layers, raw
// channel numbers, one end-of-event word per layer and event). region_splitter sends
// each hit to the phi region(s) whose wedge, widened by an overlap, contains it, and
// NREGIONS identical ftk_crate instances reconstruct the tracks of their region in
// parallel. Each crate ends in its own track read-out buffer, read by Level-2 through
// rob_*[r].
//
// Configuration buses are shared by all crates and carry a region number: cfg_region
// selects the crate whose pattern bank (am_cfg_*) or fit constants (tf_cfg_*) are
// written. The statistic outputs are those of ftk_crate, per region.
module ftk_top
  import ftk_pkg::*;
#(
  parameter int NREGIONS   = 8,
  parameter int OVERLAP    = 256,
  parameter int NCHIPS     = 2,
  parameter int NPATT      = 10000,
  parameter int MISSED_MAX = 1,
  parameter int HIT_DEPTH  = 256,
  parameter int NSECTORS   = 1 << SECTOR_W,
  parameter int HW_DEPTH   = 32,
  parameter int MIN_SHARED = 6,
  parameter int ROB_DEPTH  = 512,
  localparam int AW = $clog2(NPATT),
  localparam int CW = (NCHIPS > 1) ? $clog2(NCHIPS) : 1,
  localparam int RW = (NREGIONS > 1) ? $clog2(NREGIONS) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // hits from the detector readout, per layer
  input  logic        [NLAYERS-1:0]          hit_valid,
  output logic        [NLAYERS-1:0]          hit_ready,
  input  logic        [NLAYERS-1:0]          hit_eoe,
  input  raw_hit_t    [NLAYERS-1:0]          hit,
  // configuration
  input  logic        [RW-1:0]               cfg_region,
  input  logic                               am_cfg_we,
  input  logic        [CW-1:0]               am_cfg_chip,
  input  logic        [AW-1:0]               am_cfg_addr,
  input  pattern_t                           am_cfg_pat,
  input  logic                               tf_cfg_we,
  input  sector_t                            tf_cfg_sector,
  input  logic        [3:0]                  tf_cfg_row,
  input  logic        [3:0]                  tf_cfg_col,
  input  logic signed [COEF_W-1:0]           tf_cfg_val,
  input  logic                               tf_cfg_cut_we,
  input  logic        [CHI2_W-1:0]           tf_cfg_cut,
  // track read-out buffers, one per region
  output logic        [NREGIONS-1:0]         rob_valid,
  input  logic        [NREGIONS-1:0]         rob_ready,
  output track_word_t [NREGIONS-1:0]         rob_word,
  output logic        [NREGIONS-1:0][15:0]   rob_events,
  // statistics, per region
  output logic        [NREGIONS-1:0][31:0]   drop_cnt,
  output logic        [NREGIONS-1:0][31:0]   trunc_cnt,
  output logic        [NREGIONS-1:0][31:0]   fit_cnt,
  output logic        [NREGIONS-1:0][31:0]   rej_cnt,
  output logic        [NREGIONS-1:0][31:0]   dup_cnt,
  output logic        [NREGIONS-1:0][31:0]   hw_ovf_cnt
);

  logic     [NREGIONS-1:0][NLAYERS-1:0] r_valid, r_ready, r_eoe;
  raw_hit_t [NREGIONS-1:0][NLAYERS-1:0] r_hit;

  region_splitter #(.NREGIONS(NREGIONS), .OVERLAP(OVERLAP)) u_split (
    .in_valid (hit_valid),
    .in_ready (hit_ready),
    .in_eoe   (hit_eoe),
    .in_hit   (hit),
    .out_valid(r_valid),
    .out_ready(r_ready),
    .out_eoe  (r_eoe),
    .out_hit  (r_hit)
  );

  for (genvar r = 0; r < NREGIONS; r++) begin : g_region
    ftk_crate #(
      .NCHIPS    (NCHIPS),
      .NPATT     (NPATT),
      .MISSED_MAX(MISSED_MAX),
      .HIT_DEPTH (HIT_DEPTH),
      .NSECTORS  (NSECTORS),
      .HW_DEPTH  (HW_DEPTH),
      .MIN_SHARED(MIN_SHARED),
      .ROB_DEPTH (ROB_DEPTH)
    ) u_crate (
      .clk, .rst_n,
      .raw_valid    (r_valid[r]),
      .raw_ready    (r_ready[r]),
      .raw_eoe      (r_eoe[r]),
      .raw_hit      (r_hit[r]),
      .am_cfg_we    (am_cfg_we && (int'(cfg_region) == r)),
      .am_cfg_chip,
      .am_cfg_addr,
      .am_cfg_pat,
      .tf_cfg_we    (tf_cfg_we && (int'(cfg_region) == r)),
      .tf_cfg_sector,
      .tf_cfg_row,
      .tf_cfg_col,
      .tf_cfg_val,
      .tf_cfg_cut_we(tf_cfg_cut_we && (int'(cfg_region) == r)),
      .tf_cfg_cut,
      .rob_valid    (rob_valid[r]),
      .rob_ready    (rob_ready[r]),
      .rob_word     (rob_word[r]),
      .rob_events   (rob_events[r]),
      .drop_cnt     (drop_cnt[r]),
      .trunc_cnt    (trunc_cnt[r]),
      .fit_cnt      (fit_cnt[r]),
      .rej_cnt      (rej_cnt[r]),
      .dup_cnt      (dup_cnt[r]),
      .hw_ovf_cnt   (hw_ovf_cnt[r])
    );
  end

endmodule
