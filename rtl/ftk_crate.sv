// ftk_crate -- the processing chain of one FTK phi region.
//
// Data flow, one stage per block, all linked by valid/ready streams framed by
// end-of-event words:
//   raw hits -> data_formatter (clusters, per layer)
//            -> data_organizer (hit buffer; superstrips to the AM)
//            -> am_bank (pattern matching; roads back to the organizer)
//            -> data_organizer (roads joined with their full-resolution hits)
//            -> track_fitter (linear fits of all hit combinations, chi-square cut)
//            -> hit_warrior (duplicate removal)
//            -> track_rob (read-out buffer for Level-2).
// The chain follows the design's data flow. The organizer's two banks let event n+1 be
// clustered and matched while the roads of event n are fitted, so the crate keeps taking
// events as long as the fitter keeps up.
//
// Configuration: the pattern bank (am_cfg_*) and the fit constants and chi-square cut
// (tf_cfg_*) are written before data taking. The statistic outputs count dropped hits,
// truncated superstrips, fits, chi-square rejects, removed duplicates and cleanup
// overflows since reset.
module ftk_crate
  import ftk_pkg::*;
#(
  parameter int NCHIPS     = 2,
  parameter int NPATT      = 10000,
  parameter int MISSED_MAX = 1,
  parameter int HIT_DEPTH  = 256,
  parameter int NSECTORS   = 1 << SECTOR_W,
  parameter int HW_DEPTH   = 32,
  parameter int MIN_SHARED = 6,
  parameter int ROB_DEPTH  = 512,
  localparam int AW = $clog2(NPATT),
  localparam int CW = (NCHIPS > 1) ? $clog2(NCHIPS) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // raw hits of this region, per layer
  input  logic     [NLAYERS-1:0]    raw_valid,
  output logic     [NLAYERS-1:0]    raw_ready,
  input  logic     [NLAYERS-1:0]    raw_eoe,
  input  raw_hit_t [NLAYERS-1:0]    raw_hit,
  // pattern bank loading
  input  logic                      am_cfg_we,
  input  logic [CW-1:0]             am_cfg_chip,
  input  logic [AW-1:0]             am_cfg_addr,
  input  pattern_t                  am_cfg_pat,
  // fit constants and chi-square cut
  input  logic                      tf_cfg_we,
  input  sector_t                   tf_cfg_sector,
  input  logic [3:0]                tf_cfg_row,
  input  logic [3:0]                tf_cfg_col,
  input  logic signed [COEF_W-1:0]  tf_cfg_val,
  input  logic                      tf_cfg_cut_we,
  input  logic [CHI2_W-1:0]         tf_cfg_cut,
  // tracks to Level-2
  output logic                      rob_valid,
  input  logic                      rob_ready,
  output track_word_t               rob_word,
  output logic [15:0]               rob_events,
  // statistics
  output logic [31:0]               drop_cnt,
  output logic [31:0]               trunc_cnt,
  output logic [31:0]               fit_cnt,
  output logic [31:0]               rej_cnt,
  output logic [31:0]               dup_cnt,
  output logic [31:0]               hw_ovf_cnt
);

  logic [NLAYERS-1:0] cl_valid, cl_ready, cl_eoe;
  hit_t [NLAYERS-1:0] cl_hit;
  logic [NLAYERS-1:0] ss_valid;
  ss_t  [NLAYERS-1:0] ss;
  logic               am_eoe_valid, am_eoe_ready;
  logic               road_valid, road_ready;
  road_word_t         road_word;
  logic               pk_valid, pk_ready;
  road_pkt_t          pk;
  logic               tr_valid, tr_ready;
  track_word_t        tr_word;
  logic               hw_valid, hw_ready;
  track_word_t        hw_word;

  data_formatter u_df (
    .clk, .rst_n,
    .raw_valid, .raw_ready, .raw_eoe, .raw_hit,
    .cl_valid, .cl_ready, .cl_eoe, .cl_hit
  );

  data_organizer #(.HIT_DEPTH(HIT_DEPTH)) u_do (
    .clk, .rst_n,
    .cl_valid, .cl_ready, .cl_eoe, .cl_hit,
    .am_ss_valid (ss_valid),
    .am_ss       (ss),
    .am_eoe_valid,
    .am_eoe_ready,
    .road_valid, .road_ready, .road_word,
    .pk_valid, .pk_ready, .pk,
    .drop_cnt, .trunc_cnt
  );

  am_bank #(.NCHIPS(NCHIPS), .NPATT(NPATT), .MISSED_MAX(MISSED_MAX)) u_am (
    .clk, .rst_n,
    .cfg_we   (am_cfg_we),
    .cfg_chip (am_cfg_chip),
    .cfg_addr (am_cfg_addr),
    .cfg_pat  (am_cfg_pat),
    .ss_valid, .ss,
    .eoe_valid(am_eoe_valid),
    .eoe_ready(am_eoe_ready),
    .rd_valid (road_valid),
    .rd_ready (road_ready),
    .rd_word  (road_word)
  );

  track_fitter #(.NSECTORS(NSECTORS)) u_tf (
    .clk, .rst_n,
    .cfg_we    (tf_cfg_we),
    .cfg_sector(tf_cfg_sector),
    .cfg_row   (tf_cfg_row),
    .cfg_col   (tf_cfg_col),
    .cfg_val   (tf_cfg_val),
    .cfg_cut_we(tf_cfg_cut_we),
    .cfg_cut   (tf_cfg_cut),
    .pk_valid, .pk_ready, .pk,
    .tr_valid, .tr_ready, .tr_word,
    .fit_cnt, .rej_cnt
  );

  hit_warrior #(.DEPTH(HW_DEPTH), .MIN_SHARED(MIN_SHARED)) u_hw (
    .clk, .rst_n,
    .in_valid (tr_valid),
    .in_ready (tr_ready),
    .in_word  (tr_word),
    .out_valid(hw_valid),
    .out_ready(hw_ready),
    .out_word (hw_word),
    .dup_cnt,
    .ovf_cnt  (hw_ovf_cnt)
  );

  track_rob #(.DEPTH(ROB_DEPTH)) u_rob (
    .clk, .rst_n,
    .in_valid (hw_valid),
    .in_ready (hw_ready),
    .in_word  (hw_word),
    .out_valid(rob_valid),
    .out_ready(rob_ready),
    .out_word (rob_word),
    .ev_cnt   (rob_events)
  );

endmodule
