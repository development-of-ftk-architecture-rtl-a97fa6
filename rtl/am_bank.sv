// am_bank -- pipelined array of Associative Memory chips serving one region.
//
// All NCHIPS chips listen to the same superstrip buses, so every stored pattern sees
// every superstrip of the event at the same time. Roads leave through a chain: chip k
// forwards the roads of chip k-1 before its own, and the last chip's output is the
// bank's road stream, closed by one end-of-event word per event. The pipelined array
// of AM boards follows the design; the number of chips per region is not given by it
// and NCHIPS = 2 is this implementation's choice.
//
// Interface: cfg_chip/cfg_addr select the pattern written by cfg_we. The end of event
// is accepted (eoe_ready) only when every chip has finished reading out the previous
// event. Road ids are global pattern numbers (chip * NPATT + address).
module am_bank
  import ftk_pkg::*;
#(
  parameter int NCHIPS     = 2,
  parameter int NPATT      = 10000,
  parameter int MISSED_MAX = 1,
  localparam int AW = $clog2(NPATT),
  localparam int CW = (NCHIPS > 1) ? $clog2(NCHIPS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_we,
  input  logic [CW-1:0]       cfg_chip,
  input  logic [AW-1:0]       cfg_addr,
  input  pattern_t            cfg_pat,
  input  logic [NLAYERS-1:0]  ss_valid,
  input  ss_t  [NLAYERS-1:0]  ss,
  input  logic                eoe_valid,
  output logic                eoe_ready,
  output logic                rd_valid,
  input  logic                rd_ready,
  output road_word_t          rd_word
);

  logic       [NCHIPS-1:0] c_eoe_ready;
  logic       [NCHIPS:0]   c_valid, c_ready;
  road_word_t [NCHIPS:0]   c_word;

  assign eoe_ready  = &c_eoe_ready;
  assign c_valid[0] = 1'b0;
  assign c_word[0]  = '0;

  for (genvar k = 0; k < NCHIPS; k++) begin : g_chip
    am_chip #(
      .NPATT     (NPATT),
      .CHIP_ID   (k),
      .FIRST     (k == 0),
      .MISSED_MAX(MISSED_MAX)
    ) u_chip (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg_we   (cfg_we && (int'(cfg_chip) == k)),
      .cfg_addr (cfg_addr),
      .cfg_pat  (cfg_pat),
      .ss_valid (ss_valid),
      .ss       (ss),
      .eoe_valid(eoe_valid && eoe_ready),
      .eoe_ready(c_eoe_ready[k]),
      .up_valid (c_valid[k]),
      .up_ready (c_ready[k]),
      .up_word  (c_word[k]),
      .rd_valid (c_valid[k+1]),
      .rd_ready (c_ready[k+1]),
      .rd_word  (c_word[k+1])
    );
  end

  assign rd_valid        = c_valid[NCHIPS];
  assign rd_word         = c_word[NCHIPS];
  assign c_ready[NCHIPS] = rd_ready;

endmodule
