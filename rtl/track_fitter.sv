// track_fitter -- linearised track fitter of one FTK region.
//
// A road packet from the Data Organizer holds, per layer, the full-resolution hits that
// fell into the road's superstrip. Because a superstrip can hold several hits, every
// combination (one hit per layer) is fitted: a combination generator steps through them
// like an odometer, one per clock. A layer with no hit (the road matched with a missing
// layer) uses the centre of the road's superstrip instead; that substitute is this
// implementation's choice.
//
// The fit is the design's linear approximation: within a sector every result is a
// scalar product of the 14 hit coordinates x_j with precomputed constants,
//     r_i = sum_j c_ij * x_j + q_i ,   i = 0..13.
// Rows 0..4 are the five helix parameters. Rows 5..13 are the nine constraints a good
// track satisfies (14 coordinates minus 5 parameters); the sum of their squares is the
// fit chi-square. Computing chi-square from such constraint rows is this
// implementation's reading of "a set of scalar products". A track passes when chi2 <=
// the chi2 cut register and is sent on; others are dropped and counted.
//
// Fixed point: c_ij are signed COEF_W-bit numbers with FRAC_W fraction bits, q_i are
// integers in output units, results are truncated toward minus infinity. Constraint
// residuals saturate to CHI_W bits before squaring.
//
// Timing: fully pipelined, one fit per clock, five clocks from the combination leaving
// the generator to the track register. The whole pipeline stalls while the output is
// full and not taken. End-of-event packets pass through the pipeline in order.
//
// Interface: cfg_we writes constant (cfg_sector, cfg_row, cfg_col), cfg_col = NCOORD
// being q; cfg_cut_we loads the chi2 cut.
module track_fitter
  import ftk_pkg::*;
#(
  parameter int NSECTORS = 1 << SECTOR_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  sector_t                   cfg_sector,
  input  logic [3:0]                cfg_row,
  input  logic [3:0]                cfg_col,
  input  logic signed [COEF_W-1:0]  cfg_val,
  input  logic                      cfg_cut_we,
  input  logic [CHI2_W-1:0]         cfg_cut,
  input  logic                      pk_valid,
  output logic                      pk_ready,
  input  road_pkt_t                 pk,
  output logic                      tr_valid,
  input  logic                      tr_ready,
  output track_word_t               tr_word,
  output logic [31:0]               fit_cnt,
  output logic [31:0]               rej_cnt
);

  localparam int PROD_W = COEF_W + COORD_W + 1;

  logic signed [COEF_W-1:0] cmem [NSECTORS][NROWS][NCOORD+1];
  logic [CHI2_W-1:0]        cut_q;

  always_ff @(posedge clk) begin
    if (cfg_we) cmem[cfg_sector][cfg_row][cfg_col] <= cfg_val;
  end

  logic en;
  assign en = !tr_valid || tr_ready;

  // --- combination generator -------------------------------------------------------
  road_pkt_t                     cur;
  logic                          busy;
  logic [NLAYERS-1:0][HPS_W-1:0] idx;
  logic                          last_comb;
  logic [NLAYERS-1:0][HPS_W-1:0] idx_nx;
  track_word_t                   comb;

  always_comb begin
    logic carry;
    carry  = 1'b1;
    idx_nx = idx;
    for (int l = 0; l < NLAYERS; l++)
      if (carry) begin
        if (idx[l] + 1'b1 < cur.cnt[l]) begin
          idx_nx[l] = idx[l] + 1'b1;
          carry     = 1'b0;
        end else begin
          idx_nx[l] = '0;
        end
      end
    last_comb = cur.eoe || carry;

    comb            = '0;
    comb.eoe        = cur.eoe;
    comb.trk.road   = cur.road.id;
    comb.trk.sector = cur.road.sector;
    for (int l = 0; l < NLAYERS; l++) begin
      comb.trk.hitmap[l] = (cur.cnt[l] != '0);
      comb.trk.hits[l]   = (cur.cnt[l] != '0) ? cur.hits[l][idx[l]]
                                              : ss_centre(l, cur.road.ss[l]);
    end
  end

  assign pk_ready = en && (!busy || last_comb);

  // --- pipeline registers ----------------------------------------------------------
  logic        v1, v2, v3, v4;
  track_word_t m1, m2, m3, m4;
  logic [NCOORD-1:0][COORD_W-1:0]             x1;
  logic signed [PROD_W-1:0]                   prod2 [NROWS][NCOORD];
  logic signed [COEF_W-1:0]                   q2    [NROWS];
  logic signed [ACC_W-1:0]                    acc3  [NROWS];
  logic signed [PAR_W-1:0]                    par4  [NPARAM];
  logic [2*CHI_W-1:0]                         sq4   [NCHI];
  logic [CHI2_W-1:0]                          chi2_5;

  function automatic logic signed [CHI_W-1:0] sat_chi(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] mx, mn;
    mx = ACC_W'((1 << (CHI_W - 1)) - 1);
    mn = -mx - 1;
    if (a > mx)      return CHI_W'(mx);
    else if (a < mn) return CHI_W'(mn);
    else             return CHI_W'(a);
  endfunction

  always_comb begin
    chi2_5 = '0;
    for (int k = 0; k < NCHI; k++) chi2_5 = chi2_5 + CHI2_W'(sq4[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cur      <= '0;
      idx      <= '0;
      cut_q    <= '0;
      {v1, v2, v3, v4} <= '0;
      m1 <= '0; m2 <= '0; m3 <= '0; m4 <= '0;
      x1 <= '0;
      for (int r = 0; r < NROWS; r++) begin
        q2[r]   <= '0;
        acc3[r] <= '0;
        for (int j = 0; j < NCOORD; j++) prod2[r][j] <= '0;
      end
      for (int i = 0; i < NPARAM; i++) par4[i] <= '0;
      for (int k = 0; k < NCHI; k++)   sq4[k]  <= '0;
      tr_valid <= 1'b0;
      tr_word  <= '0;
      fit_cnt  <= '0;
      rej_cnt  <= '0;
    end else begin
      if (cfg_cut_we) cut_q <= cfg_cut;
      if (en) begin
        // generator
        if (pk_valid && pk_ready) begin
          cur  <= pk;
          busy <= 1'b1;
          idx  <= '0;
        end else if (busy && last_comb) begin
          busy <= 1'b0;
        end else if (busy) begin
          idx <= idx_nx;
        end
        // stage 1: coordinates of the combination
        v1 <= busy;
        m1 <= comb;
        x1 <= coords_of(comb.trk.hits);
        // stage 2: products with the sector's constants
        v2 <= v1;
        m2 <= m1;
        for (int r = 0; r < NROWS; r++) begin
          q2[r] <= cmem[m1.trk.sector][r][NCOORD];
          for (int j = 0; j < NCOORD; j++)
            prod2[r][j] <= cmem[m1.trk.sector][r][j] * $signed({1'b0, x1[j]});
        end
        // stage 3: scalar products
        v3 <= v2;
        m3 <= m2;
        for (int r = 0; r < NROWS; r++) begin
          logic signed [ACC_W-1:0] s;
          s = ACC_W'(q2[r]) <<< FRAC_W;
          for (int j = 0; j < NCOORD; j++) s = s + ACC_W'(prod2[r][j]);
          acc3[r] <= s;
        end
        // stage 4: parameters and squared residuals
        v4 <= v3;
        m4 <= m3;
        for (int i = 0; i < NPARAM; i++) par4[i] <= PAR_W'(acc3[i] >>> FRAC_W);
        for (int k = 0; k < NCHI; k++) begin
          logic signed [CHI_W-1:0] c;
          c = sat_chi(acc3[NPARAM + k] >>> FRAC_W);
          sq4[k] <= c * c;
        end
        // stage 5: chi-square cut and output
        tr_valid <= 1'b0;
        if (v4) begin
          if (m4.eoe) begin
            tr_valid    <= 1'b1;
            tr_word     <= '0;
            tr_word.eoe <= 1'b1;
          end else begin
            fit_cnt <= fit_cnt + 1;
            if (chi2_5 <= cut_q) begin
              tr_valid         <= 1'b1;
              tr_word          <= m4;
              tr_word.trk.chi2 <= chi2_5;
              for (int i = 0; i < NPARAM; i++) tr_word.trk.par[i] <= par4[i];
            end else begin
              rej_cnt <= rej_cnt + 1;
            end
          end
        end
      end
    end
  end

endmodule
