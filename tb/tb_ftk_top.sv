// tb_ftk_top -- end-to-end test of the FTK at its default size (8 regions, 2 x 10000
// patterns per region).
//
// Toy geometry: a track is a set of hits on the same phi channel c in all 11 layers
// (pixel layers also at eta channel e). With the fit constants loaded here, the five
// parameters are the first five coordinates and the nine constraints are the
// differences between a pixel or SCT phi coordinate and that of SCT layer 3, so a
// clean track fits with chi-square 0 and a displaced hit adds (2 * offset)^2.
// Patterns are loaded only where a track should be found, plus a decoy that must not
// match. Four events are sent back to back:
//   A  track in region 1 with a two-strip cluster, a noise hit and a near-duplicate hit
//      in its superstrips: several combinations, chi-square rejects, a duplicate;
//   B  track in region 1 with one SCT layer missing: a one-missing-layer road;
//   C  track in the overlap of regions 1 and 2: found by both crates;
//   D  track in region 1 with six hits in one superstrip (truncated to four), and 300
//      noise hits on one layer of region 3 (more than its buffer holds).
// Every region must deliver, per event, exactly the expected tracks (hits, parameters,
// chi-square, road) and one end-of-event word. Level-2 reads the buffers with random
// stalls. Each mechanism is counted and must happen at least once.
module tb_ftk_top;
  import ftk_pkg::*;

  localparam int NR = 8, NPAT = 10000, W = (1 << CH_W) / NR;
  localparam int AW = $clog2(NPAT);
  localparam sector_t SEC = 3;
  localparam int NEV = 4;
  localparam int CUT = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        [NLAYERS-1:0]         hit_valid = '0, hit_ready, hit_eoe = '0;
  raw_hit_t    [NLAYERS-1:0]         hit = '0;
  logic        [2:0]                 cfg_region = '0;
  logic                              am_cfg_we = 1'b0;
  logic        [0:0]                 am_cfg_chip = '0;
  logic        [AW-1:0]              am_cfg_addr = '0;
  pattern_t                          am_cfg_pat = '0;
  logic                              tf_cfg_we = 1'b0, tf_cfg_cut_we = 1'b0;
  sector_t                           tf_cfg_sector = '0;
  logic        [3:0]                 tf_cfg_row = '0, tf_cfg_col = '0;
  logic signed [COEF_W-1:0]          tf_cfg_val = '0;
  logic        [CHI2_W-1:0]          tf_cfg_cut = '0;
  logic        [NR-1:0]              rob_valid, rob_ready;
  track_word_t [NR-1:0]              rob_word;
  logic        [NR-1:0][15:0]        rob_events;
  logic        [NR-1:0][31:0]        drop_cnt, trunc_cnt, fit_cnt, rej_cnt, dup_cnt, hw_ovf_cnt;

  ftk_top dut (.*);

  int checks = 0, failures = 0;
  int n_overlap = 0, n_l2_stall = 0, n_pipelined = 0;
  raw_hit_t in_q [NLAYERS][$];          // hit stream per layer ('1 phi and eta = end of event)
  track_t   exp_t [NR][NEV][$];
  track_t   got [NR][$];
  int       ev_out [NR];
  logic [NR-1:0] stall = '0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- stimulus helpers -------------------------------------------------------------
  function automatic hit_t coord(int l, int c2, int e);  // c2: phi in half channels
    hit_t h;
    h.phi = COORD_W'(c2);
    h.eta = (l < NPIX) ? COORD_W'(2 * e) : '0;
    return h;
  endfunction

  function automatic pattern_t pattern_of(int c, int e);
    pattern_t p;
    p.sector = SEC;
    for (int l = 0; l < NLAYERS; l++) p.ss[l] = ss_of(l, coord(l, 2 * c, e));
    return p;
  endfunction

  // expected track from its 11 hit coordinates
  function automatic track_t fit_of(hit_t [NLAYERS-1:0] h, logic [NLAYERS-1:0] map, int road);
    track_t t;
    logic [NCOORD-1:0][COORD_W-1:0] x;
    longint chi2;
    int a [NCHI] = '{0, 2, 4, 7, 8, 9, 10, 11, 12};
    t = '0;
    t.road = road_id_t'(road);
    t.sector = SEC;
    t.hitmap = map;
    t.hits = h;
    for (int l = 0; l < NPIX; l++) begin x[2*l] = h[l].phi; x[2*l+1] = h[l].eta; end
    for (int l = NPIX; l < NLAYERS; l++) x[NPIX + l] = h[l].phi;
    for (int i = 0; i < NPARAM; i++) t.par[i] = PAR_W'(x[i]);
    chi2 = 0;
    for (int k = 0; k < NCHI; k++) chi2 += (longint'(x[a[k]]) - longint'(x[6])) ** 2;
    t.chi2 = CHI2_W'(chi2);
    return t;
  endfunction

  // per-event list of raw hits, merged and sorted per layer before sending
  raw_hit_t evh [NLAYERS][$];
  task automatic add_track(int c, int e, int skip_layer);
    for (int l = 0; l < NLAYERS; l++)
      if (l != skip_layer) evh[l].push_back('{phi: CH_W'(c), eta: (l < NPIX) ? CH_W'(e) : '0});
  endtask
  task automatic close_event();
    for (int l = 0; l < NLAYERS; l++) begin
      evh[l].sort(h) with ({h.eta, h.phi});
      foreach (evh[l][i]) in_q[l].push_back(evh[l][i]);
      in_q[l].push_back('1);
      evh[l].delete();
    end
  endtask

  // ---- hit drivers --------------------------------------------------------------------
  always_comb
    for (int l = 0; l < NLAYERS; l++) begin
      hit_valid[l] = rst_n && in_q[l].size() > 0;
      hit_eoe[l]   = hit_valid[l] && in_q[l][0] == '1;
      hit[l]       = (hit_valid[l] && !hit_eoe[l]) ? in_q[l][0] : '0;
    end
  assign rob_ready = ~stall;

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NLAYERS; l++)
      if (hit_valid[l] && hit_ready[l]) begin
        if (!hit_eoe[l] && $countones(dut.r_valid[1][l] | (dut.r_valid[2][l] << 0)) == 0) ;
        void'(in_q[l].pop_front());
      end
    for (int l = 0; l < NLAYERS; l++) begin
      int nd = 0;
      for (int r = 0; r < NR; r++) if (dut.r_valid[r][l]) nd++;
      if (nd == 2 && !hit_eoe[l]) n_overlap++;
    end
    if (dut.g_region[1].u_crate.u_do.bank_full[dut.g_region[1].u_crate.u_do.rb] &&
        |(dut.g_region[1].u_crate.cl_valid & dut.g_region[1].u_crate.cl_ready & ~dut.g_region[1].u_crate.cl_eoe))
      n_pipelined++;
    stall <= NR'($urandom) & NR'($urandom);
    for (int r = 0; r < NR; r++) begin
      if (rob_valid[r] && !rob_ready[r]) n_l2_stall++;
      if (rob_valid[r] && rob_ready[r]) begin
        if (!rob_word[r].eoe) got[r].push_back(rob_word[r].trk);
        else if (ev_out[r] >= NEV) check(0, $sformatf("region %0d: extra event", r));
        else begin
          track_t e [$];
          e = exp_t[r][ev_out[r]];
          check(got[r].size() == e.size(), $sformatf("region %0d event %0d: %0d tracks, expected %0d",
                r, ev_out[r], got[r].size(), e.size()));
          if (got[r].size() == e.size())
            foreach (e[i]) check(got[r][i] == e[i], $sformatf("region %0d event %0d track %0d: chi2 %0d road %0d, expected chi2 %0d road %0d",
                r, ev_out[r], i, got[r][i].chi2, got[r][i].road, e[i].chi2, e[i].road));
          got[r].delete();
          ev_out[r]++;
        end
      end
    end
  end

  // ---- configuration ------------------------------------------------------------------
  task automatic load_pattern(int r, int chip, int addr, pattern_t p);
    @(negedge clk);
    cfg_region = 3'(r); am_cfg_we = 1'b1; am_cfg_chip = 1'(chip); am_cfg_addr = AW'(addr); am_cfg_pat = p;
    @(negedge clk);
    am_cfg_we = 1'b0;
  endtask

  task automatic load_constants(int r);
    int a [NCHI] = '{0, 2, 4, 7, 8, 9, 10, 11, 12};
    for (int i = 0; i < NROWS; i++)
      for (int j = 0; j <= NCOORD; j++) begin
        int v;
        v = 0;
        if (i < NPARAM && j == i) v = 4096;
        if (i >= NPARAM && j == a[i - NPARAM]) v = 4096;
        if (i >= NPARAM && j == 6) v = -4096;
        @(negedge clk);
        cfg_region = 3'(r); tf_cfg_we = 1'b1; tf_cfg_sector = SEC;
        tf_cfg_row = 4'(i); tf_cfg_col = 4'(j); tf_cfg_val = COEF_W'(v);
      end
    @(negedge clk);
    tf_cfg_we = 1'b0; tf_cfg_cut_we = 1'b1; tf_cfg_cut = CHI2_W'(CUT);
    @(negedge clk);
    tf_cfg_cut_we = 1'b0;
  endtask

  // ---- scenario -------------------------------------------------------------------------
  initial begin
    int c1, c2, c3, c4, e;
    hit_t [NLAYERS-1:0] h;
    logic [NLAYERS-1:0] map;
    foreach (ev_out[r]) ev_out[r] = 0;
    e  = 100;
    c1 = 64 * 80 + 32;     // region 1, centre of a superstrip
    c2 = 64 * 90 + 32;
    c3 = 64 * 126 + 32;    // 8096: overlap of regions 1 and 2
    c4 = 64 * 100 + 32;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load_constants(1);
    load_constants(2);
    load_pattern(1, 0, 5, pattern_of(c1, e));
    load_pattern(1, 1, 7, pattern_of(c2, e));
    load_pattern(1, 0, 9, pattern_of(c3, e));
    load_pattern(2, 1, 9, pattern_of(c3, e));
    load_pattern(1, 1, 3, pattern_of(c4, e));
    begin  // decoy: two layers away from any track
      pattern_t p;
      p = pattern_of(c1, e);
      p.ss[0] = p.ss[0] + 1'b1;
      p.ss[9] = p.ss[9] + 1'b1;
      load_pattern(1, 0, 11, p);
    end

    // event A
    add_track(c1, e, -1);
    evh[5].push_back('{phi: CH_W'(c1 + 1), eta: '0});   // two-strip cluster
    evh[8].push_back('{phi: CH_W'(c1 + 20), eta: '0});  // noise, same superstrip
    evh[9].push_back('{phi: CH_W'(c1 + 2), eta: '0});   // near-duplicate hit
    close_event();
    for (int l = 0; l < NLAYERS; l++) h[l] = coord(l, 2 * c1, e);
    h[5].phi = COORD_W'(2 * c1 + 1);
    exp_t[1][0].push_back(fit_of(h, '1, 5));
    // event B: layer 7 missing
    add_track(c2, e, 7);
    close_event();
    for (int l = 0; l < NLAYERS; l++) h[l] = coord(l, 2 * c2, e);
    map = '1; map[7] = 1'b0;
    exp_t[1][1].push_back(fit_of(h, map, NPAT + 7));
    // event C: overlap
    add_track(c3, e, -1);
    close_event();
    for (int l = 0; l < NLAYERS; l++) h[l] = coord(l, 2 * c3, e);
    exp_t[1][2].push_back(fit_of(h, '1, 9));
    exp_t[2][2].push_back(fit_of(h, '1, NPAT + 9));
    // event D: crowded superstrip, overfull layer in region 3
    add_track(c4, e, -1);
    for (int k = 1; k <= 5; k++) evh[10].push_back('{phi: CH_W'(c4 - 2 * k), eta: '0});
    for (int k = 0; k < 300; k++) evh[10].push_back('{phi: CH_W'(3 * W + 100 + 2 * k), eta: '0});
    close_event();
    for (int l = 0; l < NLAYERS; l++) h[l] = coord(l, 2 * c4, e);
    exp_t[1][3].push_back(fit_of(h, '1, NPAT + 3));

    wait (ev_out[0] == NEV && ev_out[1] == NEV && ev_out[2] == NEV && ev_out[3] == NEV &&
          ev_out[4] == NEV && ev_out[5] == NEV && ev_out[6] == NEV && ev_out[7] == NEV);
    repeat (10) @(posedge clk);
    // mechanisms
    check(n_overlap > 0, "no hit went to two regions");
    check(fit_cnt[1] > 32'(NEV), $sformatf("region 1 made %0d fits: no multi-combination road", fit_cnt[1]));
    check(rej_cnt[1] > 0, "no chi-square reject");
    check(dup_cnt[1] > 0, "no duplicate removed");
    check(trunc_cnt[1] > 0, "no superstrip truncated");
    check(drop_cnt[3] == 32'(300 - 256), $sformatf("region 3 dropped %0d hits, expected 44", drop_cnt[3]));
    check(n_l2_stall > 0, "Level-2 never stalled a buffer");
    check(n_pipelined > 0, "no event written while the previous one was served");
    $display("overlap hits %0d, fits %0d, chi2 rejects %0d, duplicates %0d, truncations %0d, drops %0d, L2 stalls %0d, pipelined clocks %0d",
             n_overlap, fit_cnt[1], rej_cnt[1], dup_cnt[1], trunc_cnt[1], drop_cnt[3], n_l2_stall, n_pipelined);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    foreach (ev_out[r]) $display("region %0d: %0d events out", r, ev_out[r]);
    foreach (in_q[l]) $display("layer %0d: %0d words left", l, in_q[l].size());
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
