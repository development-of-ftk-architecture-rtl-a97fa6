// tb_ftk_crate -- end-to-end test of one region crate (reduced: 2 x 64 patterns,
// 32-hit buffers).
//
// Same toy geometry as the full-system test: a track is a set of hits on one phi
// channel in all layers; the fit constants make the parameters equal to the first five
// coordinates and the chi-square the sum of squared phi differences to SCT layer 3.
// Three events are sent back to back: a track with a two-strip cluster, a noise hit
// and a near-duplicate hit; a track with one SCT layer missing plus 40 noise hits on
// one layer (more than the buffer holds); a track with six hits in one superstrip. The
// crate must deliver exactly one track per event, with the expected hits, parameters,
// chi-square and road, then the end-of-event word; the statistic outputs must show
// the combinations, rejects, duplicates, truncations and drops. Level-2 stalls at random.
module tb_ftk_crate;
  import ftk_pkg::*;

  localparam int NPAT = 64, HD = 32;
  localparam int AW = $clog2(NPAT);
  localparam sector_t SEC = 5;
  localparam int NEV = 3;
  localparam int CUT = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        [NLAYERS-1:0] raw_valid, raw_ready, raw_eoe;
  raw_hit_t    [NLAYERS-1:0] raw_hit;
  logic                      am_cfg_we = 1'b0;
  logic        [0:0]         am_cfg_chip = '0;
  logic        [AW-1:0]      am_cfg_addr = '0;
  pattern_t                  am_cfg_pat = '0;
  logic                      tf_cfg_we = 1'b0, tf_cfg_cut_we = 1'b0;
  sector_t                   tf_cfg_sector = '0;
  logic        [3:0]         tf_cfg_row = '0, tf_cfg_col = '0;
  logic signed [COEF_W-1:0]  tf_cfg_val = '0;
  logic        [CHI2_W-1:0]  tf_cfg_cut = '0;
  logic                      rob_valid, rob_ready;
  track_word_t               rob_word;
  logic        [15:0]        rob_events;
  logic        [31:0]        drop_cnt, trunc_cnt, fit_cnt, rej_cnt, dup_cnt, hw_ovf_cnt;
  logic                      stall = 1'b0;

  ftk_crate #(.NCHIPS(2), .NPATT(NPAT), .HIT_DEPTH(HD)) dut (.*);

  int checks = 0, failures = 0, ev_out = 0;
  raw_hit_t in_q [NLAYERS][$];
  track_t   exp_t [NEV][$];
  track_t   got [$];
  raw_hit_t evh [NLAYERS][$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic hit_t coord(int l, int c2, int e);
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

  always_comb
    for (int l = 0; l < NLAYERS; l++) begin
      raw_valid[l] = rst_n && in_q[l].size() > 0;
      raw_eoe[l]   = raw_valid[l] && in_q[l][0] == '1;
      raw_hit[l]   = (raw_valid[l] && !raw_eoe[l]) ? in_q[l][0] : '0;
    end
  assign rob_ready = !stall;

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NLAYERS; l++)
      if (raw_valid[l] && raw_ready[l]) void'(in_q[l].pop_front());
    stall <= $urandom_range(0, 2) == 0;
    if (rob_valid && rob_ready) begin
      if (!rob_word.eoe) got.push_back(rob_word.trk);
      else if (ev_out >= NEV) check(0, "extra event");
      else begin
        check(got.size() == exp_t[ev_out].size(), $sformatf("event %0d: %0d tracks, expected %0d",
              ev_out, got.size(), exp_t[ev_out].size()));
        if (got.size() == exp_t[ev_out].size())
          foreach (got[i]) check(got[i] == exp_t[ev_out][i], $sformatf("event %0d: chi2 %0d road %0d, expected chi2 %0d road %0d",
              ev_out, got[i].chi2, got[i].road, exp_t[ev_out][i].chi2, exp_t[ev_out][i].road));
        got.delete();
        ev_out++;
      end
    end
  end

  task automatic load_pattern(int chip, int addr, pattern_t p);
    @(negedge clk);
    am_cfg_we = 1'b1; am_cfg_chip = 1'(chip); am_cfg_addr = AW'(addr); am_cfg_pat = p;
    @(negedge clk);
    am_cfg_we = 1'b0;
  endtask

  initial begin
    int c1, c2, c4, e;
    int a [NCHI] = '{0, 2, 4, 7, 8, 9, 10, 11, 12};
    hit_t [NLAYERS-1:0] h;
    logic [NLAYERS-1:0] map;
    e  = 300;
    c1 = 64 * 20 + 32;
    c2 = 64 * 40 + 32;
    c4 = 64 * 60 + 32;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NROWS; i++)
      for (int j = 0; j <= NCOORD; j++) begin
        int v;
        v = 0;
        if (i < NPARAM && j == i) v = 4096;
        if (i >= NPARAM && j == a[i - NPARAM]) v = 4096;
        if (i >= NPARAM && j == 6) v = -4096;
        @(negedge clk);
        tf_cfg_we = 1'b1; tf_cfg_sector = SEC; tf_cfg_row = 4'(i); tf_cfg_col = 4'(j); tf_cfg_val = COEF_W'(v);
      end
    @(negedge clk);
    tf_cfg_we = 1'b0; tf_cfg_cut_we = 1'b1; tf_cfg_cut = CHI2_W'(CUT);
    @(negedge clk);
    tf_cfg_cut_we = 1'b0;
    load_pattern(0, 1, pattern_of(c1, e));
    load_pattern(1, 2, pattern_of(c2, e));
    load_pattern(1, 60, pattern_of(c4, e));

    add_track(c1, e, -1);
    evh[4].push_back('{phi: CH_W'(c1 + 1), eta: '0});
    evh[8].push_back('{phi: CH_W'(c1 + 20), eta: '0});
    evh[9].push_back('{phi: CH_W'(c1 + 2), eta: '0});
    close_event();
    for (int l = 0; l < NLAYERS; l++) h[l] = coord(l, 2 * c1, e);
    h[4].phi = COORD_W'(2 * c1 + 1);
    exp_t[0].push_back(fit_of(h, '1, 1));

    add_track(c2, e, 6);
    for (int k = 0; k < 40; k++) evh[10].push_back('{phi: CH_W'(8000 + 2 * k), eta: '0});
    close_event();
    for (int l = 0; l < NLAYERS; l++) h[l] = coord(l, 2 * c2, e);
    map = '1; map[6] = 1'b0;
    exp_t[1].push_back(fit_of(h, map, NPAT + 2));

    add_track(c4, e, -1);
    for (int k = 1; k <= 5; k++) evh[3].push_back('{phi: CH_W'(c4 - 2 * k), eta: '0});
    close_event();
    for (int l = 0; l < NLAYERS; l++) h[l] = coord(l, 2 * c4, e);
    exp_t[2].push_back(fit_of(h, '1, NPAT + 60));

    wait (ev_out == NEV);
    repeat (10) @(posedge clk);
    check(fit_cnt > 32'(NEV), "no multi-combination road");
    check(rej_cnt > 0, "no chi-square reject");
    check(dup_cnt > 0, "no duplicate removed");
    check(trunc_cnt > 0, "no superstrip truncated");
    check(drop_cnt == 32'(40 + 1 - HD), $sformatf("dropped %0d hits, expected %0d", drop_cnt, 40 + 1 - HD));
    check(rob_events == 0, "read-out buffer not empty");
    $display("fits %0d rejects %0d duplicates %0d truncations %0d drops %0d", fit_cnt, rej_cnt, dup_cnt, trunc_cnt, drop_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
