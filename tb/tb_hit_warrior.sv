// tb_hit_warrior -- self-checking test of the duplicate-track removal.
//
// Events of random tracks are sent through an 8-entry cleanup stage (MIN_SHARED = 6).
// Tracks are built as variants of a few parent tracks that keep a chosen number of the
// parent's hits (0 to 11), so pairs sharing 6 or more hits (duplicates) and fewer (not
// duplicates) both occur; each has a random chi-square. A reference list kept here
// applies the rule: a track that duplicates a kept track with smaller or equal
// chi-square is dropped; otherwise it replaces the duplicates it beats and is kept if
// there is room. At the end of each event the output is compared with the reference as
// a set, then the end-of-event word. One event carries more distinct tracks than fit,
// to check the overflow count. The output is stalled at random.
module tb_hit_warrior;
  import ftk_pkg::*;

  localparam int D = 8, MS = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid = 1'b0, in_ready, out_valid, out_ready;
  track_word_t in_word = '0, out_word;
  logic [31:0] dup_cnt, ovf_cnt;
  logic        stall = 1'b0;

  hit_warrior #(.DEPTH(D), .MIN_SHARED(MS)) dut (.*);
  assign out_ready = !stall;

  int checks = 0, failures = 0, exp_dup = 0, exp_ovf = 0;
  track_t kept [$];
  track_t exp_ev [$][$];
  track_t got [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int shared(track_t a, track_t b);
    int n = 0;
    for (int l = 0; l < NLAYERS; l++)
      if (a.hitmap[l] && b.hitmap[l] && a.hits[l] == b.hits[l]) n++;
    return n;
  endfunction

  // reference rule
  function automatic void model_in(track_t t);
    bit drop = 0;
    int ndup = 0;
    foreach (kept[i]) if (shared(kept[i], t) >= MS && kept[i].chi2 <= t.chi2) drop = 1;
    if (drop) begin exp_dup++; return; end
    for (int i = kept.size() - 1; i >= 0; i--)
      if (shared(kept[i], t) >= MS) begin kept.delete(i); ndup++; end
    exp_dup += ndup;
    if (kept.size() < D) kept.push_back(t); else exp_ovf++;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (!out_word.eoe) got.push_back(out_word.trk);
    else begin
      track_t e [$];
      e = exp_ev.pop_front();
      got.sort(x) with ({x.road, x.chi2});
      e.sort(x) with ({x.road, x.chi2});
      check(got.size() == e.size(), $sformatf("event kept %0d tracks, expected %0d", got.size(), e.size()));
      if (got.size() == e.size()) foreach (e[i]) check(got[i] == e[i], "kept track differs");
      got.delete();
    end
  end

  task automatic send(track_word_t w);
    @(negedge clk);
    in_valid = 1'b1;
    in_word  = w;
    #1;
    while (1) begin bit r; r = in_ready; @(posedge clk); if (r) break; @(negedge clk); #1; end
    #1;
    in_valid = 1'b0;
  endtask

  task automatic run_event(int ntrk, int nparent);
    track_t par [4];
    kept.delete();
    for (int p = 0; p < nparent; p++) begin
      par[p] = '0;
      for (int l = 0; l < NLAYERS; l++) par[p].hits[l] = hit_t'($urandom);
      par[p].hitmap = '1;
    end
    for (int k = 0; k < ntrk; k++) begin
      track_word_t w;
      int keep;
      w = '0;
      w.trk = par[$urandom_range(0, nparent - 1)];
      keep = $urandom_range(0, NLAYERS);
      for (int l = keep; l < NLAYERS; l++) w.trk.hits[l] = hit_t'($urandom);
      if ($urandom_range(0, 4) == 0) w.trk.hitmap[$urandom_range(0, NLAYERS-1)] = 1'b0;
      w.trk.road = road_id_t'(k);
      w.trk.chi2 = CHI2_W'($urandom_range(0, 1000));
      model_in(w.trk);
      send(w);
    end
    exp_ev.push_back(kept);
    send('{eoe: 1'b1, trk: '0});
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin
        for (int ev = 0; ev < 40; ev++) run_event($urandom_range(1, 12), $urandom_range(1, 4));
        run_event(D + 4, 1);  // overflow: distinct tracks (parents renewed below)
      end
      begin
        repeat (4000) begin @(negedge clk); stall = $urandom_range(0, 2) == 0; end
        stall = 1'b0;
      end
    join
    wait (exp_ev.size() == 0);
    repeat (5) @(posedge clk);
    check(dup_cnt == 32'(exp_dup), $sformatf("dup_cnt %0d, expected %0d", dup_cnt, exp_dup));
    check(ovf_cnt == 32'(exp_ovf), $sformatf("ovf_cnt %0d, expected %0d", ovf_cnt, exp_ovf));
    check(exp_dup > 0, "no duplicates happened");
    $display("duplicates %0d overflows %0d", exp_dup, exp_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
