// tb_track_fitter -- self-checking test of the combination generator and linear fitter.
//
// Four sectors of random constants are loaded. Road packets with 0 to 4 hits per layer
// are sent; the expected tracks are computed here with 64-bit integer arithmetic: every
// combination in odometer order (layer 0 changing fastest), the superstrip centre for an
// empty layer, r_i = sum_j c_ij x_j + q_i * 2^12, parameters r_i >> 12, chi-square =
// sum over the nine constraint rows of (saturated r_k >> 12)^2, kept when <= the cut.
// Passing tracks must come out in order with all fields right; fit_cnt and rej_cnt must
// count all combinations and the rejected ones. With the output never stalled, a run of
// packets must be fitted at one combination per clock.
module tb_track_fitter;
  import ftk_pkg::*;

  localparam int NS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     cfg_we = 1'b0, cfg_cut_we = 1'b0;
  sector_t                  cfg_sector = '0;
  logic [3:0]               cfg_row = '0, cfg_col = '0;
  logic signed [COEF_W-1:0] cfg_val = '0;
  logic [CHI2_W-1:0]        cfg_cut = '0;
  logic                     pk_valid = 1'b0, pk_ready, tr_valid, tr_ready;
  road_pkt_t                pk = '0;
  track_word_t              tr_word;
  logic [31:0]              fit_cnt, rej_cnt;
  logic                     stall = 1'b0;

  track_fitter #(.NSECTORS(NS)) dut (.*);
  assign tr_ready = !stall;

  int checks = 0, failures = 0, n_comb = 0, n_rej = 0, n_pass = 0;
  longint cst [NS][NROWS][NCOORD+1];
  longint cut;
  track_word_t exp_q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n && tr_valid && tr_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected track");
    else begin
      track_word_t e;
      e = exp_q.pop_front();
      check(tr_word == e, $sformatf("track road %0d chi2 %0d par0 %0d hits %0d, expected road %0d chi2 %0d par0 %0d hits %0d",
            tr_word.trk.road, tr_word.trk.chi2, tr_word.trk.par[0], tr_word.trk.hits == e.trk.hits, e.trk.road, e.trk.chi2, e.trk.par[0], tr_word.trk.sector == e.trk.sector));
    end
  end

  function automatic hit_t centre(int l, ss_t s);
    hit_t h;
    if (l < NPIX) begin
      h.phi = COORD_W'(int'(s[8:0]) * 128 + 64);
      h.eta = COORD_W'(int'(s[11:9]) * 8192 + 4096);
    end else begin
      h.phi = COORD_W'(int'(s) * 128 + 64);
      h.eta = '0;
    end
    return h;
  endfunction

  function automatic void expect_packet(road_pkt_t p);
    int idx [NLAYERS];
    bit done;
    foreach (idx[l]) idx[l] = 0;
    done = 0;
    while (!done) begin
      track_word_t w;
      longint x [NCOORD];
      longint r [NROWS];
      longint chi2;
      w = '0;
      w.trk.road = p.road.id;
      w.trk.sector = p.road.sector;
      for (int l = 0; l < NLAYERS; l++) begin
        w.trk.hitmap[l] = p.cnt[l] != 0;
        w.trk.hits[l] = p.cnt[l] != 0 ? p.hits[l][idx[l]] : centre(l, p.road.ss[l]);
      end
      for (int l = 0; l < NPIX; l++) begin x[2*l] = w.trk.hits[l].phi; x[2*l+1] = w.trk.hits[l].eta; end
      for (int l = NPIX; l < NLAYERS; l++) x[NPIX + l] = w.trk.hits[l].phi;
      chi2 = 0;
      for (int i = 0; i < NROWS; i++) begin
        r[i] = cst[p.road.sector][i][NCOORD] * 4096;
        for (int j = 0; j < NCOORD; j++) r[i] += cst[p.road.sector][i][j] * x[j];
        r[i] = r[i] >>> 12;
        if (i < NPARAM) w.trk.par[i] = PAR_W'(r[i]);
        else begin
          longint c;
          c = r[i] > 32767 ? 32767 : (r[i] < -32768 ? -32768 : r[i]);
          chi2 += c * c;
        end
      end
      w.trk.chi2 = CHI2_W'(chi2);
      n_comb++;
      if (chi2 <= cut) begin exp_q.push_back(w); n_pass++; end else n_rej++;
      // odometer
      done = 1;
      for (int l = 0; l < NLAYERS; l++) begin
        if (idx[l] + 1 < p.cnt[l]) begin idx[l]++; done = 0; break; end
        idx[l] = 0;
      end
    end
  endfunction

  function automatic road_pkt_t rnd_packet();
    road_pkt_t p;
    p = '0;
    p.road.id = road_id_t'($urandom);
    p.road.sector = sector_t'($urandom_range(0, NS - 1));
    for (int l = 0; l < NLAYERS; l++) begin
      int c;
      c = $urandom_range(0, 9);
      p.cnt[l] = c == 0 ? 0 : (c < 7 ? 1 : (c < 9 ? 2 : MAX_HPS));
      if (p.cnt[l] == 0 && $urandom_range(0, 1)) p.cnt[l] = 1;
      p.road.ss[l] = ss_t'($urandom);
      for (int k = 0; k < MAX_HPS; k++) p.hits[l][k] = hit_t'($urandom);
    end
    return p;
  endfunction

  task automatic send(road_pkt_t p);
    @(negedge clk);
    pk_valid = 1'b1;
    pk = p;
    #1;
    while (1) begin bit r; r = pk_ready; @(posedge clk); if (r) break; @(negedge clk); #1; end
    #1;
    pk_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // constants: parameter rows of order 1, constraint rows small
    for (int s = 0; s < NS; s++)
      for (int i = 0; i < NROWS; i++)
        for (int j = 0; j <= NCOORD; j++) begin
          cst[s][i][j] = (i < NPARAM) ? $signed($urandom_range(0, 16383)) - 8192
                                      : $signed($urandom_range(0, 127)) - 64;
          @(negedge clk);
          cfg_we = 1'b1; cfg_sector = sector_t'(s); cfg_row = 4'(i); cfg_col = 4'(j);
          cfg_val = COEF_W'(cst[s][i][j]);
        end
    cut = 64'd15000000;
    @(negedge clk);
    cfg_we = 1'b0; cfg_cut_we = 1'b1; cfg_cut = CHI2_W'(cut);
    @(negedge clk);
    cfg_cut_we = 1'b0;
    // random traffic with output stalls
    fork
      for (int k = 0; k < 60; k++) begin
        road_pkt_t p;
        p = rnd_packet();
        if (k % 10 == 9) begin p = '0; p.eoe = 1'b1; exp_q.push_back('{eoe: 1'b1, trk: '0}); end
        else expect_packet(p);
        send(p);
      end
      begin
        repeat (3000) begin @(negedge clk); stall = $urandom_range(0, 2) == 0; end
        stall = 1'b0;
      end
    join
    wait (exp_q.size() == 0);
    repeat (10) @(posedge clk);
    check(fit_cnt == 32'(n_comb), $sformatf("fit_cnt %0d, expected %0d", fit_cnt, n_comb));
    check(rej_cnt == 32'(n_rej), $sformatf("rej_cnt %0d, expected %0d", rej_cnt, n_rej));
    check(n_pass > 0 && n_rej > 0, $sformatf("passed %0d rejected %0d", n_pass, n_rej));
    // rate: packets back to back, no stall
    begin
      road_pkt_t ps [10];
      int c0, t;
      c0 = n_comb;
      foreach (ps[k]) begin ps[k] = rnd_packet(); expect_packet(ps[k]); end
      t = 0;
      @(negedge clk);
      fork
        begin
          foreach (ps[k]) begin
            pk_valid = 1'b1; pk = ps[k];
            #1;
            while (1) begin bit r; r = pk_ready; @(posedge clk); if (r) break; @(negedge clk); #1; end
            #1;
          end
          pk_valid = 1'b0;
        end
        while (fit_cnt != 32'(n_comb)) begin @(posedge clk); t++; end
      join
      pk_valid = 1'b0;
      check(t <= (n_comb - c0) + 8, $sformatf("%0d fits took %0d clocks", n_comb - c0, t));
      $display("rate: %0d fits in %0d clocks", n_comb - c0, t);
    end
    wait (exp_q.size() == 0);
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
