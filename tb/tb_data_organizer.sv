// tb_data_organizer -- self-checking test of the superstrip-indexed hit buffer.
//
// Small buffers (HIT_DEPTH = 8) make the limits easy to reach. Each event writes, per
// layer, 0 to 10 clustered hits bunched into a few superstrips. Checked here against a
// reference built from the same stimulus:
//  * the superstrips sent to the AM: each stored superstrip once per layer and event,
//    in order of first arrival; hits beyond HIT_DEPTH are dropped and counted;
//  * the end of event is offered to the AM only after every layer ended;
//  * for every road, the packet holds per layer the hits of the road's superstrip,
//    newest first, at most MAX_HPS of them (the rest counted as truncated);
//  * an end-of-event road gives an end-of-event packet and frees the bank.
// Two events are written before any road is served (double buffering); a third must
// wait until the first is freed. The fitter side is stalled at random.
module tb_data_organizer;
  import ftk_pkg::*;

  localparam int HD = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NLAYERS-1:0] cl_valid = '0, cl_ready, cl_eoe = '0;
  hit_t [NLAYERS-1:0] cl_hit = '0;
  logic [NLAYERS-1:0] am_ss_valid;
  ss_t  [NLAYERS-1:0] am_ss;
  logic               am_eoe_valid, am_eoe_ready = 1'b0;
  logic               road_valid = 1'b0, road_ready;
  road_word_t         road_word = '0;
  logic               pk_valid, pk_ready;
  road_pkt_t          pk;
  logic [31:0]        drop_cnt, trunc_cnt;
  logic               stall = 1'b0;

  data_organizer #(.HIT_DEPTH(HD)) dut (.*);
  assign pk_ready = !stall;

  int checks = 0, failures = 0, exp_drop = 0, exp_trunc = 0, am_eoes = 0, held3 = 0;
  hit_t  ev_hits [3][NLAYERS][$];   // stored hits per event and layer, arrival order
  ss_t   ss_exp [NLAYERS][$];
  road_pkt_t pk_exp [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NLAYERS; l++)
      if (am_ss_valid[l]) begin
        if (ss_exp[l].size() == 0) check(0, $sformatf("unexpected superstrip on layer %0d", l));
        else check(am_ss[l] == ss_exp[l].pop_front(), $sformatf("superstrip order layer %0d", l));
      end
    if (am_eoe_valid && am_eoe_ready) am_eoes++;
    if (pk_valid && pk_ready) begin
      road_pkt_t e;
      if (pk_exp.size() == 0) check(0, "unexpected packet");
      else begin
        e = pk_exp.pop_front();
        check(pk.eoe == e.eoe && (e.eoe || (pk.road == e.road && pk.cnt == e.cnt)),
              $sformatf("packet header (eoe %b/%b)", pk.eoe, e.eoe));
        if (!e.eoe)
          for (int l = 0; l < NLAYERS; l++)
            for (int k = 0; k < MAX_HPS; k++)
              if (k < e.cnt[l]) check(pk.hits[l][k] == e.hits[l][k], $sformatf("packet hit layer %0d #%0d", l, k));
      end
    end
  end

  // write one event (all layers in parallel, random gaps)
  task automatic write_event(int ev);
    hit_t hl [NLAYERS][$];
    for (int l = 0; l < NLAYERS; l++) begin
      int n;
      n = (l == 4) ? 10 : $urandom_range(0, 6);
      for (int k = 0; k < n; k++) begin
        hit_t h;
        h.phi = COORD_W'($urandom_range(0, 3) * 128 + $urandom_range(0, 127));
        h.eta = (l < NPIX) ? COORD_W'($urandom_range(0, 1) * 8192 + $urandom_range(0, 100)) : '0;
        hl[l].push_back(h);
        if (k < HD) begin
          bit seen = 0;
          foreach (ev_hits[ev][l][i]) if (ss_of(l, ev_hits[ev][l][i]) == ss_of(l, h)) seen = 1;
          ev_hits[ev][l].push_back(h);
          if (!seen) ss_exp[l].push_back(ss_of(l, h));
        end else exp_drop++;
      end
    end
    begin
      bit [NLAYERS-1:0] done, fire;
      done = '0;
      while (done != '1) begin
        @(negedge clk);
        for (int l = 0; l < NLAYERS; l++) begin
          cl_valid[l] = !done[l] && $urandom_range(0, 3) != 0;
          cl_eoe[l]   = hl[l].size() == 0;
          cl_hit[l]   = hl[l].size() > 0 ? hl[l][0] : '0;
        end
        #1;
        for (int l = 0; l < NLAYERS; l++) begin
          fire[l] = cl_valid[l] && cl_ready[l];
          if (cl_valid[l] && !cl_ready[l] && ev == 2) held3++;
        end
        @(posedge clk);
        for (int l = 0; l < NLAYERS; l++)
          if (fire[l]) begin
            if (cl_eoe[l]) done[l] = 1'b1;
            else void'(hl[l].pop_front());
          end
      end
    end
    @(negedge clk);
    cl_valid = '0;
  endtask

  task automatic serve_event(int ev);
    for (int r = 0; r < 5; r++) begin
      road_word_t w;
      road_pkt_t e;
      w = '0;
      w.road.id = road_id_t'($urandom);
      w.road.sector = sector_t'($urandom);
      for (int l = 0; l < NLAYERS; l++)
        w.road.ss[l] = ev_hits[ev][l].size() > 0 && $urandom_range(0, 4) != 0
                     ? ss_of(l, ev_hits[ev][l][$urandom_range(0, ev_hits[ev][l].size() - 1)])
                     : ss_t'($urandom_range(0, 4095));
      e = '0;
      e.road = w.road;
      for (int l = 0; l < NLAYERS; l++) begin
        int n = 0;
        for (int i = ev_hits[ev][l].size() - 1; i >= 0; i--)
          if (ss_of(l, ev_hits[ev][l][i]) == w.road.ss[l]) begin
            if (n < MAX_HPS) begin e.hits[l][n] = ev_hits[ev][l][i]; n++; end
            else begin exp_trunc++; break; end
          end
        e.cnt[l] = HPS_W'(n);
      end
      pk_exp.push_back(e);
      send_road(w);
    end
    pk_exp.push_back('{eoe: 1'b1, default: '0});
    send_road('{eoe: 1'b1, road: '0});
  endtask

  task automatic send_road(road_word_t w);
    @(negedge clk);
    road_valid = 1'b1;
    road_word = w;
    #1;
    while (1) begin bit r; r = road_ready; @(posedge clk); if (r) break; @(negedge clk); #1; end
    #1;
    road_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    am_eoe_ready = 1'b1;
    write_event(0);
    write_event(1);
    repeat (10) @(posedge clk);
    check(am_eoes == 2, $sformatf("two events written before any road (%0d ends seen)", am_eoes));
    fork
      write_event(2);
      begin
        repeat (30) @(posedge clk);
        check(am_eoes == 2, "third event must wait for a free bank");
        serve_event(0);
      end
      begin
        repeat (2000) begin @(negedge clk); stall = $urandom_range(0, 2) == 0; end
        stall = 1'b0;
      end
    join
    serve_event(1);
    serve_event(2);
    wait (pk_exp.size() == 0);
    repeat (5) @(posedge clk);
    check(am_eoes == 3, "three ends of event");
    check(held3 > 0, "the third event was never held off");
    check(drop_cnt == 32'(exp_drop), $sformatf("drop_cnt %0d expected %0d", drop_cnt, exp_drop));
    check(trunc_cnt == 32'(exp_trunc), $sformatf("trunc_cnt %0d expected %0d", trunc_cnt, exp_trunc));
    for (int l = 0; l < NLAYERS; l++) check(ss_exp[l].size() == 0, "superstrips missing");
    $display("dropped %0d truncated %0d", exp_drop, exp_trunc);
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
