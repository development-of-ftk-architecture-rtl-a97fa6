// tb_am_chip -- self-checking test of one associative-memory chip.
//
// A 64-pattern chip is loaded with random patterns over a small superstrip range.
// Each event sends, per layer, the superstrips of a few chosen patterns (sometimes
// with one layer left out, sometimes two) plus random noise superstrips, spread over
// several clocks. The expected roads are computed here by counting, for every pattern,
// the layers whose superstrip was seen: all 11, or 10 with one missing layer. Roads must
// come out in address order with the right layer map, superstrips and sector, followed
// by one end-of-event word. The next event's superstrips are sent while the previous
// event is still being read out, and readout is stalled at random. Readout of an
// unstalled chip must deliver one road per clock.
module tb_am_chip;
  import ftk_pkg::*;

  localparam int NP = 64;
  localparam int AW = $clog2(NP);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               cfg_we = 1'b0;
  logic [AW-1:0]      cfg_addr = '0;
  pattern_t           cfg_pat = '0;
  logic [NLAYERS-1:0] ss_valid = '0;
  ss_t  [NLAYERS-1:0] ss = '0;
  logic               eoe_valid = 1'b0, eoe_ready;
  logic               up_ready, rd_valid, rd_ready;
  road_word_t         rd_word;
  logic               stall = 1'b0;

  am_chip #(.NPATT(NP), .CHIP_ID(0), .FIRST(1'b1), .MISSED_MAX(1)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_pat, .ss_valid, .ss,
    .eoe_valid, .eoe_ready, .up_valid(1'b0), .up_ready, .up_word('0),
    .rd_valid, .rd_ready, .rd_word);

  assign rd_ready = !stall;

  int checks = 0, failures = 0;
  pattern_t   bank [NP];
  road_word_t exp_q [$];
  int         full_roads = 0, miss_roads = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (rd_valid && rd_ready) begin
      road_word_t e;
      if (exp_q.size() == 0) check(0, "road with nothing expected");
      else begin
        e = exp_q.pop_front();
        check(rd_word == e, $sformatf("road: got eoe=%b id=%0d map=%b, expected eoe=%b id=%0d map=%b",
              rd_word.eoe, rd_word.road.id, rd_word.road.hitmap, e.eoe, e.road.id, e.road.hitmap));
      end
    end
  end

  task automatic run_event(bit with_stall);
    bit [NLAYERS-1:0][7:0] seen;  // superstrips 0..7 seen, per layer
    ss_t sl [NLAYERS][$];
    int  npk;
    seen = '0;
    npk = $urandom_range(1, 4);
    for (int k = 0; k < npk; k++) begin
      int p, skip;
      p = $urandom_range(0, NP - 1);
      skip = $urandom_range(0, 2) == 0 ? -1 : $urandom_range(0, NLAYERS - 1);
      for (int l = 0; l < NLAYERS; l++)
        if (l != skip) sl[l].push_back(bank[p].ss[l]);
    end
    for (int l = 0; l < NLAYERS; l++) begin
      if ($urandom_range(0, 1)) sl[l].push_back(ss_t'($urandom_range(0, 7)));
      foreach (sl[l][i]) seen[l][sl[l][i][2:0]] = 1'b1;
    end
    // expected roads
    for (int p = 0; p < NP; p++) begin
      road_word_t e;
      int n;
      e = '0;
      n = 0;
      for (int l = 0; l < NLAYERS; l++)
        if (seen[l][bank[p].ss[l][2:0]]) begin e.road.hitmap[l] = 1'b1; n++; end
      if (n >= NLAYERS - 1) begin
        e.road.id = road_id_t'(p);
        e.road.sector = bank[p].sector;
        e.road.ss = bank[p].ss;
        exp_q.push_back(e);
        if (n == NLAYERS) full_roads++; else miss_roads++;
      end
    end
    exp_q.push_back('{eoe: 1'b1, road: '0});
    // drive superstrips, a few layers per clock
    while (1) begin
      bit any;
      any = 0;
      @(negedge clk);
      ss_valid = '0;
      for (int l = 0; l < NLAYERS; l++)
        if (sl[l].size() > 0 && $urandom_range(0, 1)) begin
          ss_valid[l] = 1'b1;
          ss[l] = sl[l].pop_front();
        end
      for (int l = 0; l < NLAYERS; l++) if (sl[l].size() > 0 || ss_valid[l]) any = 1;
      if (!any) break;
    end
    // end of event, held until accepted
    eoe_valid = 1'b1;
    #1;
    while (1) begin bit r; r = eoe_ready; @(posedge clk); if (r) break; @(negedge clk); #1; end
    #1;
    eoe_valid = 1'b0;
  endtask

  initial begin
    for (int p = 0; p < NP; p++)
      for (int l = 0; l < NLAYERS; l++) bank[p].ss[l] = ss_t'($urandom_range(0, 7));
    for (int p = 0; p < NP; p++) bank[p].sector = sector_t'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // an empty bank finds nothing
    exp_q.push_back('{eoe: 1'b1, road: '0});
    @(negedge clk);
    ss_valid = '1;
    ss = '0;
    @(negedge clk);
    ss_valid = '0;
    eoe_valid = 1'b1;
    @(negedge clk);
    eoe_valid = 1'b0;
    wait (exp_q.size() == 0);
    // load the bank
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      cfg_we = 1'b1;
      cfg_addr = AW'(p);
      cfg_pat = bank[p];
    end
    @(negedge clk);
    cfg_we = 1'b0;
    // stalled readout, next events overlapping the readout
    fork
      begin
        repeat (20) run_event(1);
      end
      begin
        repeat (3000) begin @(negedge clk); stall = ($urandom_range(0, 2) == 0); end
        stall = 1'b0;
      end
    join
    wait (exp_q.size() == 0);
    // readout rate: with no stall the roads of one event leave one per clock
    @(negedge clk);
    begin
      int n0, t;
      run_event(0);
      n0 = exp_q.size();
      t = 0;
      while (exp_q.size() > 0 && t < 1000) begin @(negedge clk); t++; end
      check(t <= n0 + 2, $sformatf("readout of %0d words took %0d clocks", n0, t));
    end
    check(full_roads > 0 && miss_roads > 0,
          $sformatf("full matches %0d, one-missing-layer matches %0d", full_roads, miss_roads));
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
