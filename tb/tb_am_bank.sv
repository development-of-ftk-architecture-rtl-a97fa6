// tb_am_bank -- self-checking test of the pipelined array of AM chips.
//
// Three 16-pattern chips are loaded with random patterns through the shared
// configuration bus (chip select + address). Every event broadcasts the superstrips of
// a few chosen patterns, from any chip, to all chips. The expected roads are computed
// here per pattern (all 11 layers, or 10 with one missing). Because the chain lets a
// chip send its own roads while the upstream chip is still busy, road order across chips
// is not fixed: the roads of an event are collected and compared as a set (sorted by
// id) when its single end-of-event word arrives. The road ids must be the global pattern
// numbers. Readout is stalled at random.
module tb_am_bank;
  import ftk_pkg::*;

  localparam int NC = 3;
  localparam int NP = 16;
  localparam int AW = $clog2(NP);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               cfg_we = 1'b0;
  logic [1:0]         cfg_chip = '0;
  logic [AW-1:0]      cfg_addr = '0;
  pattern_t           cfg_pat = '0;
  logic [NLAYERS-1:0] ss_valid = '0;
  ss_t  [NLAYERS-1:0] ss = '0;
  logic               eoe_valid = 1'b0, eoe_ready;
  logic               rd_valid, rd_ready;
  road_word_t         rd_word;
  logic               stall = 1'b0;

  am_bank #(.NCHIPS(NC), .NPATT(NP), .MISSED_MAX(1)) dut (.*);
  assign rd_ready = !stall;

  int checks = 0, failures = 0;
  pattern_t bank [NC*NP];
  road_t    exp_ev [$][$];   // expected roads, per event
  road_t    got [$];
  int       multi_chip_events = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (rd_valid && rd_ready) begin
      if (!rd_word.eoe) got.push_back(rd_word.road);
      else begin
        road_t e [$];
        if (exp_ev.size() == 0) check(0, "end of event with no event pending");
        else begin
          e = exp_ev.pop_front();
          got.sort(r) with (r.id);
          check(got.size() == e.size(), $sformatf("event has %0d roads, expected %0d", got.size(), e.size()));
          if (got.size() == e.size())
            foreach (e[i]) check(got[i] == e[i], $sformatf("road %0d: id %0d vs %0d", i, got[i].id, e[i].id));
        end
        got.delete();
      end
    end
  end

  task automatic run_event();
    bit [NLAYERS-1:0][7:0] seen;
    ss_t sl [NLAYERS][$];
    road_t e [$];
    int chips_hit;
    seen = '0;
    for (int k = 0; k < 3; k++) begin
      int p, skip;
      p = $urandom_range(0, NC*NP - 1);
      skip = $urandom_range(0, 1) ? -1 : $urandom_range(0, NLAYERS - 1);
      for (int l = 0; l < NLAYERS; l++)
        if (l != skip) begin sl[l].push_back(bank[p].ss[l]); seen[l][bank[p].ss[l][2:0]] = 1'b1; end
    end
    chips_hit = 0;
    for (int c = 0; c < NC; c++) begin
      bit any;
      any = 0;
      for (int a = 0; a < NP; a++) begin
        road_t r;
        int n, p;
        p = c*NP + a;
        r = '0;
        n = 0;
        for (int l = 0; l < NLAYERS; l++)
          if (seen[l][bank[p].ss[l][2:0]]) begin r.hitmap[l] = 1'b1; n++; end
        if (n >= NLAYERS - 1) begin
          r.id = road_id_t'(p); r.sector = bank[p].sector; r.ss = bank[p].ss;
          e.push_back(r);
          any = 1;
        end
      end
      if (any) chips_hit++;
    end
    if (chips_hit > 1) multi_chip_events++;
    exp_ev.push_back(e);
    while (1) begin
      bit any;
      any = 0;
      @(negedge clk);
      ss_valid = '0;
      for (int l = 0; l < NLAYERS; l++)
        if (sl[l].size() > 0) begin ss_valid[l] = 1'b1; ss[l] = sl[l].pop_front(); end
      for (int l = 0; l < NLAYERS; l++) if (sl[l].size() > 0 || ss_valid[l]) any = 1;
      if (!any) break;
    end
    eoe_valid = 1'b1;
    #1;
    while (1) begin bit r; r = eoe_ready; @(posedge clk); if (r) break; @(negedge clk); #1; end
    #1;
    eoe_valid = 1'b0;
  endtask

  initial begin
    for (int p = 0; p < NC*NP; p++) begin
      for (int l = 0; l < NLAYERS; l++) bank[p].ss[l] = ss_t'($urandom_range(0, 7));
      bank[p].sector = sector_t'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < NC*NP; p++) begin
      @(negedge clk);
      cfg_we = 1'b1; cfg_chip = 2'(p / NP); cfg_addr = AW'(p % NP); cfg_pat = bank[p];
    end
    @(negedge clk);
    cfg_we = 1'b0;
    fork
      repeat (30) run_event();
      begin
        repeat (3000) begin @(negedge clk); stall = ($urandom_range(0, 2) == 0); end
        stall = 1'b0;
      end
    join
    wait (exp_ev.size() == 0);
    check(multi_chip_events > 0, "no event had roads in more than one chip");
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
