// tb_data_formatter -- self-checking test of the per-layer cluster finders.
//
// Every layer gets three events of random sorted raw hits (random runs of adjacent
// channels, pixel layers with a few eta columns). The expected clusters are computed
// here from the generated runs: one cluster per run, phi = first + last, eta = 2*eta.
// The output is stalled at random to exercise the ready path. A final check verifies
// that an uninterrupted run of hits is taken at one hit per clock.
module tb_data_formatter;
  import ftk_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     [NLAYERS-1:0] raw_valid, raw_ready, raw_eoe, cl_valid, cl_ready, cl_eoe;
  raw_hit_t [NLAYERS-1:0] raw_hit;
  hit_t     [NLAYERS-1:0] cl_hit;

  data_formatter dut (.*);

  int checks = 0, failures = 0;

  // per-layer stimulus and expectation queues
  typedef struct packed { logic eoe; raw_hit_t h; } raw_w_t;
  typedef struct packed { logic eoe; hit_t h; } cl_w_t;
  raw_w_t in_q  [NLAYERS][$];
  cl_w_t  exp_q [NLAYERS][$];
  logic   stall = 1'b0;
  int     hold3 = 0;  // clocks a hit on layer 3 waited

  task automatic gen_event(int l);
    int eta, phi, nrun, len;
    phi = $urandom_range(0, 20);
    nrun = $urandom_range(0, 6);
    eta = 0;
    for (int r = 0; r < nrun; r++) begin
      raw_w_t w;
      cl_w_t  e;
      if (l < NPIX && $urandom_range(0, 2) == 0) begin
        eta = eta + $urandom_range(1, 3);
        phi = $urandom_range(0, 20);
      end
      len = $urandom_range(1, 4);
      for (int k = 0; k < len; k++) begin
        w.eoe = 1'b0;
        w.h.phi = CH_W'(phi + k);
        w.h.eta = (l < NPIX) ? CH_W'(eta) : '0;
        in_q[l].push_back(w);
      end
      e.eoe = 1'b0;
      e.h.phi = COORD_W'(2 * phi + len - 1);
      e.h.eta = (l < NPIX) ? COORD_W'(2 * eta) : '0;
      exp_q[l].push_back(e);
      phi = phi + len + $urandom_range(1, 5);
    end
    in_q[l].push_back('{eoe: 1'b1, h: '0});
    exp_q[l].push_back('{eoe: 1'b1, h: '0});
  endtask

  // drivers
  always_comb
    for (int l = 0; l < NLAYERS; l++) begin
      raw_valid[l] = rst_n && in_q[l].size() > 0;
      raw_eoe[l]   = raw_valid[l] ? in_q[l][0].eoe : 1'b0;
      raw_hit[l]   = raw_valid[l] ? in_q[l][0].h : '0;
      cl_ready[l]  = !stall;
    end

  always @(posedge clk) if (rst_n) begin
    stall <= ($urandom_range(0, 3) == 0);
    if (raw_valid[3] && !raw_ready[3] && !raw_eoe[3]) hold3++;
    for (int l = 0; l < NLAYERS; l++) begin
      if (raw_valid[l] && raw_ready[l]) void'(in_q[l].pop_front());
      if (cl_valid[l] && cl_ready[l]) begin
        cl_w_t e;
        checks++;
        if (exp_q[l].size() == 0) begin
          failures++;
          $display("FAIL layer %0d: unexpected output", l);
        end else begin
          e = exp_q[l].pop_front();
          if (e.eoe != cl_eoe[l] || (!e.eoe && e.h != cl_hit[l])) begin
            failures++;
            $display("FAIL layer %0d: got eoe=%b phi=%0d eta=%0d, expected eoe=%b phi=%0d eta=%0d",
                     l, cl_eoe[l], cl_hit[l].phi, cl_hit[l].eta, e.eoe, e.h.phi, e.h.eta);
          end
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int ev = 0; ev < 3; ev++)
      for (int l = 0; l < NLAYERS; l++) gen_event(l);
    wait (exp_q[0].size() == 0 && exp_q[NLAYERS-1].size() == 0);
    repeat (50) @(posedge clk);
    for (int l = 0; l < NLAYERS; l++) begin
      checks++;
      if (exp_q[l].size() != 0) begin
        failures++;
        $display("FAIL layer %0d: %0d outputs missing", l, exp_q[l].size());
      end
    end
    // rate: a run of 20 adjacent channels is consumed in 20 clocks
    begin
      int t0, t1;
      for (int k = 0; k < 20; k++) in_q[3].push_back('{eoe: 1'b0, h: '{phi: CH_W'(100 + k), eta: '0}});
      in_q[3].push_back('{eoe: 1'b1, h: '0});
      exp_q[3].push_back('{eoe: 1'b0, h: '{phi: COORD_W'(219), eta: '0}});
      exp_q[3].push_back('{eoe: 1'b1, h: '0});
      hold3 = 0;
      t0 = 0;
      while (in_q[3].size() > 1) begin @(negedge clk); t0++; end
      checks++;
      if (hold3 != 0) begin
        failures++;
        $display("FAIL rate: a run of hits was held off %0d clocks", hold3);
      end
      t1 = 0;
      while (exp_q[3].size() != 0 && t1 < 100) begin @(negedge clk); t1++; end
      checks++;
      if (exp_q[3].size() != 0) begin failures++; $display("FAIL rate run output"); end
    end
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
