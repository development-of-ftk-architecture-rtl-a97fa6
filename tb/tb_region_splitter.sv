// tb_region_splitter -- self-checking test of the phi-region splitter.
//
// Random hits are offered on all layers; every region's ready is random. For each hit the
// regions it must reach are worked out here from the wedge boundaries: region r covers
// channels [r*W - OVERLAP, (r+1)*W + OVERLAP) modulo 2^CH_W, W = 2^CH_W / 8. A hit may
// only pass when all of its regions are ready, and then must appear at exactly those
// regions, with unchanged data. End-of-event words go to all regions. Hits in an
// overlap (two regions) and across the phi wrap must both occur.
module tb_region_splitter;
  import ftk_pkg::*;

  localparam int NR = 8, OVL = 256, W = (1 << CH_W) / NR;

  logic     [NLAYERS-1:0]          in_valid, in_ready, in_eoe;
  raw_hit_t [NLAYERS-1:0]          in_hit;
  logic     [NR-1:0][NLAYERS-1:0]  out_valid, out_ready, out_eoe;
  raw_hit_t [NR-1:0][NLAYERS-1:0]  out_hit;

  region_splitter #(.NREGIONS(NR), .OVERLAP(OVL)) dut (.*);

  int checks = 0, failures = 0, n_overlap = 0, n_wrap = 0;

  initial begin
    for (int it = 0; it < 4000; it++) begin
      for (int l = 0; l < NLAYERS; l++) begin
        in_valid[l] = $urandom_range(0, 3) != 0;
        in_eoe[l]   = $urandom_range(0, 15) == 0;
        in_hit[l].phi = CH_W'($urandom);
        in_hit[l].eta = CH_W'($urandom);
        if (it % 7 == 0) in_hit[l].phi = CH_W'(((1 << CH_W) - OVL) + $urandom_range(0, 2*OVL - 1));
      end
      out_ready = NR*NLAYERS'($urandom) | NR*NLAYERS'($urandom);
      for (int r = 0; r < NR; r++) out_ready[r] = NLAYERS'($urandom | $urandom);
      #1;
      for (int l = 0; l < NLAYERS; l++) begin
        bit [NR-1:0] dst;
        bit rdy;
        int ndst;
        rdy = 1; ndst = 0;
        for (int r = 0; r < NR; r++) begin
          int lo, p;
          p = in_hit[l].phi;
          lo = r*W - OVL;
          dst[r] = in_eoe[l] || (((p - lo) % (1 << CH_W) + (1 << CH_W)) % (1 << CH_W) < W + 2*OVL);
          if (dst[r]) begin ndst++; if (!out_ready[r][l]) rdy = 0; end
        end
        checks++;
        if (in_ready[l] != rdy) begin failures++; $display("FAIL ready layer %0d", l); end
        for (int r = 0; r < NR; r++) begin
          checks++;
          if (out_valid[r][l] != (in_valid[l] && rdy && dst[r]) ||
              (out_valid[r][l] && (out_hit[r][l] != in_hit[l] || out_eoe[r][l] != in_eoe[l]))) begin
            failures++;
            $display("FAIL region %0d layer %0d phi %0d", r, l, in_hit[l].phi);
          end
        end
        if (in_valid[l] && rdy && !in_eoe[l] && ndst == 2) begin
          n_overlap++;
          if (dst[0] && dst[NR-1]) n_wrap++;
        end
      end
    end
    checks++;
    if (n_overlap == 0 || n_wrap == 0) begin failures++; $display("FAIL overlap %0d wrap %0d", n_overlap, n_wrap); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
