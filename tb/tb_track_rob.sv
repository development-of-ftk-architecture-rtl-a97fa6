// tb_track_rob -- self-checking test of the track read-out buffer.
//
// An 8-word buffer is written and read at random rates with random tracks and
// end-of-event words. Every word read must be the next word written (first in, first
// out, nothing lost or duplicated); the buffer must refuse writes exactly when it holds
// 8 words; ev_cnt must equal the number of end-of-event words held.
module tb_track_rob;
  import ftk_pkg::*;

  localparam int D = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  track_word_t in_word = '0, out_word;
  logic [15:0] ev_cnt;

  track_rob #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, n_full = 0;
  track_word_t model [$];
  bit          f_in = 0, f_out = 0;
  track_word_t w_in;

  function automatic track_word_t rnd_word();
    track_word_t w;
    w = '0;
    w.eoe = $urandom_range(0, 4) == 0;
    w.trk.road = road_id_t'($urandom);
    w.trk.chi2 = CHI2_W'($urandom);
    w.trk.par[2] = PAR_W'($urandom);
    w.trk.hits[7] = hit_t'($urandom);
    return w;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      int nev;
      @(negedge clk);
      if (f_out) void'(model.pop_front());
      if (f_in) model.push_back(w_in);
      nev = 0;
      foreach (model[i]) if (model[i].eoe) nev++;
      checks += 3;
      if (in_ready != (model.size() < D)) begin failures++; $display("FAIL in_ready at %0d words", model.size()); end
      if (out_valid != (model.size() > 0)) begin failures++; $display("FAIL out_valid"); end
      if (ev_cnt != 16'(nev)) begin failures++; $display("FAIL ev_cnt %0d vs %0d", ev_cnt, nev); end
      if (model.size() == D) n_full++;
      if (out_valid && model.size() > 0) begin
        checks++;
        if (out_word != model[0]) begin failures++; $display("FAIL data order"); end
      end
      in_valid  = $urandom_range(0, 1);
      in_word   = rnd_word();
      out_ready = (it / 500) % 2 == 0 ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      #1;
      f_in  = in_valid && in_ready;
      f_out = out_valid && out_ready;
      w_in  = in_word;
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
