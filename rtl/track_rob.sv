// track_rob -- track-data read-out buffer of one FTK region.
//
// Holds the final tracks of each event, with the end-of-event word that closes it, until
// the Level-2 trigger reads them. It is a first-in first-out buffer of DEPTH words with
// valid/ready on both sides; it never drops data, and the upstream cleanup stage waits
// while it is full. The buffer itself follows the design; the depth and the framing
// are this implementation's choices. ev_cnt counts complete events held.
//
// Timing: one word in and one word out per clock; a word can be read the clock after
// it was written (registered output, no bypass).
module track_rob
  import ftk_pkg::*;
#(
  parameter int DEPTH = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  track_word_t  in_word,
  output logic         out_valid,
  input  logic         out_ready,
  output track_word_t  out_word,
  output logic [15:0]  ev_cnt
);

  localparam int AW = $clog2(DEPTH);

  track_word_t   mem [DEPTH];
  logic [AW:0]   wp, rp;
  logic          wr, rd;

  assign in_ready  = (wp - rp) != (AW+1)'(DEPTH);
  assign out_valid = wp != rp;
  assign out_word  = mem[rp[AW-1:0]];
  assign wr        = in_valid && in_ready;
  assign rd        = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (wr) mem[wp[AW-1:0]] <= in_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp     <= '0;
      rp     <= '0;
      ev_cnt <= '0;
    end else begin
      if (wr) wp <= wp + 1'b1;
      if (rd) rp <= rp + 1'b1;
      ev_cnt <= ev_cnt + 16'(wr && in_word.eoe) - 16'(rd && out_word.eoe);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (wp - rp) <= (AW+1)'(DEPTH));

endmodule
