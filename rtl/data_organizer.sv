// data_organizer -- Data Organizer of one FTK region: hit buffer indexed by superstrip.
//
// Write side. Clustered hits arrive per layer from the Data Formatter. Each hit is
// stored at full resolution and threaded into a linked list per (layer, superstrip):
// head[ss] points to the newest hit of that superstrip and next[] chains the older
// ones. The first hit of a superstrip in an event also sends the superstrip number to
// the associative memory, so the AM sees each superstrip once. When every layer has
// delivered its end-of-event word, the end of event is handed to the AM.
//
// Read side. For every road returned by the AM, the organizer walks, on all layers at
// once, the list of the road's superstrip and collects up to MAX_HPS hits per layer,
// then sends the road with its hits to the track fitter as one packet. The AM's
// end-of-event word becomes an end-of-event packet and frees the event's buffer.
//
// The buffer is doubled (two banks used in turn), so one event can be written while the
// roads of the previous one are served; the writer stalls only if both banks are in use.
// Buffering, superstrip merging and the reconnection of roads with their hits follow the
// design; the linked lists, double banking, HIT_DEPTH and MAX_HPS are this
// implementation's choices. Hits beyond HIT_DEPTH per layer and event are dropped and
// counted in drop_cnt; hits beyond MAX_HPS in one superstrip are left out of the road and
// counted in trunc_cnt.
//
// Timing: one hit per layer per clock on the write side. A road takes one clock to start
// plus one clock per hit of its fullest layer, then waits for pk_ready.
module data_organizer
  import ftk_pkg::*;
#(
  parameter int HIT_DEPTH = 256,  // hits per layer and event held in one bank
  localparam int NSS = 1 << SS_W,
  localparam int IW  = $clog2(HIT_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // clustered hits from the Data Formatter
  input  logic    [NLAYERS-1:0]  cl_valid,
  output logic    [NLAYERS-1:0]  cl_ready,
  input  logic    [NLAYERS-1:0]  cl_eoe,
  input  hit_t    [NLAYERS-1:0]  cl_hit,
  // superstrips to the associative memory
  output logic    [NLAYERS-1:0]  am_ss_valid,
  output ss_t     [NLAYERS-1:0]  am_ss,
  output logic                   am_eoe_valid,
  input  logic                   am_eoe_ready,
  // roads from the associative memory
  input  logic                   road_valid,
  output logic                   road_ready,
  input  road_word_t             road_word,
  // roads with hits to the track fitter
  output logic                   pk_valid,
  input  logic                   pk_ready,
  output road_pkt_t              pk,
  // statistics
  output logic    [31:0]         drop_cnt,
  output logic    [31:0]         trunc_cnt
);

  typedef struct packed {
    logic          last;  // end of list
    logic [IW-1:0] idx;
  } ptr_t;

  // --- storage: two banks ---------------------------------------------------------
  hit_t          hitmem [2][NLAYERS][HIT_DEPTH];
  ptr_t          nxt    [2][NLAYERS][HIT_DEPTH];
  logic [IW-1:0] head   [2][NLAYERS][NSS];
  logic [NSS-1:0] headv [2][NLAYERS];
  logic [IW:0]   cnt    [2][NLAYERS];
  logic [1:0]    bank_full;

  // --- write side -----------------------------------------------------------------
  logic               wb;
  logic [NLAYERS-1:0] ldone;
  logic [NLAYERS-1:0] wr_hit, wr_store;
  ss_t  [NLAYERS-1:0] wss;

  always_comb begin
    for (int l = 0; l < NLAYERS; l++) begin
      wss[l]         = ss_of(l, cl_hit[l]);
      cl_ready[l]    = !bank_full[wb] && !ldone[l];
      wr_hit[l]      = cl_valid[l] && cl_ready[l] && !cl_eoe[l];
      wr_store[l]    = wr_hit[l] && (cnt[wb][l] < (IW+1)'(HIT_DEPTH));
      am_ss_valid[l] = wr_store[l] && !headv[wb][l][wss[l]];
      am_ss[l]       = wss[l];
    end
  end
  assign am_eoe_valid = (&ldone) && !bank_full[wb];

  // --- read side ------------------------------------------------------------------
  typedef enum logic [1:0] {R_IDLE, R_WALK, R_FREE} rstate_e;
  rstate_e              rst_q;
  logic                 rb;
  ptr_t [NLAYERS-1:0]   rptr;
  logic                 walk_done;

  always_comb begin
    walk_done = 1'b1;
    for (int l = 0; l < NLAYERS; l++)
      if (!rptr[l].last) walk_done = 1'b0;
  end

  assign road_ready = (rst_q == R_IDLE) && bank_full[rb];
  assign pk_valid   = ((rst_q == R_WALK) && walk_done) || (rst_q == R_FREE);

  always_ff @(posedge clk) begin
    for (int l = 0; l < NLAYERS; l++)
      if (wr_store[l]) begin
        hitmem[wb][l][cnt[wb][l][IW-1:0]] <= cl_hit[l];
        nxt[wb][l][cnt[wb][l][IW-1:0]]    <= '{last: !headv[wb][l][wss[l]],
                                               idx:  head[wb][l][wss[l]]};
        head[wb][l][wss[l]]               <= cnt[wb][l][IW-1:0];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb        <= 1'b0;
      rb        <= 1'b0;
      ldone     <= '0;
      bank_full <= '0;
      rst_q     <= R_IDLE;
      rptr      <= '0;
      pk        <= '0;
      drop_cnt  <= '0;
      trunc_cnt <= '0;
      for (int b = 0; b < 2; b++)
        for (int l = 0; l < NLAYERS; l++) begin
          headv[b][l] <= '0;
          cnt[b][l]   <= '0;
        end
    end else begin
      // write side
      for (int l = 0; l < NLAYERS; l++) begin
        if (cl_valid[l] && cl_ready[l] && cl_eoe[l]) ldone[l] <= 1'b1;
        if (wr_store[l]) begin
          headv[wb][l][wss[l]] <= 1'b1;
          cnt[wb][l]           <= cnt[wb][l] + 1'b1;
        end
      end
      drop_cnt <= drop_cnt + 32'($countones(wr_hit & ~wr_store));
      if (am_eoe_valid && am_eoe_ready) begin
        bank_full[wb] <= 1'b1;
        wb            <= ~wb;
        ldone         <= '0;
      end

      // read side
      unique case (rst_q)
        R_IDLE: if (road_valid && road_ready) begin
          if (road_word.eoe) begin
            pk     <= '0;
            pk.eoe <= 1'b1;
            rst_q  <= R_FREE;
          end else begin
            pk.eoe  <= 1'b0;
            pk.road <= road_word.road;
            pk.cnt  <= '0;
            for (int l = 0; l < NLAYERS; l++) begin
              rptr[l].last <= !headv[rb][l][road_word.road.ss[l]];
              rptr[l].idx  <= head[rb][l][road_word.road.ss[l]];
            end
            rst_q <= R_WALK;
          end
        end
        R_WALK: begin
          if (walk_done) begin
            if (pk_ready) rst_q <= R_IDLE;
          end else begin
            for (int l = 0; l < NLAYERS; l++)
              if (!rptr[l].last) begin
                if (pk.cnt[l] < HPS_W'(MAX_HPS)) begin
                  pk.hits[l][pk.cnt[l]] <= hitmem[rb][l][rptr[l].idx];
                  pk.cnt[l]             <= pk.cnt[l] + 1'b1;
                  rptr[l]               <= nxt[rb][l][rptr[l].idx];
                end else begin
                  rptr[l].last <= 1'b1;
                end
              end
            trunc_cnt <= trunc_cnt + 32'($countones(trunc_now()));
          end
        end
        R_FREE: if (pk_ready) begin
          bank_full[rb] <= 1'b0;
          for (int l = 0; l < NLAYERS; l++) begin
            headv[rb][l] <= '0;
            cnt[rb][l]   <= '0;
          end
          rb    <= ~rb;
          rst_q <= R_IDLE;
        end
        default: rst_q <= R_IDLE;
      endcase
    end
  end

  // Layers whose list still has hits when MAX_HPS have been collected.
  function automatic logic [NLAYERS-1:0] trunc_now();
    logic [NLAYERS-1:0] t;
    for (int l = 0; l < NLAYERS; l++)
      t[l] = !rptr[l].last && (pk.cnt[l] >= HPS_W'(MAX_HPS));
    return t;
  endfunction

  a_pk_stable: assert property (@(posedge clk) disable iff (!rst_n)
    pk_valid && !pk_ready |=> pk_valid && $stable(pk));

endmodule
