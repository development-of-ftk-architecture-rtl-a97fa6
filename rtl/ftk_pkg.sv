// ftk_pkg -- types, sizes and helper functions shared by the FTK track-trigger RTL.
//
// The FTK crate processes one phi region of the silicon tracker. A track crosses
// NLAYERS = 11 silicon layers: 3 pixel layers, each giving two coordinates (phi, eta),
// and 8 SCT strip layers, each giving one (phi). That makes NCOORD = 14 coordinates,
// from which the fitter computes NPARAM = 5 helix parameters. These three numbers are
// the design's own published figures. Everything else here (field widths, the
// superstrip mapping, the fixed-point format) is a choice of this implementation and is
// marked as such where it is declared.
//
// Units: a raw hit is a channel number (strip or pixel index). A cluster coordinate is
// given in half-channel units (first + last channel of the cluster), so a centroid
// between two channels is exact.
package ftk_pkg;

  // --- sizes fixed by the design --------------------------------------------------
  localparam int NLAYERS  = 11;  // detector layers seen by a track
  localparam int NPIX     = 3;   // pixel layers (two coordinates each), layers 0..2
  localparam int NCOORD   = 14;  // 3*2 pixel + 8 SCT coordinates
  localparam int NPARAM   = 5;   // helix parameters
  localparam int NCHI     = NCOORD - NPARAM;  // independent fit constraints (9)
  localparam int NROWS    = NPARAM + NCHI;    // scalar products per fit (14)

  // --- field widths chosen by this implementation ---------------------------------
  localparam int CH_W     = 15;  // raw channel number (phi or eta index)
  localparam int COORD_W  = CH_W + 1;  // cluster coordinate, half-channel units
  localparam int SS_W     = 12;  // superstrip identifier
  localparam int SS_PHI_SHIFT = 7;     // 128 half-channels = 64 channels per superstrip
  localparam int SS_ETA_BITS  = 3;     // pixel superstrips: 8 bins in eta
  localparam int SECTOR_W = 8;   // sector identifier (256 sectors per region)
  localparam int ROAD_W   = 24;  // road identifier: global pattern number
  localparam int COEF_W   = 18;  // fit constant, signed, 18-bit DSP operand
  localparam int FRAC_W   = 12;  // fractional bits of the fit constants
  localparam int PAR_W    = 32;  // fitted parameter, signed
  localparam int CHI_W    = 16;  // one constraint residual, signed, saturated
  localparam int CHI2_W   = 36;  // chi-square sum
  localparam int ACC_W    = 42;  // scalar-product accumulator
  localparam int MAX_HPS  = 4;   // hits per layer and road passed to the fitter
  localparam int HPS_W    = $clog2(MAX_HPS + 1);

  typedef logic [SS_W-1:0]     ss_t;
  typedef logic [SECTOR_W-1:0] sector_t;
  typedef logic [ROAD_W-1:0]   road_id_t;

  // Raw hit from the detector readout: channel indices. SCT hits use eta = 0.
  typedef struct packed {
    logic [CH_W-1:0] phi;
    logic [CH_W-1:0] eta;
  } raw_hit_t;

  // Clustered, full-resolution hit (half-channel units).
  typedef struct packed {
    logic [COORD_W-1:0] phi;
    logic [COORD_W-1:0] eta;
  } hit_t;

  // One stored pattern of the associative memory: a superstrip per layer and the
  // sector whose fit constants apply to tracks found in it.
  typedef struct packed {
    sector_t                  sector;
    ss_t [NLAYERS-1:0]        ss;
  } pattern_t;

  // A road: a matched pattern, with the layers that matched.
  typedef struct packed {
    road_id_t                 id;
    sector_t                  sector;
    logic [NLAYERS-1:0]       hitmap;
    ss_t [NLAYERS-1:0]        ss;
  } road_t;

  // Road stream word: a road, or the end-of-event marker (eoe = 1, road ignored).
  typedef struct packed {
    logic  eoe;
    road_t road;
  } road_word_t;

  // A road joined with its full-resolution hits, from the Data Organizer to the
  // fitter: up to MAX_HPS hits per layer (cnt[l] of them valid), or end of event.
  typedef struct packed {
    logic                                 eoe;
    road_t                                road;
    logic [NLAYERS-1:0][HPS_W-1:0]        cnt;
    hit_t [NLAYERS-1:0][MAX_HPS-1:0]      hits;
  } road_pkt_t;

  // Fitted track.
  typedef struct packed {
    road_id_t                           road;
    sector_t                            sector;
    logic [NLAYERS-1:0]                 hitmap;  // layers with a real hit
    hit_t [NLAYERS-1:0]                 hits;
    logic signed [NPARAM-1:0][PAR_W-1:0] par;
    logic [CHI2_W-1:0]                  chi2;
  } track_t;

  // Track stream word: a track, or the end-of-event marker.
  typedef struct packed {
    logic   eoe;
    track_t trk;
  } track_word_t;

  // Superstrip of a clustered hit on a layer. Phi is cut into bins of 128 half-channels
  // (64 channels: about 3 mm for 50 um pixels and 5 mm for 80 um strips). Pixel layers
  // add the top SS_ETA_BITS of eta, giving a two-dimensional superstrip.
  function automatic ss_t ss_of(input int layer, input hit_t h);
    ss_t s;
    s = ss_t'(h.phi >> SS_PHI_SHIFT);
    if (layer < NPIX)
      s[SS_W-1 -: SS_ETA_BITS] = h.eta[COORD_W-1 -: SS_ETA_BITS];
    return s;
  endfunction

  // Centre of a superstrip, used as the coordinate of a layer with no hit in a road.
  function automatic hit_t ss_centre(input int layer, input ss_t s);
    hit_t h;
    h.phi = '0;
    h.eta = '0;
    h.phi[SS_PHI_SHIFT-1] = 1'b1;
    if (layer < NPIX) begin
      h.phi[COORD_W-1:SS_PHI_SHIFT] = (COORD_W-SS_PHI_SHIFT)'(s[SS_W-SS_ETA_BITS-1:0]);
      h.eta[COORD_W-1 -: SS_ETA_BITS] = s[SS_W-1 -: SS_ETA_BITS];
      h.eta[COORD_W-SS_ETA_BITS-1] = 1'b1;
    end else begin
      h.phi[COORD_W-1:SS_PHI_SHIFT] = (COORD_W-SS_PHI_SHIFT)'(s);
    end
    return h;
  endfunction

  // The 14 fit coordinates of a set of 11 hits: phi and eta of each pixel layer,
  // then phi of each SCT layer.
  function automatic logic [NCOORD-1:0][COORD_W-1:0] coords_of(input hit_t [NLAYERS-1:0] h);
    logic [NCOORD-1:0][COORD_W-1:0] x;
    for (int l = 0; l < NPIX; l++) begin
      x[2*l]   = h[l].phi;
      x[2*l+1] = h[l].eta;
    end
    for (int l = NPIX; l < NLAYERS; l++)
      x[NPIX + l] = h[l].phi;
    return x;
  endfunction

endpackage
