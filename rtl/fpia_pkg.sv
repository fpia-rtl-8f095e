// fpia_pkg: types, default sizes and routing-pattern functions shared by the
// field-programmable Ising array (FPIA).
//
// The FPIA is an island-style FPGA in which every logic block is an in-memory
// computing (IMC) Ising block. The default sizes are the "shared" architecture
// of the design: I = 140 external inputs and O = 40 spins per IMC block,
// connection-block flexibilities F_I = 0.15 and F_O = 0.2, and routing wires
// spanning R_tile = 4 tiles. The array size, channel width and I/O pin count
// are not fixed by the architecture study and are this implementation's
// choices (see the README).
//
// Configuration (coupling weights, spin enables and initial states, routing
// multiplexer selects) is written over one broadcast bus, cfg_t: every
// configurable block compares kind, x and y with its own and, on a match,
// stores data at the local address idx. One write per clock cycle.
package fpia_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned FPIA_I      = 140; // external inputs per IMC block
  localparam int unsigned FPIA_O      = 40;  // spins (outputs) per IMC block
  localparam int unsigned FPIA_M      = 2;   // M x M array of IMC tiles
  localparam int unsigned FPIA_W      = 40;  // tracks per channel (both directions)
  localparam int unsigned FPIA_L      = 4;   // wire length in tiles (R_tile)
  localparam int unsigned FPIA_FCI    = 15;  // F_I in percent of the channel tracks
  localparam int unsigned FPIA_FCO    = 20;  // F_O in percent of the channel tracks
  localparam int unsigned FPIA_IOP    = 4;   // pad pins per I/O block and direction
  localparam int unsigned AMP_W       = 8;   // annealing noise amplitude width

  // ---------------------------------------------------------------- sides
  // Side of a switch block or of an IMC block. Pin p of an IMC block sits on
  // side p % 4.
  typedef enum logic [1:0] {
    SIDE_T = 2'd0,
    SIDE_R = 2'd1,
    SIDE_B = 2'd2,
    SIDE_L = 2'd3
  } side_e;

  // ---------------------------------------------------------------- config bus
  typedef enum logic [2:0] {
    CFG_NONE = 3'd0,
    CFG_IMC  = 3'd1,  // coupling weight: idx = {row[7:0], col[7:0]}, data[3:0] = weight_t
    CFG_SPIN = 3'd2,  // spin control: idx = {op[7:0], spin[7:0]}, op 0 enable, op 1 state; data[0]
    CFG_SB   = 3'd3,  // switch-block mux: idx = {side[7:0], track[7:0]}, data[1:0] select
    CFG_CBX  = 3'd4,  // horizontal-channel connection block (see conn_block)
    CFG_CBY  = 3'd5   // vertical-channel connection block
  } cfg_kind_e;

  typedef struct packed {
    logic      we;
    cfg_kind_e kind;
    logic [7:0]  x;
    logic [7:0]  y;
    logic [15:0] idx;
    logic [7:0]  data;
  } cfg_t;

  // ---------------------------------------------------------------- weights
  // A differential 2-bit coupling weight held in four binary cells: two on the
  // positive and two on the negative line of the differential pair, with read
  // strengths 1x and 2x. Value = (p1 + 2*p2) - (n1 + 2*n2), range -3..+3.
  typedef struct packed {
    logic n2;
    logic n1;
    logic p2;
    logic p1;
  } weight_t;

  function automatic logic signed [3:0] weight_value(weight_t w);
    logic signed [3:0] pos, neg;
    pos = {2'b00, w.p2, w.p1};
    neg = {2'b00, w.n2, w.n1};
    return pos - neg;
  endfunction

  // Width of a signed dot product of n binary inputs with weights in -3..3.
  function automatic int unsigned dot_width(int unsigned n);
    return $clog2(3 * n + 1) + 1;
  endfunction

  // ---------------------------------------------------------------- routing
  // Number of tracks a pin reaches for a flexibility of pct percent of w tracks.
  function automatic int unsigned fc_count(int unsigned w, int unsigned pct);
    int unsigned n;
    n = (w * pct + 99) / 100;
    return (n == 0) ? 1 : n;
  endfunction

  // j-th track (0..w-1) reached by pin p when every pin reaches n tracks:
  // spread evenly over the channel, shifted by one track per pin.
  function automatic int unsigned fc_track(int unsigned p, int unsigned j,
                                           int unsigned w, int unsigned n);
    return (p + (j * w) / n) % w;
  endfunction

  // Wilton switch pattern on h tracks: the track on side `to` that a wire
  // arriving on side `from` at track t connects to.
  function automatic int unsigned wilton_map(side_e from, side_e to,
                                             int unsigned t, int unsigned h);
    int unsigned r;
    r = t;
    unique case (from)
      SIDE_L: unique case (to)
        SIDE_T:  r = (h - t) % h;
        SIDE_B:  r = (h + t - 1) % h;
        default: r = t;
      endcase
      SIDE_R: unique case (to)
        SIDE_T:  r = (h + t - 1) % h;
        SIDE_B:  r = (2 * h - 2 - t) % h;
        default: r = t;
      endcase
      SIDE_B: unique case (to)
        SIDE_L:  r = (t + 1) % h;
        SIDE_R:  r = (2 * h - 2 - t) % h;
        default: r = t;
      endcase
      SIDE_T: unique case (to)
        SIDE_L:  r = (h - t) % h;
        SIDE_R:  r = (t + 1) % h;
        default: r = t;
      endcase
    endcase
    return r;
  endfunction

  // Inverse of wilton_map: the track on side `from` that reaches track k on
  // side `to`.
  function automatic int unsigned wilton_src(side_e from, side_e to,
                                             int unsigned k, int unsigned h);
    int unsigned r;
    r = 0;
    for (int unsigned t = 0; t < h; t++)
      if (wilton_map(from, to, t, h) == k) r = t;
    return r;
  endfunction

  // Does the wire leaving switch block (x, y) on side s at track k (of h per
  // direction) start there? Wires span l tiles and their starting points are
  // staggered by track; at the array edge every wire starts.
  function automatic logic wire_starts(side_e s, int unsigned x, int unsigned y,
                                       int unsigned k, int unsigned m,
                                       int unsigned l);
    unique case (s)
      SIDE_R:  return (x == 0) || (((x + k) % l) == 0);
      SIDE_L:  return (x == m) || (((m - x + k) % l) == 0);
      SIDE_T:  return (y == 0) || (((y + k) % l) == 0);
      default: return (y == m) || (((m - y + k) % l) == 0);
    endcase
  endfunction

  // Source side of select value sel (1..3) for an outgoing wire on side s:
  // 1 = straight through (opposite side), 2 and 3 = the two turns.
  function automatic side_e sb_source(side_e s, int unsigned sel);
    unique case (sel)
      1:       return side_e'((int'(s) + 2) % 4);
      2:       return side_e'((int'(s) + 1) % 4);
      default: return side_e'((int'(s) + 3) % 4);
    endcase
  endfunction

endpackage
