// switch_block: programmable switch block at a crossing of a horizontal and a
// vertical routing channel (grid point (X, Y), 0..M in each direction).
//
// Every channel has H = W/2 one-way tracks in each direction. Routing wires
// span L tiles (R_tile); the tiles where a wire starts are staggered by track
// number (wire_starts in fpia_pkg), and at the array edge every wire starts.
// For each outgoing track k on side s:
//  * if a wire starts here, a 4-way multiplexer drives it: 0 = off (drives 0),
//    1 = straight on from the opposite side, track k, 2 and 3 = a turn from
//    side s+1 or s+3 (sides T, R, B, L numbered 0..3), from the track that
//    the Wilton pattern (wilton_map) connects to track k. So each incoming
//    wire end can reach three outgoing wires, one per other side (Fs = 3),
//    and turns change the track number, which is what lets Wilton patterns
//    reach every track.
//  * otherwise the wire passes through: the track continues from the
//    opposite side unchanged.
//
// Interface: arr[s] are the tracks arriving on side s, dep[s] the tracks
// leaving on side s; combinational between them. Sides without a channel (at
// the array edge) get arr = 0 and their dep is ignored. Configuration: cfg
// writes of kind CFG_SB to (X, Y), idx = {side, track}, data[1:0] = select;
// writes to pass-through tracks are ignored. Reset turns every mux off.
//
// From the architecture: switch blocks for bends and extensions, the Wilton
// topology with each wire connected to three others, wire length R_tile = 4.
// This design's choice: one-way tracks with multiplexers, the staggering of
// wire starts and the track numbering.
module switch_block
  import fpia_pkg::*;
#(
  parameter int unsigned W = FPIA_W,
  parameter int unsigned M = FPIA_M,
  parameter int unsigned L = FPIA_L,
  parameter int unsigned X = 0,
  parameter int unsigned Y = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  logic [3:0][W/2-1:0]     arr,
  output logic [3:0][W/2-1:0]     dep
);

  localparam int unsigned H = W / 2;

  logic hit;
  assign hit = cfg.we && cfg.kind == CFG_SB && cfg.x == 8'(X) && cfg.y == 8'(Y);

  for (genvar s = 0; s < 4; s++) begin : g_side
    for (genvar k = 0; k < H; k++) begin : g_trk
      localparam side_e SO  = side_e'(s);
      localparam side_e S1  = sb_source(SO, 1);
      localparam side_e S2  = sb_source(SO, 2);
      localparam side_e S3  = sb_source(SO, 3);
      localparam int unsigned T2 = wilton_src(S2, SO, k, H);
      localparam int unsigned T3 = wilton_src(S3, SO, k, H);

      if (wire_starts(SO, X, Y, k, M, L)) begin : g_start
        logic [1:0] sel;
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n) sel <= 2'd0;
          else if (hit && cfg.idx[15:8] == 8'(s) && cfg.idx[7:0] == 8'(k))
            sel <= cfg.data[1:0];

        logic d;
        always_comb
          unique case (sel)
            2'd1:    d = arr[S1][k];
            2'd2:    d = arr[S2][T2];
            2'd3:    d = arr[S3][T3];
            default: d = 1'b0;
          endcase
        assign dep[s][k] = d;
      end else begin : g_pass
        assign dep[s][k] = arr[S1][k];
      end
    end
  end

endmodule
