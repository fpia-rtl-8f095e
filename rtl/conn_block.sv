// conn_block: connection block of one routing-channel segment.
//
// A channel segment runs between two switch blocks and carries W one-way
// tracks: tracks 0..W/2-1 run towards increasing x (or y), tracks W/2..W-1
// towards decreasing x (or y). The segment is flanked by two blocks, side A
// (below a horizontal channel, left of a vertical one) and side B (above,
// right); each is an IMC block side or a perimeter I/O block. The connection
// block gives those blocks their access to the tracks, as in an island-style
// FPGA, but only to a fraction of the tracks:
//  * input pins (fabric to block): pin p can read n_in = ceil(F_I * W) tracks,
//    fc_track(p, j, W, n_in) for j = 0..n_in-1; a per-pin select picks one
//    (0 = pin reads 0, j+1 = j-th track).
//  * output pins (block to fabric): pin q can drive n_out = ceil(F_O * W)
//    tracks, fc_track(q, j, W, n_out); a per-(q, j) bit turns that switch on.
//    A driven track carries the pin's value from this segment on; otherwise
//    the track passes through unchanged. If two enabled switches hit the same
//    track, the lower pin number wins (a mapping should never do that).
// Pins are numbered side A first, then side B; input pins read the tracks
// after the output switches.
//
// Interface: trk_in comes from the upstream switch blocks, trk_out goes to
// the downstream ones; purely combinational between them. Configuration: cfg
// writes of kind KIND addressed to (X, Y); idx[15] = 0 writes the select of
// input pin idx[14:0] with data; idx[15] = 1 writes the switch bit data[0] of
// output pin idx[14:4], track choice idx[3:0]. Reset turns every connection
// off.
//
// From the architecture: connection to the nearest channel, F_I and F_O as
// fractions of the channel tracks. This design's choice: one-way
// multiplexer-based tracks (needed for a two-state digital model), the
// evenly spread track pattern, and the configuration encoding.
module conn_block
  import fpia_pkg::*;
#(
  parameter int unsigned W    = FPIA_W,
  parameter int unsigned NIA  = FPIA_I / 4,
  parameter int unsigned NOA  = FPIA_O / 4,
  parameter int unsigned NIB  = FPIA_I / 4,
  parameter int unsigned NOB  = FPIA_O / 4,
  parameter int unsigned FCI  = FPIA_FCI,
  parameter int unsigned FCO  = FPIA_FCO,
  parameter cfg_kind_e   KIND = CFG_CBX,
  parameter int unsigned X    = 1,
  parameter int unsigned Y    = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic [W-1:0]     trk_in,
  output logic [W-1:0]     trk_out,
  input  logic [NOA-1:0]   drv_a,
  input  logic [NOB-1:0]   drv_b,
  output logic [NIA-1:0]   rd_a,
  output logic [NIB-1:0]   rd_b
);

  localparam int unsigned NPI  = NIA + NIB;
  localparam int unsigned NPO  = NOA + NOB;
  localparam int unsigned NCI  = fc_count(W, FCI);
  localparam int unsigned NCO  = fc_count(W, FCO);
  localparam int unsigned SELW = $clog2(NCI + 1);

  logic [SELW-1:0] isel [NPI];
  logic [NCO-1:0]  osw  [NPO];

  logic [NPO-1:0] drv;
  logic [NPI-1:0] rd;
  assign drv  = {drv_b, drv_a};
  assign rd_a = rd[NIA-1:0];
  assign rd_b = rd[NPI-1:NIA];

  always_comb begin
    trk_out = trk_in;
    for (int q = int'(NPO) - 1; q >= 0; q--)
      for (int unsigned j = 0; j < NCO; j++)
        if (osw[q][j]) trk_out[fc_track(q, j, W, NCO)] = drv[q];
  end

  always_comb begin
    for (int unsigned p = 0; p < NPI; p++) begin
      rd[p] = 1'b0;
      for (int unsigned j = 0; j < NCI; j++)
        if (32'(isel[p]) == j + 1) rd[p] = trk_out[fc_track(p, j, W, NCI)];
    end
  end

  logic hit;
  assign hit = cfg.we && cfg.kind == KIND && cfg.x == 8'(X) && cfg.y == 8'(Y);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned p = 0; p < NPI; p++) isel[p] <= '0;
      for (int unsigned q = 0; q < NPO; q++) osw[q]  <= '0;
    end else if (hit) begin
      if (!cfg.idx[15]) begin
        if (32'(cfg.idx[14:0]) < NPI) isel[cfg.idx[14:0]] <= SELW'(cfg.data);
      end else if (32'(cfg.idx[14:4]) < NPO && 32'(cfg.idx[3:0]) < NCO) begin
        osw[cfg.idx[14:4]][cfg.idx[3:0]] <= cfg.data[0];
      end
    end
  end

  // A select beyond the pin's track list would leave the pin unconnected.
  a_isel_range: assert property (@(posedge clk) disable iff (!rst_n)
    hit && !cfg.idx[15] && 32'(cfg.idx[14:0]) < NPI |-> 32'(cfg.data) <= NCI)
    else $error("conn_block: input select %0d beyond %0d tracks", cfg.data, NCI);

  initial assert (NCO <= 16) else $fatal(1, "conn_block: at most 16 tracks per output pin");

endmodule
