// fpia_top: field-programmable Ising array, an island-style FPGA whose logic
// blocks are in-memory-computing Ising blocks.
//
// Layout (grid coordinates as in VPR): IMC block (x, y), x, y = 1..M, sits in
// the middle of its tile. Horizontal channel segment chanx(i, j), i = 1..M,
// j = 0..M, runs above block row j, between switch blocks (i-1, j) and (i, j);
// vertical segment chany(i, j), i = 0..M, j = 1..M, runs right of block column
// i, between switch blocks (i, j-1) and (i, j). Each segment has its own
// connection block. Switch blocks sit at the (M+1) x (M+1) channel crossings.
// Perimeter segments also connect to I/O blocks, whose pad pins are ports of
// this module. The pins of an IMC block are spread over its four sides: pin p
// is on side p % 4 (T, R, B, L) and reaches the channel on that side.
//
// Operation: the host writes all weights, spin enables, initial spin states
// and routing selects over cfg (one write per cycle; see fpia_pkg), then
// pulses start. The controller then issues n_steps parallel updates of every
// spin, one per cycle, with annealing noise lowered by 1 after every
// amp_period updates from amp0. The routing is combinational, so a spin
// value reaches every coupled block within the update cycle. done pulses when
// the run ends; spins shows every spin state at all times (the solution).
//
// Interface: spins[x-1][y-1][c] is spin c of block (x, y).
// io_pad_in[side][n][k] drives pin k of the n-th I/O block on that edge into
// the fabric, io_pad_out[side][n][k] is read from it; an I/O pad held at 1
// and routed to an input gives a spin a bias (linear QUBO term).
//
// Configurable routing can be set up to form combinational loops (a wire
// turning around a ring of switch blocks back onto itself), as in any FPGA;
// a valid routing never does, and reset turns every switch off. Because such
// loops are possible in the netlist, lint tools report the channel tracks as
// circular combinational logic; that is inherent to programmable routing.
//
// From the architecture: the island-style arrangement of IMC blocks,
// connection blocks, switch blocks and I/O (Fig. 4a of the paper), the shared
// block parameters I, O, F_I, F_O, R_tile and the Wilton switch pattern.
// This design's choices: M, W, the number of I/O pins, one-way tracks, the
// pin placement and the configuration bus.
module fpia_top
  import fpia_pkg::*;
#(
  parameter int unsigned M   = FPIA_M,
  parameter int unsigned I   = FPIA_I,
  parameter int unsigned O   = FPIA_O,
  parameter int unsigned W   = FPIA_W,
  parameter int unsigned L   = FPIA_L,
  parameter int unsigned FCI = FPIA_FCI,
  parameter int unsigned FCO = FPIA_FCO,
  parameter int unsigned IOP = FPIA_IOP
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  cfg_t                              cfg,
  input  logic                              start,
  input  logic [15:0]                       n_steps,
  input  logic [AMP_W-1:0]                  amp0,
  input  logic [15:0]                       amp_period,
  output logic                              busy,
  output logic                              done,
  output logic [15:0]                       step_count,
  output logic [AMP_W-1:0]                  noise_amp,
  output logic [M-1:0][M-1:0][O-1:0]        spins,
  input  logic [3:0][M-1:0][IOP-1:0]        io_pad_in,
  output wire  [3:0][M-1:0][IOP-1:0]        io_pad_out
);

  localparam int unsigned H   = W / 2;
  localparam int unsigned NIS = I / 4;   // input pins per block side
  localparam int unsigned NOS = O / 4;   // output pins per block side

  initial begin
    assert (I % 4 == 0 && O % 4 == 0) else $fatal(1, "fpia_top: I and O must be multiples of 4");
    assert (W % 2 == 0) else $fatal(1, "fpia_top: W must be even");
  end

  // Tracks arriving at / departing from each switch block, per side.
  wire [M:0][M:0][3:0][H-1:0] sb_arr;
  wire [M:0][M:0][3:0][H-1:0] sb_dep;

  wire  [M-1:0][M-1:0][I-1:0] imc_in;
  logic [M-1:0][M-1:0][O-1:0] imc_out;

  logic step_en;

  // ------------------------------------------------------------ controller
  ising_ctrl u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .n_steps    (n_steps),
    .amp0       (amp0),
    .amp_period (amp_period),
    .busy       (busy),
    .done       (done),
    .step_en    (step_en),
    .noise_amp  (noise_amp),
    .step_count (step_count)
  );

  // ------------------------------------------------------------ IMC blocks
  for (genvar x = 1; x <= M; x++) begin : g_bx
    for (genvar y = 1; y <= M; y++) begin : g_by
      imc_block #(.I(I), .O(O), .X(x), .Y(y)) u_imc (
        .clk       (clk),
        .rst_n     (rst_n),
        .cfg       (cfg),
        .ext_in    (imc_in[x-1][y-1]),
        .step_en   (step_en),
        .noise_amp (noise_amp),
        .spin      (imc_out[x-1][y-1])
      );
    end
  end

  assign spins = imc_out;

  // ------------------------------------------------------------ switch blocks
  for (genvar x = 0; x <= M; x++) begin : g_sx
    for (genvar y = 0; y <= M; y++) begin : g_sy
      switch_block #(.W(W), .M(M), .L(L), .X(x), .Y(y)) u_sb (
        .clk   (clk),
        .rst_n (rst_n),
        .cfg   (cfg),
        .arr   (sb_arr[x][y]),
        .dep   (sb_dep[x][y])
      );
      if (x == 0) begin : g_el
        assign sb_arr[x][y][SIDE_L] = '0;
      end
      if (x == M) begin : g_er
        assign sb_arr[x][y][SIDE_R] = '0;
      end
      if (y == 0) begin : g_eb
        assign sb_arr[x][y][SIDE_B] = '0;
      end
      if (y == M) begin : g_et
        assign sb_arr[x][y][SIDE_T] = '0;
      end
    end
  end

  // ------------------------------------------------------------ horizontal channels
  for (genvar i = 1; i <= M; i++) begin : g_cxi
    for (genvar j = 0; j <= M; j++) begin : g_cxj
      localparam int unsigned NIA = (j >= 1) ? NIS : IOP;
      localparam int unsigned NOA = (j >= 1) ? NOS : IOP;
      localparam int unsigned NIB = (j < M) ? NIS : IOP;
      localparam int unsigned NOB = (j < M) ? NOS : IOP;
      logic [W-1:0]   t_in, t_out;
      logic [NOA-1:0] drv_a;
      logic [NOB-1:0] drv_b;
      logic [NIA-1:0] rd_a;
      logic [NIB-1:0] rd_b;

      assign t_in = {sb_dep[i][j][SIDE_L], sb_dep[i-1][j][SIDE_R]};
      assign sb_arr[i][j][SIDE_L]   = t_out[H-1:0];
      assign sb_arr[i-1][j][SIDE_R] = t_out[W-1:H];

      conn_block #(.W(W), .NIA(NIA), .NOA(NOA), .NIB(NIB), .NOB(NOB),
                   .FCI(FCI), .FCO(FCO), .KIND(CFG_CBX), .X(i), .Y(j)) u_cb (
        .clk     (clk),
        .rst_n   (rst_n),
        .cfg     (cfg),
        .trk_in  (t_in),
        .trk_out (t_out),
        .drv_a   (drv_a),
        .drv_b   (drv_b),
        .rd_a    (rd_a),
        .rd_b    (rd_b)
      );

      // side A: below the channel
      if (j >= 1) begin : g_a_imc
        for (genvar u = 0; u < NIS; u++) begin : g_i
          assign imc_in[i-1][j-1][4*u + int'(SIDE_T)] = rd_a[u];
        end
        for (genvar u = 0; u < NOS; u++) begin : g_o
          assign drv_a[u] = imc_out[i-1][j-1][4*u + int'(SIDE_T)];
        end
      end else begin : g_a_io
        assign io_pad_out[SIDE_B][i-1] = rd_a;
        assign drv_a = io_pad_in[SIDE_B][i-1];
      end
      // side B: above the channel
      if (j < M) begin : g_b_imc
        for (genvar u = 0; u < NIS; u++) begin : g_i
          assign imc_in[i-1][j][4*u + int'(SIDE_B)] = rd_b[u];
        end
        for (genvar u = 0; u < NOS; u++) begin : g_o
          assign drv_b[u] = imc_out[i-1][j][4*u + int'(SIDE_B)];
        end
      end else begin : g_b_io
        assign io_pad_out[SIDE_T][i-1] = rd_b;
        assign drv_b = io_pad_in[SIDE_T][i-1];
      end
    end
  end

  // ------------------------------------------------------------ vertical channels
  for (genvar i = 0; i <= M; i++) begin : g_cyi
    for (genvar j = 1; j <= M; j++) begin : g_cyj
      localparam int unsigned NIA = (i >= 1) ? NIS : IOP;
      localparam int unsigned NOA = (i >= 1) ? NOS : IOP;
      localparam int unsigned NIB = (i < M) ? NIS : IOP;
      localparam int unsigned NOB = (i < M) ? NOS : IOP;
      logic [W-1:0]   t_in, t_out;
      logic [NOA-1:0] drv_a;
      logic [NOB-1:0] drv_b;
      logic [NIA-1:0] rd_a;
      logic [NIB-1:0] rd_b;

      assign t_in = {sb_dep[i][j][SIDE_B], sb_dep[i][j-1][SIDE_T]};
      assign sb_arr[i][j][SIDE_B]   = t_out[H-1:0];
      assign sb_arr[i][j-1][SIDE_T] = t_out[W-1:H];

      conn_block #(.W(W), .NIA(NIA), .NOA(NOA), .NIB(NIB), .NOB(NOB),
                   .FCI(FCI), .FCO(FCO), .KIND(CFG_CBY), .X(i), .Y(j)) u_cb (
        .clk     (clk),
        .rst_n   (rst_n),
        .cfg     (cfg),
        .trk_in  (t_in),
        .trk_out (t_out),
        .drv_a   (drv_a),
        .drv_b   (drv_b),
        .rd_a    (rd_a),
        .rd_b    (rd_b)
      );

      // side A: left of the channel
      if (i >= 1) begin : g_a_imc
        for (genvar u = 0; u < NIS; u++) begin : g_i
          assign imc_in[i-1][j-1][4*u + int'(SIDE_R)] = rd_a[u];
        end
        for (genvar u = 0; u < NOS; u++) begin : g_o
          assign drv_a[u] = imc_out[i-1][j-1][4*u + int'(SIDE_R)];
        end
      end else begin : g_a_io
        assign io_pad_out[SIDE_L][j-1] = rd_a;
        assign drv_a = io_pad_in[SIDE_L][j-1];
      end
      // side B: right of the channel
      if (i < M) begin : g_b_imc
        for (genvar u = 0; u < NIS; u++) begin : g_i
          assign imc_in[i][j-1][4*u + int'(SIDE_L)] = rd_b[u];
        end
        for (genvar u = 0; u < NOS; u++) begin : g_o
          assign drv_b[u] = imc_out[i][j-1][4*u + int'(SIDE_L)];
        end
      end else begin : g_b_io
        assign io_pad_out[SIDE_R][j-1] = rd_b;
        assign drv_b = io_pad_in[SIDE_R][j-1];
      end
    end
  end

endmodule
