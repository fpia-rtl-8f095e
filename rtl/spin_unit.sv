// spin_unit: the O spins of an IMC block with their step activation and
// annealing noise.
//
// Each spin holds a binary state x in {0,1}. On every update cycle
// (step_en = 1) all enabled spins update at once, in parallel, from the dot
// products of the coupling array:
//   x[c] <= en[c] & ((dot[c] + noise[c]) > 0)
// A disabled spin (an unused position, "EMPTY" when the block is not fully
// occupied) stays 0 and so adds nothing to any dot product. The annealing
// noise is noise[c] = (r[c] * amp) >>> 7, where r[c] is the low byte of a
// per-spin xorshift32 generator read as a signed number (-128..127) and amp
// the common amplitude from the controller; it lies in [-amp, amp). A
// schedule that lowers amp to 0 turns the update into the plain
// deterministic step function. Each generator advances once per update.
//
// Interface: cfg writes of kind CFG_SPIN addressed to (X, Y) set a spin's
// enable (idx[15:8] = 0) or its state (idx[15:8] = 1) to data[0]; this is how
// a solve is initialised. Reset clears enables and states and loads the
// generator seeds. The state is registered: spin changes one cycle after
// step_en.
//
// From the architecture: binary spins, a step non-linearity over the dot
// product, annealing in the spin circuitry, parallel update, unused spins.
// This design's choice: the noise generator, its scaling and the tie rule
// (a field of exactly 0 gives x = 0).
module spin_unit
  import fpia_pkg::*;
#(
  parameter int unsigned O  = FPIA_O,
  parameter int unsigned DW = dot_width(FPIA_I + FPIA_O),
  parameter int unsigned X  = 1,
  parameter int unsigned Y  = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  logic signed [DW-1:0]    dot [O],
  input  logic                    step_en,
  input  logic [AMP_W-1:0]        noise_amp,
  output logic [O-1:0]            spin
);

  localparam int unsigned SW = DW + 2;

  logic [O-1:0] en;
  logic [31:0]  rng [O];

  // Distinct non-zero seed per block and spin.
  function automatic logic [31:0] seed(int unsigned c);
    logic [31:0] s;
    s = 32'h2545_F491 ^ (32'((X * 64 + Y) * 256 + c) * 32'h9E37_79B9);
    return (s == 0) ? 32'h1 : s;
  endfunction

  function automatic logic [31:0] xorshift32(logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  logic signed [SW-1:0] field [O];
  logic [O-1:0]         next_spin;

  always_comb begin
    for (int unsigned c = 0; c < O; c++) begin
      logic signed [AMP_W+8:0] prod;
      prod       = $signed(rng[c][7:0]) * $signed({1'b0, noise_amp});
      field[c]   = SW'(dot[c]) + SW'(prod >>> 7);
      next_spin[c] = en[c] && (field[c] > 0);
    end
  end

  logic cfg_hit;
  assign cfg_hit = cfg.we && cfg.kind == CFG_SPIN && cfg.x == 8'(X) && cfg.y == 8'(Y)
                   && 32'(cfg.idx[7:0]) < O;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en   <= '0;
      spin <= '0;
      for (int unsigned c = 0; c < O; c++) rng[c] <= seed(c);
    end else if (step_en) begin
      spin <= next_spin;
      for (int unsigned c = 0; c < O; c++) rng[c] <= xorshift32(rng[c]);
    end else if (cfg_hit) begin
      if (cfg.idx[15:8] == 8'd0) en[cfg.idx[7:0]]   <= cfg.data[0];
      else                       spin[cfg.idx[7:0]] <= cfg.data[0];
    end
  end

endmodule
