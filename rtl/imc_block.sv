// imc_block: one mixed-signal in-memory-computing Ising block, the logic block
// of the FPIA fabric.
//
// The block joins an (I+O) x O coupling array (imc_xbar) and O spins
// (spin_unit). The array's rows are the I digital inputs from the connection
// blocks followed by the block's own O spin outputs, fed back inside the
// block; its O columns give one dot product per spin. So every spin can have
// up to I couplings to spins of other blocks and up to O couplings to spins of
// the same block. The O spin states leave the block towards the connection
// blocks and are also visible on spin for read-out.
//
// Interface: ext_in are the I input pins, spin the O output pins; cfg carries
// weight (CFG_IMC) and spin (CFG_SPIN) writes for block (X, Y). One update per
// cycle with step_en = 1; the new states appear one cycle later.
//
// From the architecture: the structure (Fig. 4b of the paper). This design's
// choice: the digital, exact model of the analog dot products.
module imc_block
  import fpia_pkg::*;
#(
  parameter int unsigned I = FPIA_I,
  parameter int unsigned O = FPIA_O,
  parameter int unsigned X = 1,
  parameter int unsigned Y = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic [I-1:0]      ext_in,
  input  logic              step_en,
  input  logic [AMP_W-1:0]  noise_amp,
  output logic [O-1:0]      spin
);

  localparam int unsigned DW = dot_width(I + O);

  logic signed [DW-1:0] dot [O];

  imc_xbar #(.I(I), .O(O), .X(X), .Y(Y)) u_xbar (
    .clk    (clk),
    .cfg    (cfg),
    .in_vec ({spin, ext_in}),
    .dot    (dot)
  );

  spin_unit #(.O(O), .DW(DW), .X(X), .Y(Y)) u_spins (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (cfg),
    .dot       (dot),
    .step_en   (step_en),
    .noise_amp (noise_amp),
    .spin      (spin)
  );

endmodule
