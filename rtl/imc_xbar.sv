// imc_xbar: behavioural model of the (I+O) x O coupling-weight crossbar of an
// IMC block, with its write path and its mixed-signal vector-by-matrix
// multiplier (VMM).
//
// In silicon this is an analog array: every column (one per spin) sums the
// read currents of the cells whose row input is 1, as a differential pair so
// that weights can be negative. This model computes the ideal result of that
// operation exactly, as a signed integer per column:
//   dot[c] = sum over rows r of in_vec[r] * weight(r, c)
// Rows 0..I-1 are the external inputs from the connection blocks and rows
// I..I+O-1 the block's own spins. Each weight is a differential 2-bit value,
// four binary cells with 1x and 2x read strength, so -3..+3 (weight_t).
// Noise, non-linearity and settling of the analog array are not modelled.
//
// Interface: weights are written by cfg writes of kind CFG_IMC addressed to
// (X, Y), idx = {row, col}, data[3:0] = weight_t, one per clock. The array is
// memory and has no reset: every weight must be written before use. dot is
// combinational in in_vec and in the stored weights; the spin unit samples it
// at the end of each update cycle.
//
// From the architecture: the (I+O) x O shape, the local feedback rows, the
// two-quadrant 2-bit weights. This design's choice: the write bus, which
// stands in for the shared analog programming circuitry.
module imc_xbar
  import fpia_pkg::*;
#(
  parameter int unsigned I  = FPIA_I,
  parameter int unsigned O  = FPIA_O,
  parameter int unsigned X  = 1,
  parameter int unsigned Y  = 1,
  localparam int unsigned DW = dot_width(I + O)
) (
  input  logic                       clk,
  input  cfg_t                       cfg,
  input  logic [I+O-1:0]             in_vec,
  output logic signed [DW-1:0]       dot [O]
);

  weight_t w [I+O][O];

  logic wr;
  assign wr = cfg.we && cfg.kind == CFG_IMC && cfg.x == 8'(X) && cfg.y == 8'(Y)
              && 32'(cfg.idx[15:8]) < I + O && 32'(cfg.idx[7:0]) < O;

  always_ff @(posedge clk)
    if (wr) w[cfg.idx[15:8]][cfg.idx[7:0]] <= weight_t'(cfg.data[3:0]);

  // One summing column per spin.
  for (genvar c = 0; c < O; c++) begin : g_col
    always_comb begin
      logic signed [DW-1:0] acc;
      acc = '0;
      for (int unsigned r = 0; r < I + O; r++)
        if (in_vec[r]) acc = acc + DW'(weight_value(w[r][c]));
      dot[c] = acc;
    end
  end

endmodule
