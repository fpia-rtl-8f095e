// tb_imc_xbar: self-checking test of the coupling-weight crossbar model.
//
// Writes a random differential weight into every cell of a full-size
// (I+O) x O array, then applies random input vectors (sparse, dense, all
// ones, all zeros) and compares every column's dot product with a sum the
// testbench forms from its own copy of the cell bits:
// (p1 + 2 p2) - (n1 + 2 n2) per selected row. Also checks that writes
// addressed to another block or out of range leave the array unchanged.
module tb_imc_xbar;
  import fpia_pkg::*;

  localparam int unsigned I  = FPIA_I;
  localparam int unsigned O  = FPIA_O;
  localparam int unsigned DW = dot_width(I + O);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  cfg_t                 cfg;
  logic [I+O-1:0]       in_vec;
  logic signed [DW-1:0] dot [O];

  imc_xbar #(.I(I), .O(O), .X(1), .Y(2)) dut (
    .clk(clk), .cfg(cfg), .in_vec(in_vec), .dot(dot)
  );

  int checks = 0, failures = 0;
  logic [3:0] shadow [I+O][O];

  task automatic write_cell(input int x, input int y, input int r, input int c,
                            input logic [3:0] v);
    cfg.we   = 1'b1;
    cfg.kind = CFG_IMC;
    cfg.x    = 8'(x);
    cfg.y    = 8'(y);
    cfg.idx  = {8'(r), 8'(c)};
    cfg.data = {4'b0, v};
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  function automatic int ref_dot(int c);
    int s;
    s = 0;
    for (int r = 0; r < int'(I + O); r++)
      if (in_vec[r])
        s += (int'(shadow[r][c][0]) + 2 * int'(shadow[r][c][1]))
           - (int'(shadow[r][c][2]) + 2 * int'(shadow[r][c][3]));
    return s;
  endfunction

  task automatic check_all(input string what);
    #1;
    for (int c = 0; c < int'(O); c++) begin
      checks++;
      if (int'(dot[c]) != ref_dot(c)) begin
        failures++;
        if (failures < 10)
          $display("FAIL %s col %0d: dot=%0d expected %0d", what, c, dot[c], ref_dot(c));
      end
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    in_vec = '0;
    @(posedge clk);
    #1;
    for (int r = 0; r < int'(I + O); r++)
      for (int c = 0; c < int'(O); c++) begin
        shadow[r][c] = 4'($urandom);
        write_cell(1, 2, r, c, shadow[r][c]);
      end

    in_vec = '0;
    check_all("zero");
    in_vec = '1;
    check_all("ones");
    for (int v = 0; v < 40; v++) begin
      for (int r = 0; r < int'(I + O); r++) in_vec[r] = ($urandom % 8) == 0;
      check_all("sparse");
      for (int r = 0; r < int'(I + O); r++) in_vec[r] = $urandom % 2;
      check_all("dense");
    end
    // one row at a time: every column sees exactly one weight
    for (int r = 0; r < int'(I + O); r += 7) begin
      in_vec = '0;
      in_vec[r] = 1'b1;
      check_all("single");
    end

    // writes to another block, or beyond the array, are ignored
    write_cell(2, 2, 0, 0, ~shadow[0][0]);
    write_cell(1, 1, 0, 0, ~shadow[0][0]);
    write_cell(1, 2, I + O, 0, 4'hF);
    write_cell(1, 2, 0, O, 4'hF);
    in_vec = '1;
    check_all("foreign-writes");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
