// tb_conn_block: self-checking test of a connection block.
//
// A full-size connection block (W = 40 tracks, 35 input and 10 output pins on
// each side, F_I = 0.15, F_O = 0.2) gets random input selects and a random,
// sparse set of output switches. For random track and pin values the
// testbench checks every departing track and every input pin against its own
// model: pin p reaches tracks (p + j*W/n) mod W, j < n, n = ceil(F*W); a
// track driven by an enabled output switch carries the lowest such pin's
// value, otherwise it passes through; an input pin reads its selected track
// after the switches, or 0 when its select is 0. Writes to another channel
// segment must be ignored.
module tb_conn_block;
  import fpia_pkg::*;

  localparam int unsigned W   = FPIA_W;
  localparam int unsigned NIA = FPIA_I / 4;
  localparam int unsigned NOA = FPIA_O / 4;
  localparam int unsigned NIB = FPIA_I / 4;
  localparam int unsigned NOB = FPIA_O / 4;
  localparam int unsigned NPI = NIA + NIB;
  localparam int unsigned NPO = NOA + NOB;
  localparam int NCI = (int'(W) * int'(FPIA_FCI) + 99) / 100;
  localparam int NCO = (int'(W) * int'(FPIA_FCO) + 99) / 100;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n;
  cfg_t cfg;
  logic [W-1:0]   trk_in, trk_out;
  logic [NOA-1:0] drv_a;
  logic [NOB-1:0] drv_b;
  logic [NIA-1:0] rd_a;
  logic [NIB-1:0] rd_b;

  conn_block #(.W(W), .NIA(NIA), .NOA(NOA), .NIB(NIB), .NOB(NOB),
               .FCI(FPIA_FCI), .FCO(FPIA_FCO), .KIND(CFG_CBY), .X(2), .Y(1)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .trk_in(trk_in), .trk_out(trk_out),
    .drv_a(drv_a), .drv_b(drv_b), .rd_a(rd_a), .rd_b(rd_b));

  int checks = 0, failures = 0;
  int isel_ref [NPI];
  bit osw_ref [NPO][NCO];
  int n_driven = 0, n_read = 0;

  function automatic int trk(int p, int j, int n);
    return (p + (j * int'(W)) / n) % int'(W);
  endfunction

  task automatic wr(input int x, input int kind_y, input logic [15:0] idx, input int v);
    cfg.we = 1'b1; cfg.kind = CFG_CBY; cfg.x = 8'(x); cfg.y = 8'(kind_y);
    cfg.idx = idx; cfg.data = 8'(v);
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  task automatic check(input string what);
    logic [W-1:0]   t_ref;
    logic [NPO-1:0] drv;
    logic [NPI-1:0] rd, rd_ref;
    bit             taken [W];
    #1;
    drv = {drv_b, drv_a};
    rd  = {rd_b, rd_a};
    t_ref = trk_in;
    for (int t = 0; t < int'(W); t++) taken[t] = 0;
    for (int q = 0; q < int'(NPO); q++)
      for (int j = 0; j < NCO; j++)
        if (osw_ref[q][j] && !taken[trk(q, j, NCO)]) begin
          taken[trk(q, j, NCO)] = 1;
          t_ref[trk(q, j, NCO)] = drv[q];
          n_driven++;
        end
    for (int p = 0; p < int'(NPI); p++) begin
      rd_ref[p] = (isel_ref[p] == 0) ? 1'b0 : t_ref[trk(p, isel_ref[p] - 1, NCI)];
      if (isel_ref[p] != 0) n_read++;
    end
    checks++;
    if (trk_out !== t_ref) begin
      failures++;
      if (failures < 10) $display("FAIL %s tracks %h expected %h", what, trk_out, t_ref);
    end
    checks++;
    if (rd !== rd_ref) begin
      failures++;
      if (failures < 10) $display("FAIL %s pins %h expected %h", what, rd, rd_ref);
    end
  endtask

  task automatic randomize_io();
    trk_in = {$urandom, $urandom};
    drv_a = NOA'($urandom);
    drv_b = NOB'($urandom);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; cfg = '0;
    foreach (isel_ref[p]) isel_ref[p] = 0;
    foreach (osw_ref[q, j]) osw_ref[q][j] = 0;
    randomize_io();
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check("reset");

    for (int round = 0; round < 5; round++) begin
      for (int p = 0; p < int'(NPI); p++) begin
        isel_ref[p] = int'($urandom % (NCI + 1));
        wr(2, 1, 16'(p), isel_ref[p]);
      end
      for (int q = 0; q < int'(NPO); q++)
        for (int j = 0; j < NCO; j++) begin
          osw_ref[q][j] = ($urandom % 6) == 0;
          wr(2, 1, {1'b1, 11'(q), 4'(j)}, int'(osw_ref[q][j]));
        end
      // writes to other segments are ignored
      wr(1, 1, 16'd0, (isel_ref[0] + 1) % (NCI + 1));
      wr(2, 2, {1'b1, 11'd0, 4'd0}, int'(!osw_ref[0][0]));
      for (int v = 0; v < 20; v++) begin
        randomize_io();
        check("random");
      end
    end
    checks++;
    if (n_driven == 0 || n_read == 0) begin
      failures++;
      $display("FAIL no driven track or no connected pin");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
