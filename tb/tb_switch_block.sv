// tb_switch_block: self-checking test of the Wilton switch block.
//
// Two full-width switch blocks of a 2 x 2 array are tested: an interior one
// at (1, 1) and an edge one at (0, 2). For every outgoing track the
// testbench decides on its own whether a wire starts there (staggered starts
// every L tiles, all wires start at the edge they leave from), programs a
// random select into the starting ones, drives random arriving tracks and
// checks every departing track: 0 when off, the opposite side's same track
// when straight, and for a turn the track given by a Wilton table written
// out below (as published for the Wilton switch block). Pass-through tracks
// must copy the opposite side.
module tb_switch_block;
  import fpia_pkg::*;

  localparam int unsigned W = FPIA_W;
  localparam int unsigned H = W / 2;
  localparam int unsigned M = FPIA_M;
  localparam int unsigned L = FPIA_L;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n;
  cfg_t cfg;
  logic [3:0][H-1:0] arr [2];
  logic [3:0][H-1:0] dep [2];

  switch_block #(.W(W), .M(M), .L(L), .X(1), .Y(1)) dut0 (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .arr(arr[0]), .dep(dep[0]));
  switch_block #(.W(W), .M(M), .L(L), .X(0), .Y(2)) dut1 (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .arr(arr[1]), .dep(dep[1]));

  int checks = 0, failures = 0;
  int n_start = 0, n_pass = 0, n_turn = 0;
  int sel_ref [2][4][H];
  int posx [2] = '{1, 0};
  int posy [2] = '{1, 2};

  // sides: 0 top, 1 right, 2 bottom, 3 left
  function automatic bit starts(int s, int x, int y, int k);
    case (s)
      1: return x == 0 || (x + k) % int'(L) == 0;       // rightwards
      3: return x == int'(M) || (int'(M) - x + k) % int'(L) == 0;
      0: return y == 0 || (y + k) % int'(L) == 0;       // upwards
      default: return y == int'(M) || (int'(M) - y + k) % int'(L) == 0;
    endcase
  endfunction

  // Wilton: track reached on side `to` by a wire arriving on side `from`, track t.
  function automatic int wmap(int from, int to, int t);
    int h;
    h = int'(H);
    if (from == to + 2 || to == from + 2) return t;
    case ({from[1:0], to[1:0]})
      {2'd3, 2'd0}: return (h - t) % h;          // left  -> top
      {2'd3, 2'd2}: return (h + t - 1) % h;      // left  -> bottom
      {2'd1, 2'd0}: return (h + t - 1) % h;      // right -> top
      {2'd1, 2'd2}: return (2 * h - 2 - t) % h;  // right -> bottom
      {2'd2, 2'd3}: return (t + 1) % h;          // bottom -> left
      {2'd2, 2'd1}: return (2 * h - 2 - t) % h;  // bottom -> right
      {2'd0, 2'd3}: return (h - t) % h;          // top -> left
      default:      return (t + 1) % h;          // top -> right
    endcase
  endfunction

  function automatic logic expected(int d, int s, int k);
    int from, sel;
    if (!starts(s, posx[d], posy[d], k)) return arr[d][(s + 2) % 4][k];
    sel = sel_ref[d][s][k];
    if (sel == 0) return 1'b0;
    from = (sel == 1) ? (s + 2) % 4 : (sel == 2) ? (s + 1) % 4 : (s + 3) % 4;
    for (int t = 0; t < int'(H); t++)
      if (wmap(from, s, t) == k) return arr[d][from][t];
    return 1'b0;
  endfunction

  task automatic check(input string what);
    #1;
    for (int d = 0; d < 2; d++)
      for (int s = 0; s < 4; s++)
        for (int k = 0; k < int'(H); k++) begin
          checks++;
          if (dep[d][s][k] !== expected(d, s, k)) begin
            failures++;
            if (failures < 10)
              $display("FAIL %s sb%0d side %0d track %0d: %b expected %b (sel %0d)",
                       what, d, s, k, dep[d][s][k], expected(d, s, k), sel_ref[d][s][k]);
          end
        end
  endtask

  task automatic write_sel(input int d, input int s, input int k, input int v);
    cfg.we = 1'b1; cfg.kind = CFG_SB; cfg.x = 8'(posx[d]); cfg.y = 8'(posy[d]);
    cfg.idx = {8'(s), 8'(k)}; cfg.data = 8'(v);
    @(posedge clk);
    #1 cfg.we = 1'b0;
    if (starts(s, posx[d], posy[d], k)) sel_ref[d][s][k] = v;
  endtask

  task automatic random_arr();
    for (int d = 0; d < 2; d++)
      for (int s = 0; s < 4; s++)
        for (int k = 0; k < int'(H); k++) arr[d][s][k] = 1'($urandom);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; cfg = '0;
    for (int d = 0; d < 2; d++)
      for (int s = 0; s < 4; s++)
        for (int k = 0; k < int'(H); k++) sel_ref[d][s][k] = 0;
    random_arr();
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check("reset");

    for (int round = 0; round < 6; round++) begin
      for (int d = 0; d < 2; d++)
        for (int s = 0; s < 4; s++)
          for (int k = 0; k < int'(H); k++) begin
            int v;
            v = (round == 0) ? 1 : int'($urandom % 4);
            write_sel(d, s, k, v);
            if (starts(s, posx[d], posy[d], k)) begin
              n_start++;
              if (v >= 2) n_turn++;
            end else n_pass++;
          end
      for (int v = 0; v < 10; v++) begin
        random_arr();
        check("random");
      end
    end
    $display("starting wires programmed %0d, turns %0d, pass-through writes %0d",
             n_start, n_turn, n_pass);
    checks++;
    if (n_start == 0 || n_turn == 0 || n_pass == 0) begin
      failures++;
      $display("FAIL some switch-block case never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
