// tb_fpia_top: end-to-end test of the field-programmable Ising array at its
// default size (2 x 2 IMC blocks of 140 inputs and 40 spins, 40-track
// channels, length-4 wires, F_I = 0.15, F_O = 0.2).
//
// The testbench maps a small sparse Ising problem onto the fabric the way a
// place-and-route flow would, and then checks the whole solve against its own
// model of the intended problem:
//  1. clears every coupling weight and enables 16 spins per block, one of them
//     left unused ("EMPTY"), with random initial states;
//  2. programs random local couplings inside each block;
//  3. routes global connections and programs their couplings:
//       - through one channel segment's connection block only (both ways
//         between horizontally and vertically adjacent blocks),
//       - through a switch-block turn (horizontal to vertical channel),
//       - straight through a switch block into the next channel segment,
//       - from an I/O pad held at 1 (a bias, the linear QUBO term),
//       - from a spin to an I/O pad (read-out);
//     the connection-block and switch-block settings are found by the
//     testbench from its own statement of the track patterns;
//  4. runs a noiseless solve and then an annealed one through the controller,
//     and after every update compares all 160 spins with a reference update
//     computed from the intended couplings, using its own copy of the noise
//     generators.
// It counts how often each routing mechanism carried a 1 into a spin's field,
// how often the noise decided a spin, how often an unused spin was held at 0
// against a positive field, and fails if any of them never happened.
module tb_fpia_top;
  import fpia_pkg::*;

  localparam int M   = int'(FPIA_M);
  localparam int I   = int'(FPIA_I);
  localparam int O   = int'(FPIA_O);
  localparam int W   = int'(FPIA_W);
  localparam int H   = W / 2;
  localparam int L   = int'(FPIA_L);
  localparam int IOP = int'(FPIA_IOP);
  localparam int NCI = (W * int'(FPIA_FCI) + 99) / 100;
  localparam int NCO = (W * int'(FPIA_FCO) + 99) / 100;
  localparam int NIS = I / 4;
  localparam int NOS = O / 4;
  localparam int NEN = 16;                 // spins used per block

  localparam int ST = 0, SR = 1, SB = 2, SL = 3;   // sides
  localparam int SRC_NONE = 0, SRC_SPIN = 1, SRC_PAD = 2;

  // mechanisms counted
  localparam int K_LOCAL = 0, K_CB = 1, K_TURN = 2, K_STRAIGHT = 3, K_PAD = 4,
                 K_READ = 5, K_EMPTY = 6, K_NOISE = 7, K_FLIP = 8, K_DONE = 9;
  localparam int NK = 10;
  string kname [NK] = '{"local coupling", "connection-block route", "switch-block turn",
                        "switch-block straight", "pad bias", "pad read-out",
                        "unused spin held", "noise-decided update", "spin flip",
                        "run done"};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                          rst_n, start, busy, done;
  cfg_t                          cfg;
  logic [15:0]                   n_steps, amp_period, step_count;
  logic [AMP_W-1:0]              amp0, noise_amp;
  logic [M-1:0][M-1:0][O-1:0]    spins;
  logic [3:0][M-1:0][IOP-1:0]    io_pad_in;
  wire  [3:0][M-1:0][IOP-1:0]    io_pad_out;

  fpia_top dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .start(start), .n_steps(n_steps),
    .amp0(amp0), .amp_period(amp_period), .busy(busy), .done(done),
    .step_count(step_count), .noise_amp(noise_amp), .spins(spins),
    .io_pad_in(io_pad_in), .io_pad_out(io_pad_out));

  int checks = 0, failures = 0;
  int count [NK];

  // ------------------------------------------------------------ reference state
  int   wref [M][M][I+O][O];
  bit   en   [M][M][O];
  bit   xs   [M][M][O];
  logic [31:0] rng [M][M][O];
  // source of each external input pin of each block
  int   src_kind [M][M][I];
  int   src_x [M][M][I], src_y [M][M][I], src_c [M][M][I];
  int   src_mech [M][M][I];
  bit   pin_taken [M][M][I];
  // read-out pads: pad pin -> spin
  int   ro_side, ro_n, ro_k, ro_x, ro_y, ro_c;
  bit   used [string];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // ------------------------------------------------------------ config writes
  task automatic wr(input cfg_kind_e k, input int x, input int y, input logic [15:0] idx,
                    input int v);
    cfg.we = 1'b1; cfg.kind = k; cfg.x = 8'(x); cfg.y = 8'(y); cfg.idx = idx; cfg.data = 8'(v);
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  function automatic int enc(int v);
    return (v >= 0) ? v : ((-v) << 2);
  endfunction

  task automatic set_weight(input int x, input int y, input int row, input int c, input int v);
    wref[x-1][y-1][row][c] = v;
    wr(CFG_IMC, x, y, {8'(row), 8'(c)}, enc(v));
  endtask

  // ------------------------------------------------------------ routing model
  // Track j of pin p in a connection block where each pin reaches n tracks.
  function automatic int trk(int p, int j, int n);
    return (p + (j * W) / n) % W;
  endfunction

  // Does the wire leaving switch block (x, y) on side s, track k, start there?
  function automatic bit starts(int s, int x, int y, int k);
    case (s)
      SR: return x == 0 || (x + k) % L == 0;
      SL: return x == M || (M - x + k) % L == 0;
      ST: return y == 0 || (y + k) % L == 0;
      default: return y == M || (M - y + k) % L == 0;
    endcase
  endfunction

  function automatic string key(int cx, int i, int j, int t);
    return $sformatf("%0d_%0d_%0d_%0d", cx, i, j, t);
  endfunction

  // Mark a driven track and every segment it passes into unswitched.
  task automatic mark(input int cx, input int i, input int j, input int t);
    int k;
    forever begin
      used[key(cx, i, j, t)] = 1;
      k = t % H;
      if (cx == 1) begin                 // horizontal
        if (t < H) begin
          if (i == M || starts(SR, i, j, k)) break;
          i++;
        end else begin
          if (i - 1 == 0 || starts(SL, i - 1, j, k)) break;
          i--;
        end
      end else begin                     // vertical
        if (t < H) begin
          if (j == M || starts(ST, i, j, k)) break;
          j++;
        end else begin
          if (j - 1 == 0 || starts(SB, i, j - 1, k)) break;
          j--;
        end
      end
    end
  endtask

  // Pin counts of the two sides of a segment (A below/left, B above/right).
  function automatic int nout_a(int cx, int i, int j);
    return (cx == 1) ? ((j >= 1) ? NOS : IOP) : ((i >= 1) ? NOS : IOP);
  endfunction
  function automatic int nin_a(int cx, int i, int j);
    return (cx == 1) ? ((j >= 1) ? NIS : IOP) : ((i >= 1) ? NIS : IOP);
  endfunction
  function automatic int nin_b(int cx, int i, int j);
    return (cx == 1) ? ((j < M) ? NIS : IOP) : ((i < M) ? NIS : IOP);
  endfunction

  // Block on side A/B of a segment and the block side facing the segment.
  task automatic seg_block(input int cx, input int i, input int j, input bit b,
                           output int bx, output int by, output int bside);
    if (cx == 1) begin
      bx = i; by = b ? j + 1 : j; bside = b ? SB : ST;
    end else begin
      bx = b ? i + 1 : i; by = j; bside = b ? SL : SR;
    end
  endtask

  // Enable output switch (pin q, choice jj) of a segment's connection block.
  task automatic cb_drive(input int cx, input int i, input int j, input int q, input int jj);
    wr(cx == 1 ? CFG_CBX : CFG_CBY, i, j, {1'b1, 11'(q), 4'(jj)}, 1);
    mark(cx, i, j, trk(q, jj, NCO));
  endtask

  // Find and connect a free input pin on side b of the segment that can read
  // track t. Returns the block pin (block side pins) or the pad pin; -1 if none.
  task automatic cb_read(input int cx, input int i, input int j, input bit b, input int t,
                         output int blk_pin);
    int bx, by, bside, np, p;
    bit io;
    seg_block(cx, i, j, b, bx, by, bside);
    io = (bx < 1 || bx > M || by < 1 || by > M);
    np = b ? nin_b(cx, i, j) : nin_a(cx, i, j);
    blk_pin = -1;
    for (int u = 0; u < np && blk_pin < 0; u++) begin
      p = b ? nin_a(cx, i, j) + u : u;
      if (!io && pin_taken[bx-1][by-1][4 * u + bside]) continue;
      if (io && used.exists($sformatf("pad_%0d_%0d_%0d_%0d", cx, i, j, u))) continue;
      for (int jj = 0; jj < NCI; jj++)
        if (trk(p, jj, NCI) == t) begin
          wr(cx == 1 ? CFG_CBX : CFG_CBY, i, j, 16'(p), jj + 1);
          if (io) begin
            used[$sformatf("pad_%0d_%0d_%0d_%0d", cx, i, j, u)] = 1;
            blk_pin = u;
          end else begin
            pin_taken[bx-1][by-1][4 * u + bside] = 1;
            blk_pin = 4 * u + bside;
          end
          break;
        end
    end
  endtask

  // Record that input pin p of block (x, y) carries spin (sx, sy, sc).
  task automatic connect(input int x, input int y, input int p, input int kind,
                         input int sx, input int sy, input int sc, input int mech);
    src_kind[x-1][y-1][p] = kind;
    src_x[x-1][y-1][p] = sx; src_y[x-1][y-1][p] = sy; src_c[x-1][y-1][p] = sc;
    src_mech[x-1][y-1][p] = mech;
    // couple it to two used spins of the destination block
    for (int n = 0; n < 2; n++)
      set_weight(x, y, p, int'($urandom % NEN), (n == 0) ? 2 : -1 - int'($urandom % 2));
  endtask

  // Route spin (sx, sy, sc) to a block on side b of the segment its output
  // pin faces, inside one connection block.
  task automatic route_cb(input int cx, input int i, input int j, input bit srcb,
                          input int sc, input bit dstb, input int mech);
    int q, t, pin, bx, by, bside, dx, dy, dside;
    seg_block(cx, i, j, srcb, bx, by, bside);
    q = srcb ? nout_a(cx, i, j) + sc / 4 : sc / 4;
    if (sc % 4 != bside) $fatal(1, "route_cb: spin %0d is not on side %0d", sc, bside);
    for (int jj = 0; jj < NCO; jj++) begin
      t = trk(q, jj, NCO);
      if (used.exists(key(cx, i, j, t))) continue;
      cb_read(cx, i, j, dstb, t, pin);
      if (pin < 0) continue;
      cb_drive(cx, i, j, q, jj);
      seg_block(cx, i, j, dstb, dx, dy, dside);
      connect(dx, dy, pin, SRC_SPIN, bx, by, sc, mech);
      return;
    end
    $fatal(1, "route_cb: no route found");
  endtask

  // ------------------------------------------------------------ reference update
  function automatic int pin_value(int x, int y, int p);
    case (src_kind[x][y][p])
      SRC_SPIN: return int'(xs[src_x[x][y][p]-1][src_y[x][y][p]-1][src_c[x][y][p]]);
      SRC_PAD:  return 1;
      default:  return 0;
    endcase
  endfunction

  function automatic logic [31:0] seed(int x, int y, int c);
    logic [31:0] s;
    s = 32'h2545_F491 ^ (32'((x * 64 + y) * 256 + c) * 32'h9E37_79B9);
    return (s == 0) ? 32'h1 : s;
  endfunction

  function automatic logic [31:0] xnext(logic [31:0] v);
    v = v ^ (v << 13);
    v = v ^ (v >> 17);
    v = v ^ (v << 5);
    return v;
  endfunction

  task automatic ref_update(input int amp);
    bit nx [M][M][O];
    int f, nz;
    for (int x = 0; x < M; x++)
      for (int y = 0; y < M; y++)
        for (int c = 0; c < O; c++) begin
          f = 0;
          for (int p = 0; p < I; p++)
            if (wref[x][y][p][c] != 0 && pin_value(x, y, p) != 0) begin
              f += wref[x][y][p][c];
              if (en[x][y][c]) count[src_mech[x][y][p]]++;
            end
          for (int r = 0; r < O; r++)
            if (xs[x][y][r] && wref[x][y][I + r][c] != 0) begin
              f += wref[x][y][I + r][c];
              if (en[x][y][c]) count[K_LOCAL]++;
            end
          nz = f + ((int'($signed(rng[x][y][c][7:0])) * amp) >>> 7);
          nx[x][y][c] = en[x][y][c] && nz > 0;
          if (en[x][y][c] && ((nz > 0) != (f > 0))) count[K_NOISE]++;
          if (!en[x][y][c] && nz > 0) count[K_EMPTY]++;
          if (nx[x][y][c] != xs[x][y][c]) count[K_FLIP]++;
          rng[x][y][c] = xnext(rng[x][y][c]);
        end
    xs = nx;
  endtask

  task automatic compare(input string what);
    for (int x = 0; x < M; x++)
      for (int y = 0; y < M; y++)
        for (int c = 0; c < O; c++)
          chk(spins[x][y][c] == xs[x][y][c],
              $sformatf("%s: spin (%0d,%0d,%0d) = %b expected %b", what, x + 1, y + 1, c,
                        spins[x][y][c], xs[x][y][c]));
    chk(io_pad_out[ro_side][ro_n][ro_k] == xs[ro_x-1][ro_y-1][ro_c],
        $sformatf("%s: read-out pad", what));
    if (xs[ro_x-1][ro_y-1][ro_c]) count[K_READ]++;
  endtask

  // Run one solve through the controller, checking every update.
  task automatic run_solve(input int n, input int a0, input int per);
    n_steps = 16'(n); amp0 = AMP_W'(a0); amp_period = 16'(per);
    start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    for (int s = 0; s < n; s++) begin
      chk(busy == 1'b1, "busy during run");
      ref_update(int'(noise_amp));
      @(posedge clk);
      #1;
      compare($sformatf("update %0d", s));
    end
    chk(done == 1'b1 && !busy, "done after last update");
    if (done) count[K_DONE]++;
    chk(int'(step_count) == n, "step count");
    // spins hold after the run
    repeat (3) @(posedge clk);
    #1 compare("after run");
  endtask

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, k, q, pin;
    bit found;
    rst_n = 1'b0; start = 1'b0; cfg = '0; n_steps = '0; amp0 = '0; amp_period = '0;
    io_pad_in = '0;
    foreach (count[n]) count[n] = 0;
    for (int x = 0; x < M; x++)
      for (int y = 0; y < M; y++) begin
        for (int c = 0; c < O; c++) begin
          en[x][y][c] = 0; xs[x][y][c] = 0; rng[x][y][c] = seed(x + 1, y + 1, c);
        end
        for (int p = 0; p < I; p++) begin
          src_kind[x][y][p] = SRC_NONE; pin_taken[x][y][p] = 0; src_mech[x][y][p] = K_CB;
        end
      end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. clear all weights, enable spins, initial states
    for (int x = 1; x <= M; x++)
      for (int y = 1; y <= M; y++) begin
        for (int r = 0; r < I + O; r++)
          for (int c = 0; c < O; c++) set_weight(x, y, r, c, 0);
        for (int c = 0; c < NEN; c++) begin
          en[x-1][y-1][c] = (c != 5);
          xs[x-1][y-1][c] = en[x-1][y-1][c] & 1'($urandom);
          wr(CFG_SPIN, x, y, {8'd0, 8'(c)}, int'(en[x-1][y-1][c]));
          wr(CFG_SPIN, x, y, {8'd1, 8'(c)}, int'(xs[x-1][y-1][c]));
        end
      end

    // 2. local couplings: symmetric, sparse, among the used spins
    for (int x = 1; x <= M; x++)
      for (int y = 1; y <= M; y++)
        for (int a = 0; a < NEN; a++)
          for (int b = a + 1; b < NEN; b++)
            if ($urandom % 4 == 0) begin
              int v;
              v = int'($urandom % 7) - 3;
              set_weight(x, y, I + a, b, v);
              set_weight(x, y, I + b, a, v);
            end
    // the unused spin gets a positive field it must ignore
    set_weight(1, 1, I + 0, 5, 3);
    set_weight(1, 1, I + 1, 5, 3);

    // 3. global routes
    // (1,1) top spins -> (1,2) through chanx(1,1)
    route_cb(1, 1, 1, 0, 0, 1, K_CB);
    route_cb(1, 1, 1, 0, 8, 1, K_CB);
    // (1,2) bottom spin -> (1,1)
    route_cb(1, 1, 1, 1, 2, 0, K_CB);
    // (1,1) right spin -> (2,1) and back, through chany(1,1)
    route_cb(0, 1, 1, 0, 1, 1, K_CB);
    route_cb(0, 1, 1, 1, 3, 0, K_CB);
    // (2,2) left spin -> (1,2) through chany(1,2)
    route_cb(0, 1, 2, 1, 7, 0, K_CB);

    // switch-block turn: (1,1) top spin 4 on chanx(1,1) rightwards, turned
    // up at switch block (1,1) into chany(1,2), read by (2,2)'s left side.
    found = 0;
    q = 4 / 4;                            // side-A output pin of spin 4
    for (int jj = 0; jj < NCO && !found; jj++) begin
      t = trk(q, jj, NCO);
      if (t >= H || used.exists(key(1, 1, 1, t))) continue;
      k = (H - t) % H;                    // Wilton: left -> top
      if (!starts(ST, 1, 1, k) || used.exists(key(0, 1, 2, k))) continue;
      cb_read(0, 1, 2, 1, k, pin);
      if (pin < 0) continue;
      cb_drive(1, 1, 1, q, jj);
      wr(CFG_SB, 1, 1, {8'(ST), 8'(k)}, 3);   // select 3 = turn from side L
      mark(0, 1, 2, k);
      connect(2, 2, pin, SRC_SPIN, 1, 1, 4, K_TURN);
      found = 1;
    end
    chk(found, "turn route found");

    // straight through switch block (1,1): (1,2) bottom spin 6 on chanx(1,1)
    // rightwards, on into chanx(2,1), read by (2,1)'s top side.
    found = 0;
    q = nout_a(1, 1, 1) + 6 / 4;
    for (int jj = 0; jj < NCO && !found; jj++) begin
      t = trk(q, jj, NCO);
      if (t >= H || used.exists(key(1, 1, 1, t)) || used.exists(key(1, 2, 1, t))) continue;
      cb_read(1, 2, 1, 0, t, pin);
      if (pin < 0) continue;
      cb_drive(1, 1, 1, q, jj);
      if (starts(SR, 1, 1, t)) wr(CFG_SB, 1, 1, {8'(SR), 8'(t)}, 1);  // select 1 = straight
      mark(1, 2, 1, t);
      connect(2, 1, pin, SRC_SPIN, 1, 2, 6, K_STRAIGHT);
      found = 1;
    end
    chk(found, "straight route found");

    // bias: bottom pad 0 of column 1 held at 1, into (1,1)'s bottom side
    io_pad_in[SB][0][0] = 1'b1;
    found = 0;
    for (int jj = 0; jj < NCO && !found; jj++) begin
      t = trk(0, jj, NCO);
      if (used.exists(key(1, 1, 0, t))) continue;
      cb_read(1, 1, 0, 1, t, pin);
      if (pin < 0) continue;
      cb_drive(1, 1, 0, 0, jj);
      connect(1, 1, pin, SRC_PAD, 0, 0, 0, K_PAD);
      found = 1;
    end
    chk(found, "bias route found");

    // read-out: (2,2) top spin 8 to the top pad of column 2 via chanx(2,2)
    found = 0;
    q = 8 / 4;
    for (int jj = 0; jj < NCO && !found; jj++) begin
      t = trk(q, jj, NCO);
      if (used.exists(key(1, 2, 2, t))) continue;
      cb_read(1, 2, 2, 1, t, pin);
      if (pin < 0) continue;
      cb_drive(1, 2, 2, q, jj);
      ro_side = ST; ro_n = 1; ro_k = pin; ro_x = 2; ro_y = 2; ro_c = 8;
      found = 1;
    end
    chk(found, "read-out route found");

    #1 compare("initial states");

    // 4. solves: noiseless, then annealed
    run_solve(30, 0, 0);
    run_solve(200, 60, 3);
    // a second annealed run from random states
    for (int x = 1; x <= M; x++)
      for (int y = 1; y <= M; y++)
        for (int c = 0; c < NEN; c++) begin
          xs[x-1][y-1][c] = en[x-1][y-1][c] & 1'($urandom);
          wr(CFG_SPIN, x, y, {8'd1, 8'(c)}, int'(xs[x-1][y-1][c]));
        end
    run_solve(120, 40, 2);

    for (int n = 0; n < NK; n++) begin
      $display("mechanism %-24s : %0d", kname[n], count[n]);
      chk(count[n] > 0, $sformatf("mechanism '%s' never happened", kname[n]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
