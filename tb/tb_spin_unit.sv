// tb_spin_unit: self-checking test of the spins and their annealing noise.
//
// Drives random dot products into a full-size spin unit and checks, after
// every update, each spin against a reference computed in the testbench:
// enable & (dot + noise > 0), with noise = (signed low byte of the spin's
// xorshift32 state * amp) >>> 7. The testbench keeps its own copy of every
// generator, seeded by the same documented rule, and steps it per update.
// Also checks enables and state writes, that nothing changes without
// step_en, that disabled spins stay 0, and that noise actually flips a spin
// whose noiseless field would not.
module tb_spin_unit;
  import fpia_pkg::*;

  localparam int unsigned O  = FPIA_O;
  localparam int unsigned DW = dot_width(FPIA_I + FPIA_O);
  localparam int unsigned X  = 2;
  localparam int unsigned Y  = 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                 rst_n;
  cfg_t                 cfg;
  logic signed [DW-1:0] dot [O];
  logic                 step_en;
  logic [AMP_W-1:0]     amp;
  logic [O-1:0]         spin;

  spin_unit #(.O(O), .DW(DW), .X(X), .Y(Y)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .dot(dot), .step_en(step_en),
    .noise_amp(amp), .spin(spin)
  );

  int checks = 0, failures = 0;
  int noise_flips = 0;
  logic [31:0]  rng_ref [O];
  logic [O-1:0] en_ref, spin_ref;

  function automatic logic [31:0] ref_seed(int c);
    logic [31:0] s;
    s = 32'h2545_F491 ^ (32'((X * 64 + Y) * 256 + c) * 32'h9E37_79B9);
    return (s == 0) ? 32'h1 : s;
  endfunction

  function automatic logic [31:0] ref_next(logic [31:0] v);
    v = v ^ (v << 13);
    v = v ^ (v >> 17);
    v = v ^ (v << 5);
    return v;
  endfunction

  task automatic spin_cfg(input int op, input int c, input logic v);
    cfg.we = 1'b1; cfg.kind = CFG_SPIN; cfg.x = 8'(X); cfg.y = 8'(Y);
    cfg.idx = {8'(op), 8'(c)}; cfg.data = {7'b0, v};
    @(posedge clk);
    #1 cfg.we = 1'b0;
    if (op == 0) en_ref[c] = v; else spin_ref[c] = v;
  endtask

  task automatic check_spins(input string what);
    checks++;
    if (spin !== spin_ref) begin
      failures++;
      if (failures < 10) $display("FAIL %s: spin=%h expected %h", what, spin, spin_ref);
    end
  endtask

  // One update with random fields; the reference follows the rule above.
  task automatic update(input int a);
    int n, f, r8;
    amp = AMP_W'(a);
    for (int c = 0; c < int'(O); c++) dot[c] = DW'($signed($urandom_range(0, 80)) - 40);
    #1;
    for (int c = 0; c < int'(O); c++) begin
      r8 = int'($signed(rng_ref[c][7:0]));
      n  = (r8 * a) >>> 7;
      f  = int'(dot[c]) + n;
      if (en_ref[c] && ((f > 0) != (int'(dot[c]) > 0))) noise_flips++;
      spin_ref[c] = en_ref[c] && (f > 0);
      rng_ref[c]  = ref_next(rng_ref[c]);
    end
    step_en = 1'b1;
    @(posedge clk);
    #1 step_en = 1'b0;
    check_spins("update");
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0; step_en = 1'b0; amp = '0; rst_n = 1'b0;
    for (int c = 0; c < int'(O); c++) begin
      dot[c] = '0;
      rng_ref[c] = ref_seed(c);
    end
    en_ref = '0; spin_ref = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check_spins("reset");

    // enables: all but every fifth spin; initial states random
    for (int c = 0; c < int'(O); c++) spin_cfg(0, c, (c % 5) != 4);
    for (int c = 0; c < int'(O); c++) spin_cfg(1, c, 1'($urandom));
    check_spins("init");

    // a write to another block changes nothing
    cfg.we = 1'b1; cfg.kind = CFG_SPIN; cfg.x = 8'(X + 1); cfg.y = 8'(Y);
    cfg.idx = {8'd1, 8'd0}; cfg.data = {7'b0, ~spin_ref[0]};
    @(posedge clk);
    #1 cfg.we = 1'b0;
    check_spins("foreign");

    // no step_en: fields change, spins hold
    for (int c = 0; c < int'(O); c++) dot[c] = 5;
    repeat (3) @(posedge clk);
    #1 check_spins("hold");

    // noiseless updates, then annealed updates with falling amplitude
    for (int k = 0; k < 20; k++) update(0);
    for (int k = 0; k < 60; k++) update(120 - 2 * k);
    for (int k = 0; k < 20; k++) update(255);

    checks++;
    if (noise_flips == 0) begin
      failures++;
      $display("FAIL noise never changed a spin decision");
    end
    $display("noise-decided spins: %0d", noise_flips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
