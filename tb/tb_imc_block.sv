// tb_imc_block: self-checking test of one IMC Ising block.
//
// Programs a full-size block (I = 140, O = 40) with random sparse weights,
// including local couplings among its own spins, enables all spins but a few
// and writes random initial states. Then, with the annealing noise off, it
// runs updates with random external inputs and checks each new spin state
// against a reference Hopfield/Ising step computed in the testbench:
//   x_c <= en_c & (sum_r w(r, c) * v_r > 0),  v = {x, ext_in}
// which exercises the local feedback path of the block. Also checks that the
// states hold while no update is requested.
module tb_imc_block;
  import fpia_pkg::*;

  localparam int unsigned I = FPIA_I;
  localparam int unsigned O = FPIA_O;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             rst_n, step_en;
  cfg_t             cfg;
  logic [I-1:0]     ext_in;
  logic [AMP_W-1:0] amp;
  logic [O-1:0]     spin;

  imc_block #(.I(I), .O(O), .X(2), .Y(2)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .ext_in(ext_in), .step_en(step_en),
    .noise_amp(amp), .spin(spin));

  int checks = 0, failures = 0;
  int wref [I+O][O];
  logic [O-1:0] en_ref, x_ref;
  int flips = 0, local_used = 0;

  task automatic wr(input cfg_kind_e k, input logic [15:0] idx, input int v);
    cfg.we = 1'b1; cfg.kind = k; cfg.x = 8'd2; cfg.y = 8'd2; cfg.idx = idx; cfg.data = 8'(v);
    @(posedge clk);
    #1 cfg.we = 1'b0;
  endtask

  // encode a weight value -3..3 as {n2, n1, p2, p1}
  function automatic int enc(int v);
    return (v >= 0) ? v : ((-v) << 2);
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; cfg = '0; step_en = 1'b0; amp = '0; ext_in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int r = 0; r < int'(I + O); r++)
      for (int c = 0; c < int'(O); c++) begin
        wref[r][c] = (($urandom % 4) == 0) ? int'($urandom % 7) - 3 : 0;
        wr(CFG_IMC, {8'(r), 8'(c)}, enc(wref[r][c]));
      end
    for (int c = 0; c < int'(O); c++) begin
      en_ref[c] = (c % 8) != 7;
      x_ref[c]  = en_ref[c] & 1'($urandom);
      wr(CFG_SPIN, {8'd0, 8'(c)}, int'(en_ref[c]));
      wr(CFG_SPIN, {8'd1, 8'(c)}, int'(x_ref[c]));
    end
    checks++;
    if (spin !== x_ref) begin
      failures++;
      $display("FAIL initial states %h expected %h", spin, x_ref);
    end

    for (int s = 0; s < 60; s++) begin
      logic [O-1:0] nx;
      ext_in = {$urandom, $urandom, $urandom, $urandom, $urandom};
      for (int c = 0; c < int'(O); c++) begin
        int f;
        f = 0;
        for (int r = 0; r < int'(I); r++) if (ext_in[r]) f += wref[r][c];
        for (int r = 0; r < int'(O); r++)
          if (x_ref[r]) begin
            f += wref[int'(I) + r][c];
            if (wref[int'(I) + r][c] != 0) local_used++;
          end
        nx[c] = en_ref[c] && f > 0;
      end
      if (nx != x_ref) flips++;
      x_ref = nx;
      step_en = 1'b1;
      @(posedge clk);
      #1 step_en = 1'b0;
      checks++;
      if (spin !== x_ref) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d: %h expected %h", s, spin, x_ref);
      end
      // no update: states hold
      ext_in = ~ext_in;
      @(posedge clk);
      #1;
      checks++;
      if (spin !== x_ref) begin
        failures++;
        if (failures < 10) $display("FAIL hold after step %0d", s);
      end
    end
    checks++;
    if (flips == 0 || local_used == 0) begin
      failures++;
      $display("FAIL no spin changed (%0d) or no local coupling used (%0d)", flips, local_used);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
