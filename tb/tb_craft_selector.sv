// tb_craft_selector -- self-checking test of the minimum-deviation search.
//
// Part 1, the four-weight example of the remapping method: four 4-bit
// weights (0111, 0101, 1011, 0110) stored in a block whose cells hold five
// stuck-at faults. The reference model here reproduces the net deviations of
// the four pure remappings (13, 10, 12 and 2) and then checks that the
// selector returns the exact minimum over all 16 encodings of this size.
//
// Part 2, the default configuration (sixteen FP32 weights, 64 encodings):
// random DNN-like weights (|w| < 1) and random stuck-at cells, including
// column faults on the critical exponent bits. The reference computes every
// candidate's net deviation in double precision; the encoding the selector
// returns must be within 1e-9 of the minimum, and best_dev (an exact integer
// in units of 2^-149) must equal that deviation.
//
// Both parts check the latency: done rises on the NCAND-th clock edge after
// the edge that samples start.
module tb_craft_selector;
  import craft_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------------------------------------------------------- part 1
  logic             s_start = 0, s_busy, s_done;
  logic [3:0][3:0]  s_w, s_sa0, s_sa1;
  logic [3:0]       s_aux;
  logic [6:0]       s_dev;
  craft_selector #(.WORD_W(4), .WORDS(4), .ELEM_W(4), .ROT(2), .FMT(FMT_UINT)) dut_s (
    .clk, .rst_n, .start(s_start), .weights(s_w), .sa0(s_sa0), .sa1(s_sa1),
    .busy(s_busy), .done(s_done), .best_aux(s_aux), .best_dev(s_dev));

  function automatic logic [3:0] rotl4(logic [3:0] v, int r);
    logic [3:0] o;
    for (int k = 0; k < 4; k++) o[(k + r) % 4] = v[k];
    return o;
  endfunction

  function automatic int dev4(logic [3:0][3:0] w, logic [3:0][3:0] sa0,
                              logic [3:0][3:0] sa1, int c);
    int d = 0;
    for (int j = 0; j < 4; j++) begin
      int p = j ^ (c & 3);
      logic [3:0] v, r;
      v = w[j];
      if (c & 4) v = ~v;
      if (c & 8) v = rotl4(v, 2);
      r = (v & ~sa0[p]) | sa1[p];
      if (c & 8) r = rotl4(r, 2);          // rotate by 2 more = back
      if (c & 4) r = ~r;
      d += (int'(r) > int'(w[j])) ? int'(r) - int'(w[j]) : int'(w[j]) - int'(r);
    end
    return d;
  endfunction

  // ---------------------------------------------------------------- part 2
  logic                 f_start = 0, f_busy, f_done;
  logic [15:0][31:0]    f_w, f_sa0, f_sa1;
  logic [5:0]           f_aux;
  logic [283:0]         f_dev;
  craft_selector dut_f (
    .clk, .rst_n, .start(f_start), .weights(f_w), .sa0(f_sa0), .sa1(f_sa1),
    .busy(f_busy), .done(f_done), .best_aux(f_aux), .best_dev(f_dev));

  function automatic real f2r(logic [31:0] f);
    real m;
    int  e;
    e = int'(f[30:23]);
    if (e == 0) m = real'(f[22:0]) * (2.0 ** -149);
    else        m = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] rotl32(logic [31:0] v, int r);
    logic [31:0] o;
    for (int k = 0; k < 32; k++) o[(k + r) % 32] = v[k];
    return o;
  endfunction

  function automatic real dev32(logic [15:0][31:0] w, logic [15:0][31:0] sa0,
                                logic [15:0][31:0] sa1, int c);
    real d = 0.0;
    for (int j = 0; j < 16; j++) begin
      int p = j ^ (c & 15);
      logic [31:0] v, r;
      v = w[j];
      if (c & 16) v = ~v;
      if (c & 32) v = rotl32(v, 10);
      r = (v & ~sa0[p]) | sa1[p];
      if (c & 32) r = rotl32(r, 22);
      if (c & 16) r = ~r;
      d += (f2r(r) > f2r(w[j])) ? f2r(r) - f2r(w[j]) : f2r(w[j]) - f2r(r);
    end
    return d;
  endfunction

  function automatic real fix2r(logic [283:0] v);
    real r = 0.0;
    for (int i = 0; i < 284; i++) if (v[i]) r += 2.0 ** (i - 149);
    return r;
  endfunction

  function automatic logic [31:0] rand_weight();
    logic [31:0] f;
    f = $urandom;
    f[30:23] = 8'(110 + ($urandom % 17));   // 2^-17 .. just below 1
    return f;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_s(output int cycles);
    @(negedge clk); s_start = 1;
    @(negedge clk); s_start = 0; cycles = 1;
    while (!s_done) begin @(negedge clk); cycles++; end
  endtask

  task automatic run_f(output int cycles);
    @(negedge clk); f_start = 1;
    @(negedge clk); f_start = 0; cycles = 1;
    while (!f_done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc, best_c, min_d;
    real dmin, dsel;
    s_w = '0; s_sa0 = '0; s_sa1 = '0; f_w = '0; f_sa0 = '0; f_sa1 = '0;
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- part 1: W1..W4 at addresses 00..11
    s_w   = {4'b0110, 4'b1011, 4'b0101, 4'b0111};
    s_sa0 = {4'b0000, 4'b0010, 4'b0000, 4'b0010};
    s_sa1 = {4'b0001, 4'b0100, 4'b1000, 4'b0000};
    check("example: no remap = 13",  dev4(s_w, s_sa0, s_sa1, 0) == 13);
    check("example: xor 01 = 10",    dev4(s_w, s_sa0, s_sa1, 1) == 10);
    check("example: xor 10 = 12",    dev4(s_w, s_sa0, s_sa1, 2) == 12);
    check("example: xor 11 = 2",     dev4(s_w, s_sa0, s_sa1, 3) == 2);
    run_s(cyc);
    best_c = 0; min_d = dev4(s_w, s_sa0, s_sa1, 0);
    for (int c = 1; c < 16; c++)
      if (dev4(s_w, s_sa0, s_sa1, c) < min_d) begin min_d = dev4(s_w, s_sa0, s_sa1, c); best_c = c; end
    check($sformatf("example aux %0d exp %0d", s_aux, best_c), int'(s_aux) == best_c);
    check($sformatf("example dev %0d exp %0d", s_dev, min_d), int'(s_dev) == min_d);
    check($sformatf("example latency %0d", cyc), cyc == 17);   // done on the 16th edge after start is sampled
    // single stuck-at cell: some encoding always removes it
    s_sa0 = {4'b0000, 4'b0000, 4'b0000, 4'b0010}; s_sa1 = '0;
    run_s(cyc);
    check("single fault removed", s_dev == 0);
    // random small blocks, exact comparison
    for (int n = 0; n < 40; n++) begin
      s_w = $urandom; s_sa0 = $urandom & $urandom; s_sa1 = ($urandom & $urandom) & ~s_sa0;
      run_s(cyc);
      best_c = 0; min_d = dev4(s_w, s_sa0, s_sa1, 0);
      for (int c = 1; c < 16; c++)
        if (dev4(s_w, s_sa0, s_sa1, c) < min_d) begin min_d = dev4(s_w, s_sa0, s_sa1, c); best_c = c; end
      check($sformatf("rand4 aux %0d exp %0d", s_aux, best_c), int'(s_aux) == best_c);
      check("rand4 dev", int'(s_dev) == min_d);
    end

    // ---- part 2: FP32 blocks
    for (int n = 0; n < 30; n++) begin
      for (int j = 0; j < 16; j++) begin
        f_w[j]   = rand_weight();
        f_sa0[j] = ($urandom % 4 == 0) ? (32'h1 << ($urandom % 32)) : 32'h0;
        f_sa1[j] = ($urandom % 4 == 0) ? (32'h1 << ($urandom % 32)) & ~f_sa0[j] : 32'h0;
      end
      if (n % 3 == 1) for (int j = 0; j < 16; j++) f_sa1[j] |= 32'h4000_0000;   // column SA1, bit 30
      if (n % 3 == 2) for (int j = 0; j < 16; j++) f_sa0[j] |= 32'h0200_0000;   // column SA0, bit 25
      for (int j = 0; j < 16; j++) f_sa1[j] &= ~f_sa0[j];
      run_f(cyc);
      dmin = dev32(f_w, f_sa0, f_sa1, 0);
      for (int c = 1; c < 64; c++) if (dev32(f_w, f_sa0, f_sa1, c) < dmin) dmin = dev32(f_w, f_sa0, f_sa1, c);
      dsel = dev32(f_w, f_sa0, f_sa1, int'(f_aux));
      check($sformatf("fp32 block %0d: aux %0d dev %g min %g", n, f_aux, dsel, dmin),
            dsel <= dmin * (1.0 + 1e-9));
      check($sformatf("fp32 block %0d: best_dev %g vs %g", n, fix2r(f_dev), dsel),
            fix2r(f_dev) <= dsel * (1.0 + 1e-9) && fix2r(f_dev) >= dsel * (1.0 - 1e-9));
      check($sformatf("fp32 latency %0d", cyc), cyc == 65);   // done on the 64th edge after start is sampled
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
