// tb_craft_top -- end-to-end test of the CRAFT weight memory, at the default
// sizes (512-bit blocks of sixteen FP32 weights, 1024 blocks).
//
// Injects stuck-at faults into the memory, programs blocks of random
// DNN-like weights (|w| < 1), reads every weight back and checks:
//   * each block's encoding has the minimum net deviation of all 64
//     encodings, computed here independently in double precision;
//   * every weight read back equals what the memory's stuck cells leave of
//     the encoded word, decoded (independent bit-level reference);
//   * a block whose faults one encoding can hide reads back exactly;
//   * programming takes 146 cycles and reads answer one cycle later.
// Fault patterns are chosen so that every mechanism occurs: address
// remapping alone, weight inversion, criticality-aware bit switching, no
// encoding on a fault-free block, a read stalled by programming and a read
// given priority over a program request. Each is counted and must occur.
module tb_craft_top;
  localparam int W = 16, NBLK_TEST = 40;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              prog_valid = 0, prog_ready, prog_done;
  logic [9:0]        prog_blk = 0;
  logic [15:0][31:0] prog_data = '0;
  logic [5:0]        prog_aux;
  logic              rd_valid = 0, rd_ready, rd_rsp_valid;
  logic [13:0]       rd_addr = 0;
  logic [31:0]       rd_rsp_data;
  logic              fi_we = 0;
  logic [13:0]       fi_addr = 0;
  logic [31:0]       fi_sa0 = 0, fi_sa1 = 0;

  craft_top dut (.*);

  // reference fault maps of the tested blocks
  logic [15:0][31:0] rsa0 [NBLK_TEST], rsa1 [NBLK_TEST], rw [NBLK_TEST];
  logic [5:0]        raux [NBLK_TEST];

  int n_remap = 0, n_inv = 0, n_rot = 0, n_plain = 0, n_stall = 0, n_prio = 0, n_exact = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic real f2r(logic [31:0] f);
    real m;
    int  e;
    e = int'(f[30:23]);
    if (e == 0) m = real'(f[22:0]) * (2.0 ** -149);
    else        m = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] rotl(logic [31:0] v, int r);
    logic [31:0] o;
    for (int k = 0; k < 32; k++) o[(k + r) % 32] = v[k];
    return o;
  endfunction

  function automatic logic [31:0] readback(logic [31:0] w, logic [31:0] s0,
                                           logic [31:0] s1, int c);
    logic [31:0] v;
    v = w;
    if (c & 16) v = ~v;
    if (c & 32) v = rotl(v, 10);
    v = (v & ~s0) | s1;
    if (c & 32) v = rotl(v, 22);
    if (c & 16) v = ~v;
    return v;
  endfunction

  function automatic real dev(int b, int c);
    real d = 0.0;
    for (int j = 0; j < W; j++) begin
      int p = j ^ (c & 15);
      real x, y;
      x = f2r(readback(rw[b][j], rsa0[b][p], rsa1[b][p], c));
      y = f2r(rw[b][j]);
      d += (x > y) ? x - y : y - x;
    end
    return d;
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && rd_valid && !rd_ready) n_stall++;

  task automatic inject(int b);
    for (int p = 0; p < W; p++) begin
      @(negedge clk);
      fi_we = 1; fi_addr = 14'(b * W + p); fi_sa0 = rsa0[b][p]; fi_sa1 = rsa1[b][p];
    end
    @(negedge clk); fi_we = 0;
  endtask

  task automatic program_block(int b);
    int t0;
    @(negedge clk); prog_valid = 1; prog_blk = 10'(b); prog_data = rw[b];
    while (!prog_ready) @(negedge clk);
    @(negedge clk); t0 = cyc;   // edges counted from the accepting edge
    prog_valid = 0;
    if (b % 8 == 3) begin rd_valid = 1; rd_addr = 14'(0); end   // stalls
    while (!prog_done) @(negedge clk);
    check($sformatf("block %0d program time %0d", b, cyc - t0), cyc - t0 == 146);
    raux[b] = prog_aux;
    if (rd_valid) begin   // the stalled read is served now
      @(negedge clk); rd_valid = 0;
      check("stalled read answered", rd_rsp_valid);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real dmin, dsel;
    repeat (3) @(negedge clk); rst_n = 1;

    // weights and faults
    for (int b = 0; b < NBLK_TEST; b++) begin
      for (int j = 0; j < W; j++) begin
        rw[b][j] = $urandom;
        rw[b][j][30:23] = 8'(112 + ($urandom % 15));
        rsa0[b][j] = 0; rsa1[b][j] = 0;
      end
      case (b % 5)
        0: ;                                                  // fault-free
        1: for (int j = 0; j < W; j++) begin                  // sparse random cells
             if ($urandom % 3 == 0) rsa0[b][j] = 32'h1 << ($urandom % 32);
             if ($urandom % 3 == 0) rsa1[b][j] = 32'h1 << ($urandom % 32);
           end
        2: for (int j = 0; j < W; j++) rsa1[b][j] = 32'h4000_0000;  // SA1 column, bit 30
        3: for (int j = 0; j < W; j++) begin                  // SA1 bit 30 + SA0 bit 25 columns
             rsa1[b][j] = 32'h4000_0000; rsa0[b][j] = 32'h0200_0000;
           end
        default: rsa1[b][$urandom % W] = 32'h1 << (23 + $urandom % 8);  // one exponent cell
      endcase
      for (int j = 0; j < W; j++) rsa1[b][j] &= ~rsa0[b][j];
      inject(b);
    end

    for (int b = 0; b < NBLK_TEST; b++) begin
      program_block(b);
      dmin = dev(b, 0);
      for (int c = 1; c < 64; c++) if (dev(b, c) < dmin) dmin = dev(b, c);
      dsel = dev(b, int'(raux[b]));
      check($sformatf("block %0d aux %0d dev %g min %g", b, raux[b], dsel, dmin),
            dsel <= dmin * (1.0 + 1e-9));
      if (raux[b] == 0)                 n_plain++;
      if (raux[b][3:0] != 0)            n_remap++;
      if (raux[b][4])                   n_inv++;
      if (raux[b][5])                   n_rot++;
      if (dmin == 0.0) begin
        n_exact++;
        check($sformatf("block %0d reads exactly", b), dsel == 0.0);
      end
      if (b % 5 == 0) check($sformatf("fault-free block %0d unencoded", b), raux[b] == 0);
    end

    // read everything back, back to back: first in order, then at random.
    // Each response is checked while the next request is already driven.
    begin
      logic [31:0] exp_q[$];
      int n_rd;
      n_rd = 2 * NBLK_TEST * W;
      for (int n = 0; n <= n_rd; n++) begin
        @(negedge clk);
        if (n < n_rd) begin
          int a, b, j;
          a = (n < NBLK_TEST * W) ? n : int'($urandom % (NBLK_TEST * W));
          b = a / W;
          j = a % W;
          rd_valid = 1; rd_addr = 14'(a);
          exp_q.push_back(readback(rw[b][j], rsa0[b][j ^ int'(raux[b][3:0])],
                                   rsa1[b][j ^ int'(raux[b][3:0])], int'(raux[b])));
        end else rd_valid = 0;
        #1;
        if (n > 0) begin
          check("rsp valid", rd_rsp_valid);
          check($sformatf("read %0d: %h exp %h", n - 1, rd_rsp_data, exp_q[0]),
                rd_rsp_data == exp_q[0]);
          void'(exp_q.pop_front());
        end
      end
    end

    // read priority over a simultaneous program request
    @(negedge clk); rd_valid = 1; rd_addr = 14'(W + 2); prog_valid = 1; prog_blk = 10'd1;
    #1 if (rd_ready && !prog_ready) n_prio++;
    @(negedge clk); rd_valid = 0; prog_valid = 0;
    check("priority read answered", rd_rsp_valid && rd_rsp_data ==
          readback(rw[1][2], rsa0[1][2 ^ int'(raux[1][3:0])], rsa1[1][2 ^ int'(raux[1][3:0])],
                   int'(raux[1])));

    $display("mechanisms: remap=%0d inversion=%0d bit_switching=%0d unencoded=%0d stall=%0d read_priority=%0d fully_masked=%0d",
             n_remap, n_inv, n_rot, n_plain, n_stall, n_prio, n_exact);
    check("remapping used",      n_remap > 0);
    check("inversion used",      n_inv > 0);
    check("bit switching used",  n_rot > 0);
    check("unencoded blocks",    n_plain > 0);
    check("read stalled",        n_stall > 0);
    check("read priority",       n_prio > 0);
    check("faults fully masked", n_exact > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
