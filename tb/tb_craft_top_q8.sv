// tb_craft_top_q8 -- end-to-end test of the CRAFT weight memory configured
// for 8-bit quantized networks: four unsigned 8-bit weights per 32-bit word,
// sixteen words per 512-bit block, bit switching swaps the nibbles of every
// weight (rotation by 4), deviation measured on the unsigned weight values.
//
// Blocks of random weights are programmed over random and column stuck-at
// faults (including the critical bit 7 of every weight); the chosen encoding
// must reach the exact minimum net deviation over all 64 encodings, computed
// here independently, and every word must read back as the bit-level
// reference predicts. Remapping, inversion and bit switching must each be
// chosen at least once.
module tb_craft_top_q8;
  import craft_pkg::*;
  localparam int W = 16, NB = 64, NBLK_TEST = 48;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              prog_valid = 0, prog_ready, prog_done;
  logic [5:0]        prog_blk = 0;
  logic [15:0][31:0] prog_data = '0;
  logic [5:0]        prog_aux;
  logic              rd_valid = 0, rd_ready, rd_rsp_valid;
  logic [9:0]        rd_addr = 0;
  logic [31:0]       rd_rsp_data;
  logic              fi_we = 0;
  logic [9:0]        fi_addr = 0;
  logic [31:0]       fi_sa0 = 0, fi_sa1 = 0;

  craft_top #(.ELEM_W(8), .ROT(ROT_UINT8), .FMT(FMT_UINT), .NBLOCKS(NB)) dut (.*);

  logic [15:0][31:0] rsa0 [NBLK_TEST], rsa1 [NBLK_TEST], rw [NBLK_TEST];
  logic [5:0]        raux [NBLK_TEST];
  int n_remap = 0, n_inv = 0, n_rot = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [31:0] swapn(logic [31:0] v);
    logic [31:0] o;
    for (int e = 0; e < 4; e++) o[e*8 +: 8] = {v[e*8 +: 4], v[e*8+4 +: 4]};
    return o;
  endfunction

  function automatic logic [31:0] readback(logic [31:0] w, logic [31:0] s0,
                                           logic [31:0] s1, int c);
    logic [31:0] v;
    v = w;
    if (c & 16) v = ~v;
    if (c & 32) v = swapn(v);
    v = (v & ~s0) | s1;
    if (c & 32) v = swapn(v);
    if (c & 16) v = ~v;
    return v;
  endfunction

  function automatic int dev(int b, int c);
    int d = 0;
    for (int j = 0; j < W; j++) begin
      int p;
      logic [31:0] r;
      p = j ^ (c & 15);
      r = readback(rw[b][j], rsa0[b][p], rsa1[b][p], c);
      for (int e = 0; e < 4; e++) begin
        int x, y;
        x = int'(r[e*8 +: 8]);
        y = int'(rw[b][j][e*8 +: 8]);
        d += (x > y) ? x - y : y - x;
      end
    end
    return d;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dmin;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int b = 0; b < NBLK_TEST; b++) begin
      for (int j = 0; j < W; j++) begin
        rw[b][j] = $urandom & 32'h7F7F_7F7F;      // small weights: MSBs mostly 0
        rsa0[b][j] = 0; rsa1[b][j] = 0;
        case (b % 4)
          0: begin
               if ($urandom % 2 == 0) rsa0[b][j] = 32'h1 << ($urandom % 32);
               if ($urandom % 2 == 0) rsa1[b][j] = 32'h1 << ($urandom % 32);
             end
          1: rsa1[b][j] = 32'h8080_8080;           // bit 7 of every weight stuck at 1
          2: begin rsa1[b][j] = 32'h0000_0080; rsa0[b][j] = 32'h0000_0040; end
          default: rsa1[b][j] = ($urandom % 4 == 0) ? 32'h1 << ($urandom % 32) : 0;
        endcase
        rsa1[b][j] &= ~rsa0[b][j];
      end
      for (int p = 0; p < W; p++) begin
        @(negedge clk); fi_we = 1; fi_addr = 10'(b * W + p); fi_sa0 = rsa0[b][p]; fi_sa1 = rsa1[b][p];
      end
      @(negedge clk); fi_we = 0;
    end

    for (int b = 0; b < NBLK_TEST; b++) begin
      @(negedge clk); prog_valid = 1; prog_blk = 6'(b); prog_data = rw[b];
      @(negedge clk); prog_valid = 0;
      while (!prog_done) @(negedge clk);
      raux[b] = prog_aux;
      dmin = dev(b, 0);
      for (int c = 1; c < 64; c++) if (dev(b, c) < dmin) dmin = dev(b, c);
      check($sformatf("block %0d aux %0d dev %0d min %0d", b, raux[b], dev(b, int'(raux[b])), dmin),
            dev(b, int'(raux[b])) == dmin);
      if (raux[b][3:0] != 0) n_remap++;
      if (raux[b][4])        n_inv++;
      if (raux[b][5])        n_rot++;
    end

    begin
      logic [31:0] exp_q[$];
      for (int n = 0; n <= NBLK_TEST * W; n++) begin
        @(negedge clk);
        if (n < NBLK_TEST * W) begin
          int b, j;
          b = n / W;
          j = n % W;
          rd_valid = 1; rd_addr = 10'(n);
          exp_q.push_back(readback(rw[b][j], rsa0[b][j ^ int'(raux[b][3:0])],
                                   rsa1[b][j ^ int'(raux[b][3:0])], int'(raux[b])));
        end else rd_valid = 0;
        #1;
        if (n > 0) begin
          check("rsp valid", rd_rsp_valid);
          check($sformatf("read %0d: %h exp %h", n - 1, rd_rsp_data, exp_q[0]), rd_rsp_data == exp_q[0]);
          void'(exp_q.pop_front());
        end
      end
    end
    $display("mechanisms: remap=%0d inversion=%0d bit_switching=%0d", n_remap, n_inv, n_rot);
    check("remapping used", n_remap > 0);
    check("inversion used", n_inv > 0);
    check("bit switching used", n_rot > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
