// tb_craft_mem_ctrl -- self-checking test of the CRAFT memory controller.
//
// The controller is connected to the real Remap/Encode and Remap/Decode
// logic, to a stuck-at memory modelled inside this testbench, and to a
// stand-in for the deviation minimiser that answers SEL_LAT cycles after
// start with an encoding the testbench picks at random. The test checks:
//   * the stuck-at maps handed to the minimiser equal the injected faults
//     (found by the all-zero / all-one probes) and the weights are the block;
//   * the block is written with the returned encoding, word j at physical
//     slot j ^ xor, encoded as the reference model predicts;
//   * prog_aux, and the programming time of 5*WORDS + SEL_LAT + 2 cycles;
//   * every read returns decode(stuck(encode(w))) one cycle after it is
//     accepted, with back-to-back reads;
//   * reads stall (rd_ready low) while a block is programmed, and a read
//     wins over a program request offered in the same cycle.
module tb_craft_mem_ctrl;
  localparam int W = 16, NB = 8, SEL_LAT = 5;
  localparam int DEPTH = NB * W;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                prog_valid = 0, prog_ready, prog_done;
  logic [2:0]          prog_blk = 0;
  logic [15:0][31:0]   prog_data = '0;
  logic [5:0]          prog_aux;
  logic                rd_valid = 0, rd_ready, rd_rsp_valid;
  logic [6:0]          rd_addr = 0;
  logic [31:0]         rd_rsp_data;
  logic                sel_start, sel_done = 0;
  logic [15:0][31:0]   sel_weights, sel_sa0, sel_sa1;
  logic [5:0]          sel_aux = 0;
  logic                mem_we, mem_re;
  logic [6:0]          enc_addr, dec_addr, wr_paddr, rd_paddr;
  logic [31:0]         enc_data, wr_pdata, rd_pdata, dec_data;
  logic [5:0]          enc_aux, dec_req_aux, dec_rsp_aux;

  craft_mem_ctrl #(.WORDS(W), .NBLOCKS(NB)) dut (.*);

  craft_encoder #(.ADDR_W(7)) u_enc (
    .orig_addr(enc_addr), .orig_data(enc_data), .aux(enc_aux),
    .remap_addr(wr_paddr), .enc_data(wr_pdata));
  craft_decoder #(.ADDR_W(7)) u_dec (
    .orig_addr(dec_addr), .req_aux(dec_req_aux), .remap_addr(rd_paddr),
    .raw_data(rd_pdata), .rsp_aux(dec_rsp_aux), .dec_data(dec_data));

  // stuck-at memory, one-cycle read
  logic [31:0] cells [DEPTH], sa0 [DEPTH], sa1 [DEPTH];
  always_ff @(posedge clk) begin
    if (mem_we) cells[wr_paddr] <= wr_pdata;
    if (mem_re) rd_pdata <= (cells[rd_paddr] & ~sa0[rd_paddr]) | sa1[rd_paddr];
  end

  // deviation-minimiser stand-in
  logic [5:0]        pick_aux;
  logic [15:0][31:0] seen_w, seen_sa0, seen_sa1;
  int                sel_calls = 0;
  initial begin
    forever begin
      @(posedge clk);
      if (sel_start) begin
        seen_w = sel_weights; sel_calls++;
        repeat (SEL_LAT) @(posedge clk);
        seen_sa0 = sel_sa0; seen_sa1 = sel_sa1;
        #1 sel_done = 1; sel_aux = pick_aux;
        @(posedge clk); #1 sel_done = 0; sel_aux = $urandom;
      end
    end
  end

  function automatic logic [31:0] rotl(logic [31:0] v, int r);
    logic [31:0] o;
    for (int k = 0; k < 32; k++) o[(k + r) % 32] = v[k];
    return o;
  endfunction
  function automatic logic [31:0] enc_ref(logic [31:0] v, logic [5:0] a);
    if (a[4]) v = ~v;
    if (a[5]) v = rotl(v, 10);
    return v;
  endfunction
  function automatic logic [31:0] dec_ref(logic [31:0] v, logic [5:0] a);
    if (a[5]) v = rotl(v, 22);
    if (a[4]) v = ~v;
    return v;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // cycle counter
  int cyc = 0;
  always @(posedge clk) cyc++;

  int stalls = 0;
  always @(posedge clk) if (rst_n && rd_valid && !rd_ready) stalls++;

  logic [15:0][31:0] blkdata [NB];
  logic [5:0]        blkaux  [NB];

  task automatic program_block(int b);
    int t0;
    for (int j = 0; j < W; j++) prog_data[j] = $urandom;
    pick_aux = 6'($urandom);
    @(negedge clk); prog_valid = 1; prog_blk = 3'(b);
    #1 check("prog accepted", prog_ready);
    @(negedge clk); t0 = cyc;   // edges counted from the accepting edge
    prog_valid = 0;
    // a read offered now must stall until programming ends
    rd_valid = 1; rd_addr = 7'(b * W);
    while (!prog_done) @(negedge clk);
    rd_valid = 0;
    check($sformatf("prog time %0d", cyc - t0), cyc - t0 == 5 * W + SEL_LAT + 2);
    check("prog_aux", prog_aux == pick_aux);
    check("selector weights", seen_w == prog_data);
    for (int p = 0; p < W; p++) begin
      check($sformatf("sa0 map slot %0d", p), seen_sa0[p] == sa0[b * W + p]);
      check($sformatf("sa1 map slot %0d", p), seen_sa1[p] == sa1[b * W + p]);
    end
    for (int j = 0; j < W; j++)
      check($sformatf("stored word %0d", j),
            ((cells[b * W + (j ^ int'(pick_aux[3:0]))] & ~sa0[b * W + (j ^ int'(pick_aux[3:0]))])
             | sa1[b * W + (j ^ int'(pick_aux[3:0]))]) ==
            ((enc_ref(prog_data[j], pick_aux) & ~sa0[b * W + (j ^ int'(pick_aux[3:0]))])
             | sa1[b * W + (j ^ int'(pick_aux[3:0]))]));
    blkdata[b] = prog_data;
    blkaux[b]  = pick_aux;
  endtask

  function automatic logic [31:0] expect_word(int b, int j);
    int p = b * W + (j ^ int'(blkaux[b][3:0]));
    return dec_ref((enc_ref(blkdata[b][j], blkaux[b]) & ~sa0[p]) | sa1[p], blkaux[b]);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      sa0[i] = ($urandom % 3 == 0) ? $urandom & $urandom & $urandom : 0;
      sa1[i] = ($urandom % 3 == 0) ? $urandom & $urandom & $urandom & ~sa0[i] : 0;
      cells[i] = $urandom;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) program_block(b);
    check("stalls seen", stalls > 0);
    check("selector called once per block", sel_calls == NB);

    // back-to-back random reads; each response is checked while the next
    // request is already driven
    begin
      logic [31:0] exp_q[$];
      for (int n = 0; n <= NB * W; n++) begin
        @(negedge clk);
        if (n < NB * W) begin
          int b, j;
          b = int'($urandom % NB);
          j = int'($urandom % W);
          rd_valid = 1; rd_addr = 7'(b * W + j);
          exp_q.push_back(expect_word(b, j));
        end else rd_valid = 0;
        #1;
        if (n > 0) begin
          check("rsp valid", rd_rsp_valid);
          check($sformatf("read data %h exp %h", rd_rsp_data, exp_q[0]), rd_rsp_data == exp_q[0]);
          void'(exp_q.pop_front());
        end
      end
      @(negedge clk);
      check("no stray rsp", !rd_rsp_valid);
    end

    // a read and a program request in the same cycle: the read goes first
    @(negedge clk); rd_valid = 1; rd_addr = 7'd3; prog_valid = 1; prog_blk = 3'd1;
    #1 check("prog held off by read", !prog_ready && rd_ready);
    @(negedge clk); rd_valid = 0; prog_valid = 0;
    check("read answered", rd_rsp_valid && rd_rsp_data == expect_word(0, 3));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
