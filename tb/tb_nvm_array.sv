// tb_nvm_array -- self-checking test of the stuck-at NVM model.
//
// Writes random words, injects random stuck-at-0/1 cells, and checks that
// every read returns (data & ~sa0) | sa1 exactly one cycle after the read,
// that stuck cells ignore writes, and that clearing a fault heals the cell.
module tb_nvm_array;
  localparam int DEPTH = 64;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic we = 0, re = 0, fi_we = 0;
  logic [5:0]  waddr = 0, raddr = 0, fi_addr = 0;
  logic [31:0] wdata = 0, rdata, fi_sa0 = 0, fi_sa1 = 0;
  logic [31:0] mdata [DEPTH], msa0 [DEPTH], msa1 [DEPTH];

  nvm_array #(.WORD_W(32), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic write(int a, logic [31:0] d);
    @(negedge clk); we = 1; waddr = 6'(a); wdata = d;
    @(negedge clk); we = 0;
    mdata[a] = d;
  endtask

  task automatic inject(int a, logic [31:0] s0, logic [31:0] s1);
    @(negedge clk); fi_we = 1; fi_addr = 6'(a); fi_sa0 = s0; fi_sa1 = s1;
    @(negedge clk); fi_we = 0;
    msa0[a] = s0; msa1[a] = s1 & ~s0;
  endtask

  task automatic read_check(int a);
    @(negedge clk); re = 1; raddr = 6'(a);
    @(negedge clk); re = 0;
    check("read", rdata, (mdata[a] & ~msa0[a]) | msa1[a]);
    raddr = 6'(a + 1);  // rdata must hold without re
    @(negedge clk);
    check("hold", rdata, (mdata[a] & ~msa0[a]) | msa1[a]);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin msa0[i] = 0; msa1[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) write(i, $urandom);
    for (int i = 0; i < 16; i++) read_check(i);        // fault-free
    for (int i = 0; i < 16; i++) inject(i, $urandom & $urandom, $urandom & $urandom);
    for (int i = 0; i < 16; i++) read_check(i);
    for (int i = 0; i < 16; i++) write(i, $urandom);    // stuck cells keep their value
    for (int i = 0; i < 16; i++) read_check(i);
    inject(3, 0, 0);                                    // clear a fault map
    read_check(3);
    // all-zero / all-one probes reveal the stuck-at cells
    inject(5, 32'h0000_00F0, 32'h8000_0001);
    write(5, 32'h0); read_check(5); check("probe0", rdata, 32'h8000_0001);
    write(5, '1);    read_check(5); check("probe1", ~rdata, 32'h0000_00F0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
