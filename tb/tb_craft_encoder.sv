// tb_craft_encoder -- self-checking test of the Remap/Encode logic.
//
// Checks the default 32-bit configuration (16-word block, rotation by 10)
// against a bit-by-bit reference for random words, addresses and encodings,
// the address remapping table of a 16-word block for XOR 0000, 0001 and 1111,
// and the 8-bit bit-switching example (nibble swap) on three weights.
module tb_craft_encoder;
  int checks = 0, failures = 0;

  // default configuration
  logic [13:0] a32, ra32;
  logic [31:0] d32, e32;
  logic [5:0]  x32;
  craft_encoder #(.ADDR_W(14)) dut32 (
    .orig_addr(a32), .orig_data(d32), .aux(x32), .remap_addr(ra32), .enc_data(e32));

  // 8-bit weights, four per word, rotation by 4
  logic [3:0]  a8, ra8;
  logic [31:0] d8, e8;
  logic [5:0]  x8;
  craft_encoder #(.ELEM_W(8), .ROT(4), .ADDR_W(4)) dut8 (
    .orig_addr(a8), .orig_data(d8), .aux(x8), .remap_addr(ra8), .enc_data(e8));

  function automatic logic [31:0] ref_enc(logic [31:0] d, logic inv, logic rot,
                                          int ew, int r);
    logic [31:0] v, o;
    v = inv ? ~d : d;
    if (!rot) return v;
    for (int k = 0; k < 32; k++) begin
      int base = (k / ew) * ew;
      o[base + ((k - base + r) % ew)] = v[k];
    end
    return o;
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random words
    for (int n = 0; n < 500; n++) begin
      a32 = 14'($urandom); d32 = $urandom; x32 = 6'($urandom);
      #1;
      check("addr32", 32'(ra32), 32'({a32[13:4], a32[3:0] ^ x32[3:0]}));
      check("data32", e32, ref_enc(d32, x32[4], x32[5], 32, 10));
    end
    // address remapping table of a 16-word block
    for (int i = 0; i < 16; i++) begin
      a8 = 4'(i); d8 = '0;
      x8 = 6'b000000; #1; check("xor0000", 32'(ra8), 32'(i));
      x8 = 6'b000001; #1; check("xor0001", 32'(ra8), 32'(i ^ 1));
      x8 = 6'b001111; #1; check("xor1111", 32'(ra8), 32'(15 - i));
    end
    // bit switching of 8-bit weights: 0111_0101 -> 0101_0111 etc.
    x8 = 6'b100000;
    d8 = {8'b0111_0101, 8'b1011_0110, 8'b1000_0111, 8'h00}; #1;
    check("rot8", e8, {8'b0101_0111, 8'b0110_1011, 8'b0111_1000, 8'h00});
    // inversion alone
    x8 = 6'b010000; d8 = 32'h0123_4567; #1;
    check("inv8", e8, 32'hFEDC_BA98);
    // random 8-bit words
    for (int n = 0; n < 200; n++) begin
      d8 = $urandom; x8 = 6'($urandom); #1;
      check("data8", e8, ref_enc(d8, x8[4], x8[5], 8, 4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
