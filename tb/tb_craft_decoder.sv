// tb_craft_decoder -- self-checking test of the Remap/Decode logic.
//
// Compares the decoder with a bit-by-bit reference for random inputs, checks
// that the request address uses req_aux and the data uses rsp_aux, and that
// decoding an encoded word returns the original for every encoding (both for
// 32-bit weights rotated by 10 and for 8-bit weights rotated by 4).
module tb_craft_decoder;
  int checks = 0, failures = 0;

  logic [13:0] a, ra, ea;
  logic [31:0] raw, dd, od, ed;
  logic [5:0]  qx, sx;
  craft_decoder #(.ADDR_W(14)) dut (
    .orig_addr(a), .req_aux(qx), .remap_addr(ra),
    .raw_data(raw), .rsp_aux(sx), .dec_data(dd));

  logic [31:0] raw8, dd8, ed8;
  logic [5:0]  sx8;
  logic [3:0]  unused_a8, unused_ea8;
  craft_decoder #(.ELEM_W(8), .ROT(4), .ADDR_W(4)) dut8 (
    .orig_addr(4'd0), .req_aux(6'd0), .remap_addr(unused_a8),
    .raw_data(raw8), .rsp_aux(sx8), .dec_data(dd8));
  craft_encoder #(.ELEM_W(8), .ROT(4), .ADDR_W(4)) enc8 (
    .orig_addr(4'd0), .orig_data(od), .aux(sx8), .remap_addr(unused_ea8), .enc_data(ed8));

  craft_encoder #(.ADDR_W(14)) enc (
    .orig_addr(a), .orig_data(od), .aux(sx), .remap_addr(ea), .enc_data(ed));

  function automatic logic [31:0] ref_dec(logic [31:0] r, logic inv, logic rot,
                                          int ew, int s);
    logic [31:0] o;
    o = r;
    if (rot)
      for (int k = 0; k < 32; k++) begin
        int base = (k / ew) * ew;
        o[k] = r[base + ((k - base + s) % ew)];
      end
    return inv ? ~o : o;
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
    for (int n = 0; n < 500; n++) begin
      a = 14'($urandom); raw = $urandom; qx = 6'($urandom); sx = 6'($urandom);
      od = $urandom;
      #1;
      check("addr", 32'(ra), 32'({a[13:4], a[3:0] ^ qx[3:0]}));
      check("data", dd, ref_dec(raw, sx[4], sx[5], 32, 10));
      raw = ed; #1;
      check("roundtrip32", dd, od);
    end
    // the critical bit 30 is stored at bit 8 when switched
    sx = 6'b100000; raw = 32'h0000_0100; #1;
    check("bit8_to_bit30", dd, 32'h4000_0000);
    for (int n = 0; n < 200; n++) begin
      od = $urandom; sx8 = 6'($urandom); #1;
      raw8 = ed8; #1;
      check("roundtrip8", dd8, od);
      raw8 = $urandom; #1;
      check("data8", dd8, ref_dec(raw8, sx8[4], sx8[5], 8, 4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
