// craft_pkg -- constants, types and helper functions shared by the CRAFT
// stuck-at fault-tolerance blocks.
//
// The block geometry follows the main configuration of CRAFT: a 64-byte
// (512-bit) data block holds sixteen 32-bit floating-point weights, and each
// block carries six auxiliary bits -- four for the intra-block address XOR,
// one for weight inversion and one for criticality-aware bit switching.
// Bit switching rotates every 32-bit weight by ten positions (four positions
// for 8-bit quantized weights).
//
// The auxiliary-bit layout {rot, inv, xor[IDX_W-1:0]} and the exact fixed-point
// measure used to compare floating-point deviations are choices of this RTL.
package craft_pkg;

  // How a weight element is interpreted when its deviation is measured.
  typedef enum logic {
    FMT_FP32 = 1'b0,   // IEEE-754 single precision
    FMT_UINT = 1'b1    // unsigned integer (quantized weights)
  } elem_fmt_e;

  localparam int unsigned CRAFT_BLOCK_BITS = 512;  // 64-byte data block
  localparam int unsigned CRAFT_WORD_W     = 32;   // one weight / remapping unit
  localparam int unsigned CRAFT_WORDS      = CRAFT_BLOCK_BITS / CRAFT_WORD_W;  // 16
  localparam int unsigned ROT_FP32         = 10;   // rotation, 32-bit weights
  localparam int unsigned ROT_UINT8        = 4;    // rotation, 8-bit weights

  // |value| of an FP32 number as an exact integer in units of 2^-149 (the
  // smallest subnormal). The largest exponent field (255) is treated as an
  // ordinary exponent so that Inf/NaN patterns produced by a stuck exponent
  // bit rank as the largest possible deviation.
  localparam int unsigned FP_MAG_W = 278;

  // (The sign bit is ignored here; fp32_absdiff handles it.)
  function automatic logic [FP_MAG_W-1:0] fp32_mag(input logic [30:0] f);
    logic [FP_MAG_W-1:0] m;
    m = '0;
    if (f[30:23] == 8'd0) begin
      m[22:0] = f[22:0];
    end else begin
      m[23:0] = {1'b1, f[22:0]};
      m = m << (f[30:23] - 8'd1);
    end
    return m;
  endfunction

  // Exact |a - b| of two FP32 numbers, same units as fp32_mag.
  function automatic logic [FP_MAG_W:0] fp32_absdiff(input logic [31:0] a,
                                                     input logic [31:0] b);
    logic [FP_MAG_W:0] ma, mb;
    ma = {1'b0, fp32_mag(a[30:0])};
    mb = {1'b0, fp32_mag(b[30:0])};
    if (a[31] != b[31]) return ma + mb;
    else if (ma >= mb)  return ma - mb;
    else                return mb - ma;
  endfunction

endpackage
