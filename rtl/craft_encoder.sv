// craft_encoder -- write-path Remap/Encode logic of CRAFT.
//
// Combinational. For one weight word it produces the physical location and
// the bit pattern to program into the non-volatile memory, under the
// encoding chosen for the word's block (the auxiliary bits):
//   * intra-block address remapping: the word index inside the block (the
//     low IDX_W address bits) is XORed with aux[IDX_W-1:0]; the block part of
//     the address passes unchanged;
//   * weight inversion: aux[IDX_W] selects the bitwise complement of the word;
//   * criticality-aware bit switching: aux[IDX_W+1] rotates every ELEM_W-bit
//     weight inside the word left by ROT bits, so its ROT most significant
//     (critical) bits are stored in the cells of its least significant bits.
// Inversion and rotation commute (rotation is a pure rewiring), so their
// order does not matter; here the inverted word is rotated.
//
// The XOR, NOT+mux and rotate+mux structure and the sizes (16 words of 32
// bits, 4+1+1 auxiliary bits, rotation by 10, or by 4 for 8-bit weights)
// follow the paper; the placement of the fields in aux is this design's.
module craft_encoder #(
  parameter int unsigned WORD_W = 32,   // bits per word (remapping unit)
  parameter int unsigned WORDS  = 16,   // words per block
  parameter int unsigned ELEM_W = 32,   // bits per weight inside a word
  parameter int unsigned ROT    = 10,   // bit-switching rotation amount
  parameter int unsigned ADDR_W = 4,    // word address width (block + index)
  localparam int unsigned IDX_W = $clog2(WORDS),
  localparam int unsigned AUX_W = IDX_W + 2
) (
  input  logic [ADDR_W-1:0] orig_addr,
  input  logic [WORD_W-1:0] orig_data,
  input  logic [AUX_W-1:0]  aux,        // {rot, inv, xor}
  output logic [ADDR_W-1:0] remap_addr,
  output logic [WORD_W-1:0] enc_data
);
  localparam int unsigned ELEMS = WORD_W / ELEM_W;

  logic [WORD_W-1:0] inv_data, rot_data;

  always_comb begin
    remap_addr = orig_addr;
    remap_addr[IDX_W-1:0] = orig_addr[IDX_W-1:0] ^ aux[IDX_W-1:0];
  end

  assign inv_data = aux[IDX_W] ? ~orig_data : orig_data;

  always_comb begin
    for (int e = 0; e < ELEMS; e++) begin
      rot_data[e*ELEM_W +: ELEM_W] =
          (inv_data[e*ELEM_W +: ELEM_W] << ROT) |
          (inv_data[e*ELEM_W +: ELEM_W] >> (ELEM_W - ROT));
    end
  end

  assign enc_data = aux[IDX_W+1] ? rot_data : inv_data;

  if (WORD_W % ELEM_W != 0 || ROT == 0 || ROT >= ELEM_W || ADDR_W < IDX_W)
  begin : g_param_check
    $error("craft_encoder: inconsistent parameters");
  end
endmodule
