// craft_decoder -- read-path Remap/Decode logic of CRAFT.
//
// Combinational, the inverse of craft_encoder. It is used on both halves of a
// read:
//   * request: the word address asked for is remapped with the block's
//     address XOR (req_aux[IDX_W-1:0]) to find the physical word;
//   * response: the raw word read from the memory is rotated right by ROT
//     inside every ELEM_W-bit weight if rsp_aux[IDX_W+1] is set, then
//     complemented if rsp_aux[IDX_W] is set.
// Request and response carry separate auxiliary inputs because the memory
// answers a cycle after the request; the controller delays the block's aux
// bits by that cycle. This split is this design's choice; the XOR, NOT and
// rotation logic follows the remapping and encoding logic.
// Only the XOR field of req_aux is used (lint reports its upper bits unused).
module craft_decoder #(
  parameter int unsigned WORD_W = 32,
  parameter int unsigned WORDS  = 16,
  parameter int unsigned ELEM_W = 32,
  parameter int unsigned ROT    = 10,
  parameter int unsigned ADDR_W = 4,
  localparam int unsigned IDX_W = $clog2(WORDS),
  localparam int unsigned AUX_W = IDX_W + 2
) (
  input  logic [ADDR_W-1:0] orig_addr,
  input  logic [AUX_W-1:0]  req_aux,     // aux bits of the requested block
  output logic [ADDR_W-1:0] remap_addr,
  input  logic [WORD_W-1:0] raw_data,    // word as read from the memory
  input  logic [AUX_W-1:0]  rsp_aux,     // aux bits of the block being returned
  output logic [WORD_W-1:0] dec_data
);
  localparam int unsigned ELEMS = WORD_W / ELEM_W;

  logic [WORD_W-1:0] unrot_data;

  always_comb begin
    remap_addr = orig_addr;
    remap_addr[IDX_W-1:0] = orig_addr[IDX_W-1:0] ^ req_aux[IDX_W-1:0];
  end

  always_comb begin
    for (int e = 0; e < ELEMS; e++) begin
      unrot_data[e*ELEM_W +: ELEM_W] = rsp_aux[IDX_W+1] ?
          ((raw_data[e*ELEM_W +: ELEM_W] >> ROT) |
           (raw_data[e*ELEM_W +: ELEM_W] << (ELEM_W - ROT))) :
          raw_data[e*ELEM_W +: ELEM_W];
    end
  end

  assign dec_data = rsp_aux[IDX_W] ? ~unrot_data : unrot_data;

  if (WORD_W % ELEM_W != 0 || ROT == 0 || ROT >= ELEM_W || ADDR_W < IDX_W)
  begin : g_param_check
    $error("craft_decoder: inconsistent parameters");
  end
endmodule
