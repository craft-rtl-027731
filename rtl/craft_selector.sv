// craft_selector -- minimum-net-deviation encoding search of CRAFT.
//
// Given the weights of one block and the block's stuck-at map, this block
// tries every encoding CRAFT can express -- 2^IDX_W address XOR patterns,
// with and without inversion, with and without criticality-aware bit
// switching (64 candidates for a 16-word block) -- and returns the one whose
// read-back weights deviate least from the originals:
//     best = argmin over candidates of  sum_i |w_read,i - w_orig,i|
// where the sum runs over every weight element of the block. For each
// candidate and word j the block models what the memory would return: the
// word is encoded (craft_encoder) into physical slot j ^ xor, the slot's
// stuck-at-0 cells force 0 and its stuck-at-1 cells force 1, and the result
// is decoded (craft_decoder).
//
// Deviation is measured exactly: FP32 weights (FMT_FP32) are compared as
// integers in units of 2^-149, so no rounding can reorder two candidates;
// unsigned weights (FMT_UINT) are compared as plain integers.
//
// Timing: one candidate per clock. A start pulse while idle raises busy; the
// candidates are evaluated in increasing aux order on the next NCAND clocks
// and done pulses for one cycle with best_aux/best_dev valid: done rises on
// the NCAND-th clock edge after the edge that samples start (64 for the
// default sizes). Ties keep the lowest aux
// value, so an unencoded block is preferred when it is as good as any other.
// weights, sa0 and sa1 must be held stable while busy.
//
// The objective (net deviation, Eq. 1 of the CRAFT method) and the candidate
// set follow the paper; the sequential one-candidate-per-cycle search, the
// exact fixed-point measure and the tie rule are this design's choices.
module craft_selector
  import craft_pkg::*;
#(
  parameter int unsigned WORD_W = 32,
  parameter int unsigned WORDS  = 16,
  parameter int unsigned ELEM_W = 32,
  parameter int unsigned ROT    = 10,
  parameter elem_fmt_e   FMT    = FMT_FP32,
  localparam int unsigned IDX_W = $clog2(WORDS),
  localparam int unsigned AUX_W = IDX_W + 2,
  localparam int unsigned NCAND = 2 ** AUX_W,
  localparam int unsigned ELEMS = WORD_W / ELEM_W,
  localparam int unsigned EDEV_W = (FMT == FMT_FP32) ? FP_MAG_W + 1 : ELEM_W,
  localparam int unsigned DEV_W = EDEV_W + $clog2(WORDS * ELEMS) + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [WORDS-1:0][WORD_W-1:0]  weights,  // original weights, word j
  input  logic [WORDS-1:0][WORD_W-1:0]  sa0,      // stuck-at-0 cells, physical slot
  input  logic [WORDS-1:0][WORD_W-1:0]  sa1,      // stuck-at-1 cells, physical slot
  output logic                          busy,
  output logic                          done,
  output logic [AUX_W-1:0]              best_aux,
  output logic [DEV_W-1:0]              best_dev
);

  logic [AUX_W-1:0]             cand;
  logic [WORDS-1:0][WORD_W-1:0] enc_w, read_w, dec_w;
  logic [WORDS-1:0][IDX_W-1:0]  slot;
  logic [DEV_W-1:0]             cand_dev;

  for (genvar j = 0; j < WORDS; j++) begin : g_word
    logic [IDX_W-1:0] idx;
    assign idx = IDX_W'(j);

    craft_encoder #(
      .WORD_W(WORD_W), .WORDS(WORDS), .ELEM_W(ELEM_W), .ROT(ROT), .ADDR_W(IDX_W)
    ) u_enc (
      .orig_addr (idx),
      .orig_data (weights[j]),
      .aux       (cand),
      .remap_addr(slot[j]),
      .enc_data  (enc_w[j])
    );

    assign read_w[j] = (enc_w[j] & ~sa0[slot[j]]) | sa1[slot[j]];

    logic [IDX_W-1:0] unused_addr;
    craft_decoder #(
      .WORD_W(WORD_W), .WORDS(WORDS), .ELEM_W(ELEM_W), .ROT(ROT), .ADDR_W(IDX_W)
    ) u_dec (
      .orig_addr (idx),
      .req_aux   (cand),
      .remap_addr(unused_addr),
      .raw_data  (read_w[j]),
      .rsp_aux   (cand),
      .dec_data  (dec_w[j])
    );
  end

  always_comb begin
    logic [ELEM_W-1:0] a, b, d;
    cand_dev = '0;
    for (int j = 0; j < WORDS; j++) begin
      for (int e = 0; e < ELEMS; e++) begin
        a = dec_w[j][e*ELEM_W +: ELEM_W];
        b = weights[j][e*ELEM_W +: ELEM_W];
        if (FMT == FMT_FP32) begin
          cand_dev = cand_dev + DEV_W'(fp32_absdiff(32'(a), 32'(b)));
        end else begin
          d = (a >= b) ? a - b : b - a;
          cand_dev = cand_dev + DEV_W'(d);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      cand     <= '0;
      best_aux <= '0;
      best_dev <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          cand     <= '0;
          best_aux <= '0;
          best_dev <= '1;
        end
      end else begin
        if (cand_dev < best_dev) begin
          best_dev <= cand_dev;
          best_aux <= cand;
        end
        cand <= cand + 1'b1;
        if (cand == AUX_W'(NCAND - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  if (FMT == FMT_FP32 && ELEM_W != 32) begin : g_param_check
    $error("craft_selector: FP32 deviation needs ELEM_W == 32");
  end
endmodule
