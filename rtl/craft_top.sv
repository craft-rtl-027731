// craft_top -- CRAFT fault-tolerant weight memory for DNN inference.
//
// Wires the overall CRAFT architecture: the host (DNN deployment side) talks
// to the memory controller; weights go to the emerging non-volatile memory
// through the Remap/Encode logic and come back through the Remap/Decode
// logic; the controller picks each block's encoding with the
// minimum-net-deviation search and keeps its six auxiliary bits.
//
//   host --prog/rd--> craft_mem_ctrl --> craft_encoder --> nvm_array
//   host <--rsp------ craft_mem_ctrl <-- craft_decoder <-- nvm_array
//                          |  ^
//                          v  |
//                      craft_selector
//
// Defaults are the paper's main configuration: 512-bit blocks of sixteen
// FP32 weights, a 4-bit address XOR, one inversion bit and one bit-switching
// bit that rotates each weight by 10. For 8-bit quantized weights set
// ELEM_W = 8, ROT = 4 and FMT = FMT_UINT (four weights share a word). The
// memory size (NBLOCKS) is this design's choice; the paper gives none.
// The fault-injection port sets stuck-at cells in the memory model.
//
// Interface and timing are those of craft_mem_ctrl: programming a block takes
// 5*WORDS + 2^(IDX_W+2) + 2 cycles (146 by default), and a weight read returns
// one cycle after it is accepted, one read per cycle.
// The selector's best_dev output is left open on purpose: only the chosen
// encoding is needed here. rst_n also disables the assertion at the end, which
// lint reports as a reset used both synchronously and asynchronously.
module craft_top
  import craft_pkg::*;
#(
  parameter int unsigned WORD_W  = CRAFT_WORD_W,
  parameter int unsigned WORDS   = CRAFT_WORDS,
  parameter int unsigned ELEM_W  = CRAFT_WORD_W,
  parameter int unsigned ROT     = ROT_FP32,
  parameter elem_fmt_e   FMT     = FMT_FP32,
  parameter int unsigned NBLOCKS = 1024,
  localparam int unsigned IDX_W  = $clog2(WORDS),
  localparam int unsigned AUX_W  = IDX_W + 2,
  localparam int unsigned BLK_W  = $clog2(NBLOCKS),
  localparam int unsigned ADDR_W = BLK_W + IDX_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // program one block
  input  logic                         prog_valid,
  output logic                         prog_ready,
  input  logic [BLK_W-1:0]             prog_blk,
  input  logic [WORDS-1:0][WORD_W-1:0] prog_data,
  output logic                         prog_done,
  output logic [AUX_W-1:0]             prog_aux,
  // read one weight word
  input  logic                         rd_valid,
  output logic                         rd_ready,
  input  logic [ADDR_W-1:0]            rd_addr,
  output logic                         rd_rsp_valid,
  output logic [WORD_W-1:0]            rd_rsp_data,
  // stuck-at fault injection into the memory model
  input  logic                         fi_we,
  input  logic [ADDR_W-1:0]            fi_addr,
  input  logic [WORD_W-1:0]            fi_sa0,
  input  logic [WORD_W-1:0]            fi_sa1
);
  logic                         sel_start, sel_done, sel_busy;
  logic [WORDS-1:0][WORD_W-1:0] sel_weights, sel_sa0, sel_sa1;
  logic [AUX_W-1:0]             sel_aux;

  logic                         mem_we, mem_re;
  logic [ADDR_W-1:0]            enc_addr, wr_paddr, dec_addr, rd_paddr;
  logic [WORD_W-1:0]            enc_data, wr_pdata, rd_pdata, dec_data;
  logic [AUX_W-1:0]             enc_aux, dec_req_aux, dec_rsp_aux;

  craft_mem_ctrl #(.WORD_W(WORD_W), .WORDS(WORDS), .NBLOCKS(NBLOCKS)) u_ctrl (
    .clk, .rst_n,
    .prog_valid, .prog_ready, .prog_blk, .prog_data, .prog_done, .prog_aux,
    .rd_valid, .rd_ready, .rd_addr, .rd_rsp_valid, .rd_rsp_data,
    .sel_start, .sel_weights, .sel_sa0, .sel_sa1, .sel_done, .sel_aux,
    .mem_we, .enc_addr, .enc_data, .enc_aux,
    .mem_re, .dec_addr, .dec_req_aux, .dec_rsp_aux, .dec_data
  );

  craft_selector #(
    .WORD_W(WORD_W), .WORDS(WORDS), .ELEM_W(ELEM_W), .ROT(ROT), .FMT(FMT)
  ) u_sel (
    .clk, .rst_n,
    .start   (sel_start),
    .weights (sel_weights),
    .sa0     (sel_sa0),
    .sa1     (sel_sa1),
    .busy    (sel_busy),
    .done    (sel_done),
    .best_aux(sel_aux),
    .best_dev()
  );

  craft_encoder #(
    .WORD_W(WORD_W), .WORDS(WORDS), .ELEM_W(ELEM_W), .ROT(ROT), .ADDR_W(ADDR_W)
  ) u_enc (
    .orig_addr (enc_addr),
    .orig_data (enc_data),
    .aux       (enc_aux),
    .remap_addr(wr_paddr),
    .enc_data  (wr_pdata)
  );

  craft_decoder #(
    .WORD_W(WORD_W), .WORDS(WORDS), .ELEM_W(ELEM_W), .ROT(ROT), .ADDR_W(ADDR_W)
  ) u_dec (
    .orig_addr (dec_addr),
    .req_aux   (dec_req_aux),
    .remap_addr(rd_paddr),
    .raw_data  (rd_pdata),
    .rsp_aux   (dec_rsp_aux),
    .dec_data  (dec_data)
  );

  nvm_array #(.WORD_W(WORD_W), .DEPTH(NBLOCKS * WORDS)) u_nvm (
    .clk, .rst_n,
    .we   (mem_we),
    .waddr(wr_paddr),
    .wdata(wr_pdata),
    .re   (mem_re),
    .raddr(rd_paddr),
    .rdata(rd_pdata),
    .fi_we, .fi_addr, .fi_sa0, .fi_sa1
  );

  // the selector is only started while it is idle
  assert property (@(posedge clk) disable iff (!rst_n) sel_start |-> !sel_busy);
endmodule
