// craft_mem_ctrl -- memory controller of the CRAFT architecture.
//
// Sits between the DNN deployment side (host) and the non-volatile weight
// memory. Writes leave it through the Remap/Encode logic (craft_encoder) and
// reads return through the Remap/Decode logic (craft_decoder); the encoding
// of each block is chosen by the deviation minimiser (craft_selector) and its
// auxiliary bits are kept in a table inside this controller.
//
// Programming a block (prog_valid/prog_ready handshake, whole 512-bit block
// at once) runs these phases, one word per cycle:
//   PROBE0  write all-zero words to the block (unencoded)
//   READ0   read them back: every 1 is a stuck-at-1 cell
//   PROBE1  write all-one words
//   READ1   read them back: every 0 is a stuck-at-0 cell
//   SELECT  start the selector and wait for its best encoding
//   WRITE   write the weights through the encoder with that encoding and
//           store the auxiliary bits of the block
// prog_done pulses when the block is programmed, with prog_aux holding the
// encoding used. prog_done rises 5*WORDS + NCAND + 2 clock edges after the
// edge that accepts the request, where NCAND is the selector's search length
// (146 edges for the default 16-word block and 64 encodings).
//
// Reading a weight (rd_valid/rd_ready handshake, one word address of
// {block, index}): the controller looks up the block's auxiliary bits, the
// decoder remaps the index to the physical word, the memory is read and the
// word is decoded on its way back. rd_rsp_valid/rd_rsp_data follow exactly one
// cycle after the accepted request; a read can be accepted every cycle.
// Reads are accepted only while no block is being programmed (rd_ready is low
// during programming: the read stalls), and take priority over a pending
// program request.
//
// The paper names the memory controller and states that stuck-at cells are
// found by reading them; the probe sequence, the handshakes, the aux table
// (assumed to be fault-free storage) and all timing are this design's own.
module craft_mem_ctrl
  import craft_pkg::*;
#(
  parameter int unsigned WORD_W  = 32,
  parameter int unsigned WORDS   = 16,
  parameter int unsigned NBLOCKS = 1024,
  localparam int unsigned IDX_W  = $clog2(WORDS),
  localparam int unsigned AUX_W  = IDX_W + 2,
  localparam int unsigned BLK_W  = $clog2(NBLOCKS),
  localparam int unsigned ADDR_W = BLK_W + IDX_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host: program one block
  input  logic                         prog_valid,
  output logic                         prog_ready,
  input  logic [BLK_W-1:0]             prog_blk,
  input  logic [WORDS-1:0][WORD_W-1:0] prog_data,
  output logic                         prog_done,
  output logic [AUX_W-1:0]             prog_aux,
  // host: read one weight word
  input  logic                         rd_valid,
  output logic                         rd_ready,
  input  logic [ADDR_W-1:0]            rd_addr,
  output logic                         rd_rsp_valid,
  output logic [WORD_W-1:0]            rd_rsp_data,
  // deviation minimiser
  output logic                         sel_start,
  output logic [WORDS-1:0][WORD_W-1:0] sel_weights,
  output logic [WORDS-1:0][WORD_W-1:0] sel_sa0,
  output logic [WORDS-1:0][WORD_W-1:0] sel_sa1,
  input  logic                         sel_done,
  input  logic [AUX_W-1:0]             sel_aux,
  // write path, through Remap/Encode
  output logic                         mem_we,
  output logic [ADDR_W-1:0]            enc_addr,
  output logic [WORD_W-1:0]            enc_data,
  output logic [AUX_W-1:0]             enc_aux,
  // read path, through Remap/Decode
  output logic                         mem_re,
  output logic [ADDR_W-1:0]            dec_addr,
  output logic [AUX_W-1:0]             dec_req_aux,
  output logic [AUX_W-1:0]             dec_rsp_aux,
  input  logic [WORD_W-1:0]            dec_data
);

  typedef enum logic [2:0] {
    S_IDLE, S_PROBE0, S_READ0, S_PROBE1, S_READ1, S_SELECT, S_WAIT, S_WRITE
  } state_e;

  state_e                       state;
  logic [BLK_W-1:0]             blk;
  logic [IDX_W-1:0]             idx;
  logic [WORDS-1:0][WORD_W-1:0] wbuf, sa0_q, sa1_q;
  logic [AUX_W-1:0]             aux_tab [NBLOCKS];
  logic [AUX_W-1:0]             cur_aux;

  // read-response pipeline
  logic             rv_host_q, rv_probe_q, probe_one_q;
  logic [IDX_W-1:0] ridx_q;
  logic [AUX_W-1:0] rsp_aux_q;

  logic host_rd;
  assign rd_ready   = (state == S_IDLE);
  assign prog_ready = (state == S_IDLE) && !rd_valid;
  assign host_rd    = rd_valid && rd_ready;

  // ---------------------------------------------------------------- datapath
  always_comb begin
    mem_we      = 1'b0;
    enc_addr    = {blk, idx};
    enc_data    = '0;
    enc_aux     = '0;
    mem_re      = 1'b0;
    dec_addr    = {blk, idx};
    dec_req_aux = '0;
    unique case (state)
      S_IDLE: begin
        mem_re      = host_rd;
        dec_addr    = rd_addr;
        dec_req_aux = aux_tab[rd_addr[ADDR_W-1:IDX_W]];
      end
      S_PROBE0: begin mem_we = 1'b1; enc_data = '0; end
      S_PROBE1: begin mem_we = 1'b1; enc_data = '1; end
      S_READ0, S_READ1: mem_re = 1'b1;
      S_WRITE: begin
        mem_we   = 1'b1;
        enc_data = wbuf[idx];
        enc_aux  = cur_aux;
      end
      default: ;
    endcase
  end

  assign dec_rsp_aux  = rsp_aux_q;
  assign rd_rsp_valid = rv_host_q;
  assign rd_rsp_data  = dec_data;

  assign sel_start   = (state == S_SELECT);
  assign sel_weights = wbuf;
  assign sel_sa0     = sa0_q;
  assign sel_sa1     = sa1_q;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      blk         <= '0;
      idx         <= '0;
      wbuf        <= '0;
      sa0_q       <= '0;
      sa1_q       <= '0;
      cur_aux     <= '0;
      prog_done   <= 1'b0;
      prog_aux    <= '0;
      rv_host_q   <= 1'b0;
      rv_probe_q  <= 1'b0;
      probe_one_q <= 1'b0;
      ridx_q      <= '0;
      rsp_aux_q   <= '0;
    end else begin
      prog_done  <= 1'b0;
      rv_host_q  <= host_rd;
      rv_probe_q <= (state == S_READ0) || (state == S_READ1);
      probe_one_q <= (state == S_READ1);
      ridx_q     <= idx;
      rsp_aux_q  <= host_rd ? dec_req_aux : '0;

      // stuck-at map capture, one cycle after each probe read
      if (rv_probe_q) begin
        if (probe_one_q) sa0_q[ridx_q] <= ~dec_data;
        else             sa1_q[ridx_q] <=  dec_data;
      end

      unique case (state)
        S_IDLE: begin
          idx <= '0;
          if (prog_valid && prog_ready) begin
            blk   <= prog_blk;
            wbuf  <= prog_data;
            state <= S_PROBE0;
          end
        end
        S_PROBE0, S_READ0, S_PROBE1, S_READ1, S_WRITE: begin
          idx <= idx + 1'b1;
          if (idx == IDX_W'(WORDS - 1)) begin
            unique case (state)
              S_PROBE0: state <= S_READ0;
              S_READ0:  state <= S_PROBE1;
              S_PROBE1: state <= S_READ1;
              S_READ1:  state <= S_SELECT;
              default: begin          // S_WRITE
                state     <= S_IDLE;
                prog_done <= 1'b1;
                prog_aux  <= cur_aux;
              end
            endcase
          end
        end
        S_SELECT: state <= S_WAIT;
        S_WAIT: begin
          if (sel_done) begin
            cur_aux <= sel_aux;
            state   <= S_WRITE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // auxiliary-bit table: written once per programmed block
  always_ff @(posedge clk) begin
    if (state == S_WAIT && sel_done) aux_tab[blk] <= sel_aux;
  end

  // a read response is never due while the controller is programming
  assert property (@(posedge clk) disable iff (!rst_n) rd_rsp_valid |-> !rv_probe_q);
endmodule
