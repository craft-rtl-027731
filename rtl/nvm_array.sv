// nvm_array -- behavioural model of an emerging non-volatile memory (ReRAM or
// PCM array) with stuck-at faults. Not a synthesis target: a real design uses
// the memory macro of its process; this model stands in for it.
//
// Word-organised, DEPTH words of WORD_W bits, one write port and one read
// port. A write programs every healthy cell of the word; a cell that is
// stuck-at-0 (stuck in its low-resistance state) always holds 0 and one that
// is stuck-at-1 (high-resistance state) always holds 1, whatever is written.
// A stuck cell can still be read, which is how the controller detects it.
// Reads are synchronous: rdata holds the word addressed in the cycle re was
// high, from the next cycle on (one-cycle latency). A read and a write of the
// same word in one cycle return the old contents.
//
// The fault maps are set through the fault-injection port (fi_*), which
// stands for the fabrication and wear-out defects of a real array; a 1 in
// fi_sa0/fi_sa1 makes that cell stuck. Faults take effect on the stored bits
// immediately. The one-cycle read latency and the port layout are choices of
// this model; the paper does not describe the array's interface.
module nvm_array #(
  parameter int unsigned WORD_W = 32,
  parameter int unsigned DEPTH  = 16384,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write port
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wdata,
  // read port
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [WORD_W-1:0] rdata,
  // fault injection
  input  logic              fi_we,
  input  logic [AW-1:0]     fi_addr,
  input  logic [WORD_W-1:0] fi_sa0,
  input  logic [WORD_W-1:0] fi_sa1
);
  logic [WORD_W-1:0] cells   [DEPTH];
  logic [WORD_W-1:0] sa0_map [DEPTH];
  logic [WORD_W-1:0] sa1_map [DEPTH];

  // Fault maps start empty: a fault-free array until faults are injected.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        sa0_map[i] <= '0;
        sa1_map[i] <= '0;
      end
    end else if (fi_we) begin
      sa0_map[fi_addr] <= fi_sa0;
      sa1_map[fi_addr] <= fi_sa1 & ~fi_sa0;  // a cell is stuck one way only
    end
  end

  always_ff @(posedge clk) begin
    if (we) cells[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= (cells[raddr] & ~sa0_map[raddr]) | sa1_map[raddr];
  end
endmodule
