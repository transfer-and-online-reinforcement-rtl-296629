// global_buffer: the on-die SRAM global buffer of the logic die.
//
// In the paper's main configuration the buffer keeps the weights of the last
// three fully connected layers (FC3, FC4, FC5: 12.6 MB), the running sums of
// their weight and bias gradients over a batch (another 12.6 MB) and a 4.2 MB
// scratchpad for PE-array inputs and results: 29.4 MB in all. It talks to the
// first row of the PE array over 4096 connections, so its word is 4096 bits
// (32 PE links of 128 bits). WORDS = 29.4e6 * 8 / 4096 rounded = 57420 words:
//   words     0 .. 24607  FC3..FC5 weights  (6,299,653 x 16 bit)
//   words 24608 .. 49215  gradient sums     (same size)
//   words 49216 .. 57419  scratchpad        (4.2 MB)
// The split is a convention of the software that drives the array; the
// hardware is one flat memory.
//
// Two ports (this design's choice; the paper gives capacity and width only):
//   port A - array side: read or write one word per clock.
//   port B - fill side: the MRAM weight mover and the frame loader.
// Reads are synchronous: the word appears on *_rdata one clock after *_en.
// If both ports write the same word in one clock, port A's data is kept.
module global_buffer #(
  parameter int WORDS  = 57420,
  parameter int WORD_W = 4096,
  localparam int AW    = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              a_en,
  input  logic              a_we,
  input  logic [AW-1:0]     a_addr,
  input  logic [WORD_W-1:0] a_wdata,
  output logic [WORD_W-1:0] a_rdata,
  input  logic              b_en,
  input  logic              b_we,
  input  logic [AW-1:0]     b_addr,
  input  logic [WORD_W-1:0] b_wdata,
  output logic [WORD_W-1:0] b_rdata
);

  logic [WORD_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (b_en && b_we && int'(b_addr) < WORDS &&
        !(a_en && a_we && a_addr == b_addr))
      mem[b_addr] <= b_wdata;
    if (a_en && a_we && int'(a_addr) < WORDS)
      mem[a_addr] <= a_wdata;
  end

  always_ff @(posedge clk) begin
    if (a_en && !a_we) a_rdata <= (int'(a_addr) < WORDS) ? mem[a_addr] : '0;
    if (b_en && !b_we) b_rdata <= (int'(b_addr) < WORDS) ? mem[b_addr] : '0;
  end

endmodule
