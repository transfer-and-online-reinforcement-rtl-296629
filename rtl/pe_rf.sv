// pe_rf: register file of one processing element.
//
// Holds, per PE, the filter rows, image rows, weight tiles and partial sums
// (pSUM) the dataflows need. The paper gives its size, 4.5 KB per PE; with the
// 128-bit link word as the RF word this is WORDS = 288 words of 8 x 16 bits.
// Organisation (one synchronous write port, two combinational read ports, no
// reset of the contents) is this design's choice: the paper gives only the size.
//
// Timing: a write on a rising edge is visible on the read ports from the next
// cycle on. Reading an address never written returns whatever the array held.
module pe_rf
  import rl_pkg::*;
#(
  parameter int WORDS = 288            // 4.5 KB / 16 B
) (
  input  logic             clk,
  input  logic             we,
  input  logic [RF_AW-1:0] waddr,
  input  vec_t             wdata,
  input  logic [RF_AW-1:0] raddr_a,
  output vec_t             rdata_a,
  input  logic [RF_AW-1:0] raddr_b,
  output vec_t             rdata_b
);

  vec_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < WORDS) mem[waddr] <= wdata;
  end

  assign rdata_a = (int'(raddr_a) < WORDS) ? mem[raddr_a] : '0;
  assign rdata_b = (int'(raddr_b) < WORDS) ? mem[raddr_b] : '0;

endmodule
