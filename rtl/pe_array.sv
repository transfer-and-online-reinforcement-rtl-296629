// pe_array: the ROWS x COLS systolic array of processing elements.
//
// The paper's array has 1024 PEs (32 x 32). Each PE has 128-bit connections to
// its four nearest neighbours and a diagonal connection to its upper-right PE.
// The global buffer feeds the first row through 4096 connections (32 x 128 bits)
// and can broadcast the same word to every row. In this RTL:
//   bus_in[c]    - the broadcast word slice of column c; a PE_RF_WR_BUS command
//                  writes it into the RF of every enabled PE of that column,
//                  i.e. one global-buffer word is broadcast to the selected rows.
//   west_in[r]   - vector entering row r from the left edge (X moves east).
//   north_in[c]  - vector entering column c from the top edge (X moves down).
//   north_acc[c] - accumulators of PE(0,c): the vertically accumulated pSUMs
//                  that go back to the global buffer (Fig. 7b, conv step 4).
//   east_acc[r]  - accumulators of PE(r,COLS-1): the row-wise accumulated
//                  pSUMs of backpropagation (Fig. 8b).
// One command is issued to the whole array per clock; row_en/col_en select the
// PEs that execute it (a PE executes when both its row and its column bit are
// set). The masks are how a controller partitions the array into the segments
// and sets of the Type I/II/III convolution mappings.
// Edges: the diagonal input of a column-0 PE is west_in of its row, that of any
// other bottom-row PE is zero; the missing east X, south ACC and west ACC
// neighbours read as zero. These edge rules, the masks and the single command
// stream are this design's choices; the paper gives the connections only.
module pe_array
  import rl_pkg::*;
#(
  parameter int ROWS     = 32,
  parameter int COLS     = 32,
  parameter int RF_WORDS = 288
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_cmd_t  cmd,
  input  logic [ROWS-1:0] row_en,
  input  logic [COLS-1:0] col_en,
  input  vec_t     bus_in   [COLS],
  input  vec_t     west_in  [ROWS],
  input  vec_t     north_in [COLS],
  output vec_t     north_acc[COLS],
  output vec_t     east_acc [ROWS]
);

  vec_t x_q   [ROWS][COLS];
  vec_t acc_q [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      vec_t xw, xn, xe, xd, as, aw;
      assign xw = (c == 0)        ? west_in[r]  : x_q[r][c-1];
      assign xn = (r == 0)        ? north_in[c] : x_q[r-1][c];
      assign xe = (c == COLS-1)   ? '0          : x_q[r][c+1];
      assign xd = (c == 0)        ? west_in[r]  :
                  (r == ROWS-1)   ? '0          : x_q[r+1][c-1];
      assign as = (r == ROWS-1)   ? '0          : acc_q[r+1][c];
      assign aw = (c == 0)        ? '0          : acc_q[r][c-1];

      pe #(.RF_WORDS(RF_WORDS)) u_pe (
        .clk(clk), .rst_n(rst_n), .cmd(cmd), .en(row_en[r] & col_en[c]),
        .bus_in(bus_in[c]), .x_west(xw), .x_north(xn), .x_east(xe), .x_diag(xd),
        .acc_south(as), .acc_west(aw), .x_out(x_q[r][c]), .acc_out(acc_q[r][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_north
    assign north_acc[c] = acc_q[0][c];
  end
  for (genvar r = 0; r < ROWS; r++) begin : g_east
    assign east_acc[r] = acc_q[r][COLS-1];
  end

endmodule
