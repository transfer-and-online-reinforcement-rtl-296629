// tb_pe_array: a 4 x 4 PE array (RF of 16 words) taken through the dataflows of
// the paper, each checked against a reference computed in the testbench:
//   1. weights broadcast row by row from the buffer bus into the RFs;
//   2. FC forward (Fig. 7): x_i enters row i and moves east, every PE multiplies,
//      pSUMs are added vertically into row 0: y = x W;
//   3. FC backpropagation (Fig. 8): the error vector moves down the columns,
//      every PE forms a dot product, pSUMs are added row-wise into the last
//      column: W * d, without transposing W;
//   4. weight gradients x_i * d_j formed in place and drained up through row 0;
//   5. ReLU and maxpool on the comparators;
//   6. diagonal move of X to the upper-right PE (image-row reuse);
//   7. Type III set transfer: results of set 2 (columns 2-3) moved west onto
//      set 1 (columns 0-1) and added.
module tb_pe_array;
  import rl_pkg::*;
  import tb_fx_pkg::*;

  localparam int R = 4, C = 4, RFW = 16, NO = C * LANES;
  logic clk = 0, rst_n = 0;
  pe_cmd_t cmd;
  logic [R-1:0] row_en;
  logic [C-1:0] col_en;
  vec_t bus_in [C], north_in [C], west_in [R], north_acc [C], east_acc [R];
  int W [R][NO];       // weight matrix: input i, output o
  int xv [R], d [NO];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pe_array #(.ROWS(R), .COLS(C), .RF_WORDS(RFW)) dut (.clk(clk), .rst_n(rst_n), .cmd(cmd),
    .row_en(row_en), .col_en(col_en), .bus_in(bus_in), .west_in(west_in), .north_in(north_in),
    .north_acc(north_acc), .east_acc(east_acc));

  task automatic issue(input pe_op_e op, input int a, input int b, input int ln,
                       input logic [R-1:0] re, input logic [C-1:0] ce);
    @(negedge clk);
    cmd = '{op: op, addr_a: RF_AW'(a), addr_b: RF_AW'(b), lane: 3'(ln)};
    row_en = re; col_en = ce;
    @(posedge clk);
    #1;
    row_en = '0; col_en = '0; cmd.op = PE_NOP;
  endtask

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '0; row_en = '0; col_en = '0;
    for (int c = 0; c < C; c++) begin bus_in[c] = '0; north_in[c] = '0; end
    for (int r = 0; r < R; r++) west_in[r] = '0;
    for (int i = 0; i < R; i++) for (int o = 0; o < NO; o++) W[i][o] = rnd(400);
    for (int i = 0; i < R; i++) xv[i] = rnd(400);
    for (int o = 0; o < NO; o++) d[o] = rnd(400);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. weights: row i of W into RF[0] of PE row i (column c holds outputs 8c..8c+7)
    for (int i = 0; i < R; i++) begin
      for (int c = 0; c < C; c++) for (int k = 0; k < LANES; k++) bus_in[c][k] = fx_t'(W[i][8*c+k]);
      issue(PE_RF_WR_BUS, 0, 0, 0, R'(1) << i, '1);
    end

    // 2. FC forward
    for (int r = 0; r < R; r++) begin west_in[r] = '0; west_in[r][0] = fx_t'(xv[r]); end
    repeat (C) issue(PE_X_SH_E, 0, 0, 0, '1, '1);
    issue(PE_ACC_CLR, 0, 0, 0, '1, '1);
    issue(PE_MAC_X, 0, 0, 0, '1, '1);
    for (int s = R - 2; s >= 0; s--) issue(PE_PS_ADD_S, 0, 0, 0, R'(1) << s, '1);
    for (int o = 0; o < NO; o++) begin
      int e;
      e = rmul(xv[R-1], W[R-1][o]);
      for (int i = R - 2; i >= 0; i--) e = radd(rmul(xv[i], W[i][o]), e);
      chk(lane(north_acc[o / 8], o % 8), e, "fc forward");
    end

    // 3. FC backpropagation: (W d)_i
    for (int c = 0; c < C; c++) for (int k = 0; k < LANES; k++) north_in[c][k] = fx_t'(d[8*c+k]);
    repeat (R) issue(PE_X_SH_S, 0, 0, 0, '1, '1);
    issue(PE_ACC_CLR, 0, 0, 0, '1, '1);
    issue(PE_DOT, 0, 0, 0, '1, '1);
    for (int c = 1; c < C; c++) issue(PE_PS_ADD_W, 0, 0, 0, '1, C'(1) << c);
    for (int i = 0; i < R; i++) begin
      int e;
      e = 0;
      for (int c = 0; c < C; c++) begin
        longint s;
        s = 0;
        for (int k = 0; k < LANES; k++) s += longint'(d[8*c+k]) * W[i][8*c+k];
        e = radd(e, clamp16(longint'($floor(real'(s) / 256.0))));
      end
      chk(lane(east_acc[i], 0), e, "fc backward");
    end

    // 4. weight gradient x_i * d_o: d broadcast to every row (RF[1]), x moves east
    for (int c = 0; c < C; c++) for (int k = 0; k < LANES; k++) bus_in[c][k] = fx_t'(d[8*c+k]);
    issue(PE_RF_WR_BUS, 1, 0, 0, '1, '1);
    repeat (C) issue(PE_X_SH_E, 0, 0, 0, '1, '1);
    issue(PE_ACC_CLR, 0, 0, 0, '1, '1);
    issue(PE_MAC_X, 1, 0, 0, '1, '1);
    for (int i = 0; i < R; i++) begin
      for (int o = 0; o < NO; o++) chk(lane(north_acc[o / 8], o % 8), rmul(xv[i], d[o]), "gradient");
      issue(PE_PS_MOV_S, 0, 0, 0, '1, '1);
    end

    // 5. ReLU and maxpool: reload the gradients, ReLU, then max with RF[0] (W)
    issue(PE_ACC_CLR, 0, 0, 0, '1, '1);
    issue(PE_MAC_X, 1, 0, 0, '1, '1);
    issue(PE_RELU, 0, 0, 0, '1, '1);
    for (int o = 0; o < NO; o++) chk(lane(north_acc[o / 8], o % 8), rmax(rmul(xv[0], d[o]), 0), "relu");
    issue(PE_MAXP_RF, 0, 0, 0, '1, '1);
    for (int o = 0; o < NO; o++)
      chk(lane(north_acc[o / 8], o % 8), rmax(rmax(rmul(xv[0], d[o]), 0), W[0][o]), "maxpool");

    // 6. diagonal: X of PE(r,c) <= X of PE(r+1,c-1); tag every PE's X with 100r+c
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++) begin bus_in[c] = '0; bus_in[c][0] = fx_t'(100 * r + c); end
      issue(PE_RF_WR_BUS, 2, 0, 0, R'(1) << r, '1);
    end
    for (int r = 0; r < R; r++) begin west_in[r] = '0; west_in[r][0] = fx_t'(-1 - r); end
    issue(PE_X_LD_RF, 2, 0, 0, '1, '1);
    issue(PE_X_SH_DIAG, 0, 0, 0, '1, '1);
    issue(PE_ACC_CLR, 0, 0, 0, '1, '1);
    issue(PE_ACC_ADD_X, 0, 0, 0, '1, '1);
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++) begin
        int e;
        e = (c == 0) ? -1 - r : (r == R - 1) ? 0 : 100 * (r + 1) + (c - 1);
        chk(lane(north_acc[c], 0), e, "diagonal");
      end
      issue(PE_PS_MOV_S, 0, 0, 0, '1, '1);
    end

    // 7. set transfer: ACC of row 0 = 100r+c tags (reload), move set 2 onto set 1
    issue(PE_X_LD_RF, 2, 0, 0, '1, '1);
    issue(PE_ACC_CLR, 0, 0, 0, '1, '1);
    issue(PE_ACC_ADD_X, 0, 0, 0, '1, '1);       // ACC = 100r + c
    issue(PE_X_LD_ACC, 0, 0, 0, '1, '1);
    repeat (C / 2) issue(PE_X_SH_W, 0, 0, 0, '1, '1);
    issue(PE_ACC_ADD_X, 0, 0, 0, '1, C'(2'b11));
    for (int c = 0; c < C; c++)
      chk(lane(north_acc[c], 0), (c < C / 2) ? c + (c + C / 2) : c, "set transfer");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
