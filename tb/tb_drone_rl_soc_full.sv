// tb_drone_rl_soc_full: the logic die at its full size (32 x 32 PEs, 4.5 KB RFs,
// 29.4 MB global buffer, 100 MB MRAM model, 224 x 224 frames) through one
// complete inference step: the 32 x 256 weight tile of a fully connected layer
// is downloaded into the MRAM stack and copied into the global buffer while a
// whole frame streams into the scratchpad; the tile is broadcast row by row into
// the PE register files, 32 inputs of the frame move east along the rows, all
// 1024 PEs multiply, the pSUMs are added vertically into row 0 and the 256
// outputs are written back to the buffer and compared with a reference; the
// first five outputs are taken as Q values and the chosen action is checked.
module tb_drone_rl_soc_full;
  import rl_pkg::*;
  import tb_fx_pkg::*;

  localparam int R = 32, C = 32, GAW = 16, MAW = 19, WW = 4096, BW = 2048, NO = C * LANES;
  localparam int FP = 224 * 224, FBASE = 49216, OUT = FBASE + 200;

  logic clk = 0, rst_n = 0;
  logic cmd_valid; pe_cmd_t cmd; logic [R-1:0] row_en; logic [C-1:0] col_en;
  gb_op_e gb_op; logic [GAW-1:0] gb_addr; logic [WW-1:0] gb_word;
  q_op_e q_op; fx_t reward, gamma_v, q_max, q_target; logic [2:0] action; logic q_err_valid;
  logic frame_start, frame_busy, frame_done, pix_valid, pix_ready; logic [GAW-1:0] frame_base;
  logic [15:0] pix_data;
  logic dma_start, dma_busy, dma_done; logic [MAW-1:0] dma_mram_addr; logic [GAW-1:0] dma_gb_addr;
  logic [15:0] dma_words;
  logic mram_load_valid, mram_load_ready; logic [MAW-1:0] mram_load_addr; logic [BW-1:0] mram_load_data;

  drone_rl_soc dut (.*, .gamma(gamma_v));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int W [R][NO];
  int pix [FP];

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic op(input pe_op_e o, input int a = 0, input int ln = 0,
                    input logic [R-1:0] re = '1, input gb_op_e g = GB_NONE, input int ga = 0,
                    input q_op_e q = Q_NONE);
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: o, addr_a: RF_AW'(a), addr_b: '0, lane: 3'(ln)};
    row_en = re; col_en = '1; gb_op = g; gb_addr = GAW'(ga); q_op = q;
    @(posedge clk);
    #1;
    cmd_valid = 0; gb_op = GB_NONE; q_op = Q_NONE;
  endtask

  function automatic int wlane(input logic [WW-1:0] w, input int o);
    return int'($signed(w[16*o +: 16]));
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WW-1:0] w;
    int e, qv [N_ACTIONS], ea, best;
    cmd_valid = 0; cmd = '0; row_en = '0; col_en = '0; gb_op = GB_NONE; gb_addr = '0;
    q_op = Q_NONE; reward = '0; gamma_v = 16'sd230; frame_start = 0; frame_base = '0;
    pix_valid = 0; pix_data = '0; dma_start = 0; dma_mram_addr = '0; dma_gb_addr = '0;
    dma_words = '0; mram_load_valid = 0; mram_load_addr = '0; mram_load_data = '0;
    for (int i = 0; i < R; i++) for (int o = 0; o < NO; o++) W[i][o] = rnd(300);
    for (int p = 0; p < FP; p++) pix[p] = rnd(300);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // weight tile into the stack: buffer word i = {beat 2i+1, beat 2i}
    for (int b = 0; b < 2 * R; b++) begin
      @(negedge clk);
      mram_load_valid = 1; mram_load_addr = MAW'(1000 + b);
      for (int o = 0; o < NO / 2; o++) mram_load_data[16*o +: 16] = 16'(W[b / 2][(b % 2) * NO / 2 + o]);
      @(posedge clk);
      while (!mram_load_ready) @(posedge clk);
      @(negedge clk);
      mram_load_valid = 0;
    end
    repeat (32) @(negedge clk);
    fork
      begin
        @(negedge clk);
        frame_start = 1; frame_base = GAW'(FBASE);
        @(negedge clk);
        frame_start = 0;
        for (int p = 0; p < FP; p++) begin
          pix_valid = 1; pix_data = 16'(pix[p]);
          @(posedge clk);
          while (!pix_ready) @(posedge clk);
          @(negedge clk);
        end
        pix_valid = 0;
        while (frame_busy) @(negedge clk);
      end
      begin
        repeat (100) @(negedge clk);
        dma_start = 1; dma_mram_addr = MAW'(1000); dma_gb_addr = '0; dma_words = 16'(R);
        @(negedge clk);
        dma_start = 0;
        while (!dma_done) @(negedge clk);
      end
    join
    // last frame word
    op(PE_NOP, 0, 0, '0, GB_RD, FBASE + FP / 256 - 1);
    for (int p = 0; p < 256; p++) chk(wlane(gb_word, p), pix[FP - 256 + p], "frame");

    for (int i = 0; i < R; i++) begin
      op(PE_NOP, 0, 0, '0, GB_RD, i);
      op(PE_RF_WR_BUS, 0, 0, R'(1) << i);
    end
    op(PE_NOP, 0, 0, '0, GB_RD, FBASE);
    repeat (C) op(PE_X_SH_E);
    op(PE_ACC_CLR);
    op(PE_MAC_X, 0, 0);
    for (int s = R - 2; s >= 0; s--) op(PE_PS_ADD_S, 0, 0, R'(1) << s);
    op(PE_NOP, 0, 0, '0, GB_WR_NORTH, OUT);
    op(PE_NOP, 0, 0, '0, GB_RD, OUT);
    op(PE_NOP, 0, 0, '0, GB_NONE, 0, Q_SELECT);     // Q unit takes the word just read
    w = gb_word;
    for (int o = 0; o < NO; o++) begin
      e = rmul(pix[8*(R-1)], W[R-1][o]);
      for (int i = R - 2; i >= 0; i--) e = radd(rmul(pix[8*i], W[i][o]), e);
      chk(wlane(w, o), e, "fc output");
      if (o < N_ACTIONS) qv[o] = e;
    end
    ea = 0; best = qv[0];
    for (int a = 1; a < N_ACTIONS; a++) if (qv[a] > best) begin best = qv[a]; ea = a; end
    chk(int'(action), ea, "action");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
