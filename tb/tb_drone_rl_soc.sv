// tb_drone_rl_soc: end-to-end run of the logic die at reduced size (4 x 4 PEs,
// 16-word RFs, 64-word global buffer, 64-beat MRAM, 64-pixel frames).
//
// One learning step of the online RL loop, then a small convolution:
//   1. the model is downloaded into the MRAM stack; a frame streams in while
//      the weight mover copies weights, a learning-rate word and conv filters
//      from the stack into the buffer (both share the buffer fill port);
//   2. FC forward of the frame through the trainable layer; Q values to buffer;
//   3. action selection, Bellman target and output error (Q unit);
//   4. backpropagation of the error through the layer (W * err, Fig. 8);
//   5. gradient sums over a batch of two images, drained to the buffer;
//   6. weight update W <- W - lr * G in the PEs, written back; forward again;
//   7. a row-stationary convolution in two segments of two PE rows: image rows
//      reach their PEs diagonally, filter rows are broadcast per PE row, pSUMs
//      are added vertically, ReLU and a 1 x 2 maxpool follow, and the Type III
//      set transfer adds set 2 onto set 1.
// Every result is read back from the buffer and compared with a reference
// computed here. Each mechanism is counted; one that never happened fails.
module tb_drone_rl_soc;
  import rl_pkg::*;
  import tb_fx_pkg::*;

  localparam int R = 4, C = 4, RFW = 16, GBW = 64, MW = 64, FP = 64;
  localparam int WW = C * 128, BW = WW / 2, GAW = 6, MAW = 6, NO = C * LANES;

  logic clk = 0, rst_n = 0;
  logic cmd_valid; pe_cmd_t cmd; logic [R-1:0] row_en; logic [C-1:0] col_en;
  gb_op_e gb_op; logic [GAW-1:0] gb_addr; logic [WW-1:0] gb_word;
  q_op_e q_op; fx_t reward, gamma_v, q_max, q_target; logic [2:0] action; logic q_err_valid;
  logic frame_start, frame_busy, frame_done, pix_valid, pix_ready; logic [GAW-1:0] frame_base;
  logic [15:0] pix_data;
  logic dma_start, dma_busy, dma_done; logic [MAW-1:0] dma_mram_addr; logic [GAW-1:0] dma_gb_addr;
  logic [15:0] dma_words;
  logic mram_load_valid, mram_load_ready; logic [MAW-1:0] mram_load_addr; logic [BW-1:0] mram_load_data;

  drone_rl_soc #(.ROWS(R), .COLS(C), .RF_WORDS(RFW), .GB_WORDS(GBW), .MRAM_WORDS(MW),
                 .FRAME_PIXELS(FP)) dut (.*, .gamma(gamma_v));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int W [R][NO], Wn [R][NO], pix [FP], filt [2][2][LANES], G [R][NO], err_v [LANES];
  int qv [N_ACTIONS], lr_q;
  logic [WW-1:0] gbm [GBW];               // expected contents of DMA'd words
  // mechanism counters
  int n_row_bcast, n_x_east, n_x_south, n_x_west, n_x_diag, n_ps_vert, n_ps_row, n_drain;
  int n_dot, n_relu, n_maxpool, n_q_select, n_q_target, n_wupdate, n_set_xfer;
  int n_dma, n_frame, n_fill_stall, n_mram_busy;

  always @(posedge clk) begin
    if (dut.fl_req && !dut.fl_gnt) n_fill_stall++;
    if (mram_load_valid && !mram_load_ready) n_mram_busy++;
    if (dma_done) n_dma++;
    if (frame_done) n_frame++;
  end

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic op(input pe_op_e o, input int a = 0, input int b = 0, input int ln = 0,
                    input logic [R-1:0] re = '1, input logic [C-1:0] ce = '1,
                    input gb_op_e g = GB_NONE, input int ga = 0, input q_op_e q = Q_NONE);
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: o, addr_a: RF_AW'(a), addr_b: RF_AW'(b), lane: 3'(ln)};
    row_en = re; col_en = ce; gb_op = g; gb_addr = GAW'(ga); q_op = q;
    case (o)
      PE_RF_WR_BUS: n_row_bcast++;
      PE_X_SH_E:    n_x_east++;
      PE_X_SH_S:    n_x_south++;
      PE_X_SH_W:    n_x_west++;
      PE_X_SH_DIAG: n_x_diag++;
      PE_PS_ADD_S:  n_ps_vert++;
      PE_PS_ADD_W:  n_ps_row++;
      PE_PS_MOV_S:  n_drain++;
      PE_DOT:       n_dot++;
      PE_RELU:      n_relu++;
      PE_MAXP_RF:   n_maxpool++;
      PE_MAC_RF:    n_wupdate++;
      default: ;
    endcase
    if (q == Q_SELECT) n_q_select++;
    if (q == Q_TARGET) n_q_target++;
    @(posedge clk);
    #1;
    cmd_valid = 0; gb_op = GB_NONE; q_op = Q_NONE;
  endtask

  function automatic int wlane(input logic [WW-1:0] w, input int slice, input int k);
    return int'($signed(w[128*slice + 16*k +: 16]));
  endfunction

  task automatic read_gb(input int a, output logic [WW-1:0] w);
    op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, a);
    w = gb_word;
  endtask

  task automatic dma(input int ma, input int ga, input int n);
    @(negedge clk);
    dma_start = 1; dma_mram_addr = MAW'(ma); dma_gb_addr = GAW'(ga); dma_words = 16'(n);
    @(negedge clk);
    dma_start = 0;
    while (!dma_done) @(negedge clk);
  endtask

  // FC forward of frame word 8 through RF[0]; Q word written to address 20
  task automatic forward(input int Wm [R][NO], input string tag);
    logic [WW-1:0] w;
    int e;
    op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, 8);
    repeat (C) op(PE_X_SH_E);
    op(PE_ACC_CLR);
    op(PE_MAC_X, 0, 0, 0);
    for (int s = R - 2; s >= 0; s--) op(PE_PS_ADD_S, 0, 0, 0, R'(1) << s);
    op(PE_NOP, 0, 0, 0, '0, '0, GB_WR_NORTH, 20);
    read_gb(20, w);
    for (int o = 0; o < NO; o++) begin
      e = rmul(pix[8*(R-1)], Wm[R-1][o]);
      for (int i = R - 2; i >= 0; i--) e = radd(rmul(pix[8*i], Wm[i][o]), e);
      chk(wlane(w, o / 8, o % 8), e, tag);
      if (o < N_ACTIONS) qv[o] = e;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WW-1:0] w, w2;
    int ea, best, t, rwd;
    cmd_valid = 0; cmd = '0; row_en = '0; col_en = '0; gb_op = GB_NONE; gb_addr = '0;
    q_op = Q_NONE; reward = '0; gamma_v = 16'sd230; frame_start = 0; frame_base = '0;
    pix_valid = 0; pix_data = '0; dma_start = 0; dma_mram_addr = '0; dma_gb_addr = '0;
    dma_words = '0; mram_load_valid = 0; mram_load_addr = '0; mram_load_data = '0;
    n_row_bcast = 0; n_x_east = 0; n_x_south = 0; n_x_west = 0; n_x_diag = 0; n_ps_vert = 0;
    n_ps_row = 0; n_drain = 0; n_dot = 0; n_relu = 0; n_maxpool = 0; n_q_select = 0;
    n_q_target = 0; n_wupdate = 0; n_set_xfer = 0; n_dma = 0; n_frame = 0; n_fill_stall = 0;
    n_mram_busy = 0;

    for (int i = 0; i < R; i++) for (int o = 0; o < NO; o++) W[i][o] = rnd(300);
    for (int p = 0; p < FP; p++) pix[p] = rnd(300);
    for (int r = 0; r < 2; r++) for (int t2 = 0; t2 < 2; t2++)
      for (int k = 0; k < LANES; k++) filt[r][t2][k] = rnd(300);
    lr_q = -128;                                    // -0.5 in Q8.8
    // buffer words staged in the MRAM: 0-3 weights, 10 learning rate, 16-19 filters
    for (int i = 0; i < R; i++) for (int o = 0; o < NO; o++) gbm[i][16*o +: 16] = 16'(W[i][o]);
    gbm[10] = '0;
    for (int c = 0; c < C; c++) gbm[10][128*c +: 16] = 16'(lr_q);
    for (int r = 0; r < 2; r++) for (int t2 = 0; t2 < 2; t2++) begin
      gbm[16 + 2*r + t2] = '0;
      for (int c = 0; c < C; c++) for (int k = 0; k < LANES; k++)
        gbm[16 + 2*r + t2][128*c + 16*k +: 16] = 16'(filt[r][t2][k]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. model download into the stack: beats 0-7 weights, 8-9 lr, 10-17 filters
    for (int b = 0; b < 18; b++) begin
      int gw;
      gw = (b < 8) ? b / 2 : (b < 10) ? 10 : 16 + (b - 10) / 2;
      @(negedge clk);
      mram_load_valid = 1; mram_load_addr = MAW'(b);
      mram_load_data = (b % 2 == 0) ? gbm[gw][BW-1:0] : gbm[gw][WW-1:BW];
      @(posedge clk);
      while (!mram_load_ready) @(posedge clk);
      @(negedge clk);
      mram_load_valid = 0;
    end
    repeat (32) @(negedge clk);
    // frame and weight copy at the same time
    fork
      begin
        @(negedge clk);
        frame_start = 1; frame_base = GAW'(8);
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
        repeat (20) @(negedge clk);
        dma(0, 0, 4);
        dma(8, 10, 1);
        dma(10, 16, 4);
      end
    join
    for (int a = 0; a < 20; a++) begin
      if (a < 4 || a == 10 || a >= 16) begin
        read_gb(a, w);
        checks++;
        if (w !== gbm[a]) begin failures++; $display("FAIL dma word %0d", a); end
      end
    end
    read_gb(8, w);
    for (int p = 0; p < FP / 2; p++) chk(int'($signed(w[16*p +: 16])), pix[p], "frame word 0");

    // 2. weights into RF[0] (row i <- buffer word i), forward pass
    for (int i = 0; i < R; i++) begin
      op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, i);
      op(PE_RF_WR_BUS, 0, 0, 0, R'(1) << i);
    end
    forward(W, "forward");

    // 3. Q unit: select, then target with the same Q word standing for s'
    op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, 20);
    op(PE_NOP, 0, 0, 0, '0, '0, GB_NONE, 0, Q_SELECT);   // Q unit takes the word just read
    ea = 0; best = qv[0];
    for (int a = 1; a < N_ACTIONS; a++) if (qv[a] > best) begin best = qv[a]; ea = a; end
    chk(int'(action), ea, "action");
    rwd = rnd(200); reward = fx_t'(rwd);
    op(PE_NOP, 0, 0, 0, '0, '0, GB_NONE, 0, Q_TARGET);
    op(PE_NOP, 0, 0, 0, '0, '0, GB_WR_QERR, 21);
    t = radd(rwd, rmul(230, best));
    for (int k = 0; k < LANES; k++) err_v[k] = (k == ea) ? radd(qv[ea], -t) : 0;
    read_gb(21, w);
    for (int k = 0; k < LANES; k++) chk(wlane(w, 0, k), err_v[k], "q error");

    // 4. backpropagation W * err
    op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, 21);
    repeat (R) op(PE_X_SH_S);
    op(PE_ACC_CLR);
    op(PE_DOT, 0, 0, 0);
    for (int c = 1; c < C; c++) op(PE_PS_ADD_W, 0, 0, 0, '1, C'(1) << c);
    op(PE_NOP, 0, 0, 0, '0, '0, GB_WR_EAST, 22);
    read_gb(22, w);
    for (int i = 0; i < R; i++) begin
      longint s;
      s = 0;
      for (int k = 0; k < LANES; k++) s += longint'(err_v[k]) * W[i][k];
      chk(wlane(w, i, 0), clamp16(longint'($floor(real'(s) / 256.0))), "backprop");
    end

    // 5. gradient sums over a batch of two images: G = x_i * err_o, twice
    op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, 21);
    op(PE_RF_WR_BUS, 1);                           // err broadcast to every row
    op(PE_ACC_CLR);
    op(PE_ACC_ST_RF, 2);
    for (int img = 0; img < 2; img++) begin
      op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, 8);
      repeat (C) op(PE_X_SH_E);
      op(PE_ACC_LD_RF, 2);
      op(PE_MAC_X, 1, 0, 0);
      op(PE_ACC_ST_RF, 2);
    end
    for (int i = 0; i < R; i++) op(PE_PS_MOV_S, 0, 0, 0, '1, '1, GB_WR_NORTH, 24 + i);
    for (int i = 0; i < R; i++) begin
      read_gb(24 + i, w);
      for (int o = 0; o < NO; o++) begin
        G[i][o] = radd(rmul(pix[8*i], (o < LANES) ? err_v[o] : 0),
                       rmul(pix[8*i], (o < LANES) ? err_v[o] : 0));
        chk(wlane(w, o / 8, o % 8), G[i][o], "gradient sum");
      end
    end

    // 6. weight update W <- W + (-lr) * G, written back to words 0-3
    op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, 10);
    op(PE_RF_WR_BUS, 3);
    op(PE_ACC_LD_RF, 0);
    op(PE_MAC_RF, 2, 3, 0);
    op(PE_ACC_ST_RF, 0);
    for (int i = 0; i < R; i++) op(PE_PS_MOV_S, 0, 0, 0, '1, '1, GB_WR_NORTH, i);
    for (int i = 0; i < R; i++) begin
      read_gb(i, w);
      for (int o = 0; o < NO; o++) begin
        Wn[i][o] = radd(W[i][o], rmul(lr_q, G[i][o]));
        chk(wlane(w, o / 8, o % 8), Wn[i][o], "updated weight");
      end
    end
    forward(Wn, "forward after update");

    // 7. row-stationary convolution, two segments of two PE rows
    op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, 9);         // image rows: slice q = row q
    repeat (C) op(PE_X_SH_DIAG);
    for (int r = 0; r < 2; r++) for (int t2 = 0; t2 < 2; t2++) begin
      op(PE_NOP, 0, 0, 0, '0, '0, GB_RD, 16 + 2*r + t2);
      op(PE_RF_WR_BUS, 4 + t2, 0, 0, (r == 0) ? R'(4'b0101) : R'(4'b1010));
    end
    for (int p = 0; p < 2; p++) begin
      op(PE_ACC_CLR);
      op(PE_MAC_X, 4, 0, p);
      op(PE_MAC_X, 5, 0, p + 1);
      op(PE_PS_ADD_S, 0, 0, 0, R'(4'b0101));
      op(PE_RELU);
      if (p == 0) op(PE_ACC_ST_RF, 6);
      else        op(PE_MAXP_RF, 6);
    end
    op(PE_NOP, 0, 0, 0, '0, '0, GB_WR_NORTH, 28);
    // Type III set transfer on row 0: set 2 = columns 2-3 onto set 1 = columns 0-1
    op(PE_X_LD_ACC, 0, 0, 0, R'(1));
    repeat (C / 2) op(PE_X_SH_W, 0, 0, 0, R'(1));
    op(PE_ACC_ADD_X, 0, 0, 0, R'(1), C'(2'b11));
    n_set_xfer++;
    op(PE_NOP, 0, 0, 0, '0, '0, GB_WR_NORTH, 30);
    repeat (2) op(PE_PS_MOV_S);
    op(PE_NOP, 0, 0, 0, '0, '0, GB_WR_NORTH, 29);
    begin
      int outv [2][C][LANES];
      for (int sg = 0; sg < 2; sg++) for (int c = 0; c < C; c++) for (int k = 0; k < LANES; k++) begin
        int pv [2];
        for (int p = 0; p < 2; p++) begin
          int rr [2];
          for (int r = 0; r < 2; r++) begin
            int q, x0, x1;
            q  = 2*sg + r + c;                     // image row held by PE(2sg+r, c)
            x0 = (q < R) ? pix[32 + 8*q + p] : 0;
            x1 = (q < R) ? pix[32 + 8*q + p + 1] : 0;
            rr[r] = radd(rmul(x0, filt[r][0][k]), rmul(x1, filt[r][1][k]));
          end
          pv[p] = rmax(radd(rr[0], rr[1]), 0);
        end
        outv[sg][c][k] = rmax(pv[1], pv[0]);
      end
      read_gb(28, w);
      read_gb(29, w2);
      for (int c = 0; c < C; c++) for (int k = 0; k < LANES; k++) begin
        chk(wlane(w, c, k), outv[0][c][k], "conv segment 1");
        chk(wlane(w2, c, k), outv[1][c][k], "conv segment 2");
      end
      read_gb(30, w);
      for (int c = 0; c < C; c++) for (int k = 0; k < LANES; k++)
        chk(wlane(w, c, k), (c < C / 2) ? radd(outv[0][c][k], outv[0][c + C/2][k]) : outv[0][c][k],
            "set transfer");
    end

    $display("mechanisms: row_bcast=%0d x_east=%0d x_south=%0d x_west=%0d x_diag=%0d ps_vert=%0d ps_row=%0d drain=%0d dot=%0d relu=%0d maxpool=%0d q_select=%0d q_target=%0d w_update=%0d set_xfer=%0d dma=%0d frame=%0d fill_stall=%0d mram_busy=%0d",
      n_row_bcast, n_x_east, n_x_south, n_x_west, n_x_diag, n_ps_vert, n_ps_row, n_drain, n_dot,
      n_relu, n_maxpool, n_q_select, n_q_target, n_wupdate, n_set_xfer, n_dma, n_frame,
      n_fill_stall, n_mram_busy);
    begin
      int m [19];
      m = '{n_row_bcast, n_x_east, n_x_south, n_x_west, n_x_diag, n_ps_vert, n_ps_row, n_drain,
            n_dot, n_relu, n_maxpool, n_q_select, n_q_target, n_wupdate, n_set_xfer, n_dma,
            n_frame, n_fill_stall, n_mram_busy};
      for (int i = 0; i < 19; i++) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
