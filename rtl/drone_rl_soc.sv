// drone_rl_soc: logic die of the drone learning platform, with its STT-MRAM stack.
//
// The chip runs a modified AlexNet (5 CONV + 5 FC layers) that maps a camera
// frame to five Q values, and learns online by retraining only the last fully
// connected layers. The layers that never change in flight (CONV1-5, FC1, FC2)
// sit in a stacked STT-MRAM that is only read; the trainable layers (FC3-FC5),
// their gradient sums and a scratchpad sit in the on-die SRAM global buffer, so
// every write caused by learning lands in SRAM.
//
// Blocks and connections (after the paper's system figure):
//   stt_mram_stack --(2048 bit/clk)--> mram_dma --> global_buffer (fill port)
//   pixel stream ----------------------> frame_loader --> global_buffer (fill port)
//   global_buffer (array port, 4096 bit) <--> pe_array (32 x 32 PEs)
//   global_buffer word 0 lanes 0..4 ---> q_unit --> error vector --> global_buffer
//
// Array command port: each clock with cmd_valid high the top executes
//   - one PE micro-operation `cmd` in every PE selected by row_en/col_en, and
//   - one global-buffer operation `gb_op` at `gb_addr`:
//       GB_RD       the word read is on gb_word from the next clock and, in that
//                   clock, is the broadcast bus (slice c to column c), the north
//                   edge input (slice c to column c) and the west edge input
//                   (slice r to row r) of the array;
//       GB_WR_NORTH writes the accumulators of PE row 0 (slice c = column c);
//       GB_WR_EAST  writes the accumulators of the last PE column (slice r = row r);
//       GB_WR_QERR  writes the Q unit's error vector into slice 0.
//   - one Q-unit operation `q_op` on lanes 0..4 of slice 0 of gb_word.
// The schedule of commands for each layer (the paper's dataflows) is supplied by
// the host through this port; the paper gives no instruction set or sequencer.
// Fill port: the MRAM mover has priority over the frame loader.
// mram_load_*: writes the transfer-learned model into the stack before flight;
// it is served only while the mover is idle.
module drone_rl_soc
  import rl_pkg::*;
#(
  parameter int ROWS         = 32,       // paper: 32 x 32 PEs
  parameter int COLS         = 32,
  parameter int RF_WORDS     = 288,      // paper: 4.5 KB RF per PE
  parameter int GB_WORDS     = 57420,    // paper: 29.4 MB global buffer
  parameter int MRAM_WORDS   = 390625,   // about 100 MB of MRAM weights
  parameter int FRAME_PIXELS = 224 * 224,
  localparam int WORD_W  = COLS * 128,
  localparam int GB_AW   = $clog2(GB_WORDS),
  localparam int MRAM_AW = $clog2(MRAM_WORDS),
  localparam int BEAT_W  = WORD_W / 2
) (
  input  logic               clk,
  input  logic               rst_n,
  // array command port
  input  logic               cmd_valid,
  input  pe_cmd_t            cmd,
  input  logic [ROWS-1:0]    row_en,
  input  logic [COLS-1:0]    col_en,
  input  gb_op_e             gb_op,
  input  logic [GB_AW-1:0]   gb_addr,
  output logic [WORD_W-1:0]  gb_word,
  // Q unit
  input  q_op_e              q_op,
  input  fx_t                reward,
  input  fx_t                gamma,
  output logic [2:0]         action,
  output fx_t                q_max,
  output fx_t                q_target,
  output logic               q_err_valid,
  // frame input (from the camera buffer link)
  input  logic               frame_start,
  input  logic [GB_AW-1:0]   frame_base,
  output logic               frame_busy,
  output logic               frame_done,
  input  logic               pix_valid,
  output logic               pix_ready,
  input  logic [15:0]        pix_data,
  // MRAM to global-buffer weight transfer
  input  logic               dma_start,
  input  logic [MRAM_AW-1:0] dma_mram_addr,
  input  logic [GB_AW-1:0]   dma_gb_addr,
  input  logic [15:0]        dma_words,
  output logic               dma_busy,
  output logic               dma_done,
  // model download into the MRAM stack
  input  logic               mram_load_valid,
  output logic               mram_load_ready,
  input  logic [MRAM_AW-1:0] mram_load_addr,
  input  logic [BEAT_W-1:0]  mram_load_data
);

  // ---------------------------------------------------------------- array side
  vec_t        bus_in   [COLS];
  vec_t        north_in [COLS];
  vec_t        west_in  [ROWS];
  vec_t        north_acc[COLS];
  vec_t        east_acc [ROWS];
  logic [WORD_W-1:0] a_rdata, a_wdata;
  logic [ROWS-1:0]   row_en_g;
  logic [COLS-1:0]   col_en_g;
  vec_t        q_err;
  fx_t         q_in [N_ACTIONS];

  assign row_en_g = cmd_valid ? row_en : '0;
  assign col_en_g = cmd_valid ? col_en : '0;

  for (genvar c = 0; c < COLS; c++) begin : g_cin
    assign bus_in[c]   = vec_t'(a_rdata[128*c +: 128]);
    assign north_in[c] = vec_t'(a_rdata[128*c +: 128]);
  end
  for (genvar r = 0; r < ROWS; r++) begin : g_rin
    assign west_in[r] = vec_t'(a_rdata[128*(r % COLS) +: 128]);
  end

  pe_array #(.ROWS(ROWS), .COLS(COLS), .RF_WORDS(RF_WORDS)) u_array (
    .clk(clk), .rst_n(rst_n), .cmd(cmd), .row_en(row_en_g), .col_en(col_en_g),
    .bus_in(bus_in), .west_in(west_in), .north_in(north_in),
    .north_acc(north_acc), .east_acc(east_acc)
  );

  always_comb begin
    a_wdata = '0;
    unique case (gb_op)
      GB_WR_NORTH: for (int c = 0; c < COLS; c++) a_wdata[128*c +: 128] = north_acc[c];
      GB_WR_EAST:  for (int r = 0; r < ROWS; r++) a_wdata[128*(r % COLS) +: 128] = east_acc[r];
      GB_WR_QERR:  a_wdata[127:0] = q_err;
      default:     a_wdata = '0;
    endcase
  end

  // ------------------------------------------------------------- fill side
  logic              dma_gb_we;
  logic [GB_AW-1:0]  dma_gb_waddr;
  logic [WORD_W-1:0] dma_gb_wdata;
  logic              fl_req, fl_gnt;
  logic [GB_AW-1:0]  fl_waddr;
  logic [WORD_W-1:0] fl_wdata;

  assign fl_gnt = fl_req && !dma_gb_we;

  global_buffer #(.WORDS(GB_WORDS), .WORD_W(WORD_W)) u_gb (
    .clk(clk),
    .a_en(cmd_valid && gb_op != GB_NONE), .a_we(gb_op != GB_RD), .a_addr(gb_addr),
    .a_wdata(a_wdata), .a_rdata(a_rdata),
    .b_en(dma_gb_we || fl_req), .b_we(1'b1),
    .b_addr(dma_gb_we ? dma_gb_waddr : fl_waddr),
    .b_wdata(dma_gb_we ? dma_gb_wdata : fl_wdata), .b_rdata()
  );

  assign gb_word = a_rdata;

  frame_loader #(.GB_AW(GB_AW), .PIX_PER_WORD(WORD_W / 16), .FRAME_PIXELS(FRAME_PIXELS)) u_fl (
    .clk(clk), .rst_n(rst_n), .start(frame_start), .base_addr(frame_base),
    .busy(frame_busy), .done(frame_done),
    .pix_valid(pix_valid), .pix_ready(pix_ready), .pix_data(pix_data),
    .gb_req(fl_req), .gb_gnt(fl_gnt), .gb_waddr(fl_waddr), .gb_wdata(fl_wdata)
  );

  // ------------------------------------------------------------- MRAM side
  logic              m_req_valid, m_req_ready, m_req_we, m_rsp_valid;
  logic              d_req_valid, d_req_we;
  logic [MRAM_AW-1:0] m_req_addr, d_req_addr;
  logic [BEAT_W-1:0] m_req_wdata, d_req_wdata, m_rsp_rdata;

  mram_dma #(.MRAM_AW(MRAM_AW), .GB_AW(GB_AW), .BEAT_W(BEAT_W), .CNT_W(16)) u_dma (
    .clk(clk), .rst_n(rst_n), .start(dma_start), .mram_addr(dma_mram_addr),
    .gb_addr(dma_gb_addr), .n_words(dma_words), .busy(dma_busy), .done(dma_done),
    .m_req_valid(d_req_valid), .m_req_ready(m_req_ready && dma_busy), .m_req_we(d_req_we),
    .m_req_addr(d_req_addr), .m_req_wdata(d_req_wdata),
    .m_rsp_valid(m_rsp_valid), .m_rsp_rdata(m_rsp_rdata),
    .gb_we(dma_gb_we), .gb_waddr(dma_gb_waddr), .gb_wdata(dma_gb_wdata)
  );

  assign m_req_valid     = dma_busy ? d_req_valid : mram_load_valid;
  assign m_req_we        = dma_busy ? d_req_we    : 1'b1;
  assign m_req_addr      = dma_busy ? d_req_addr  : mram_load_addr;
  assign m_req_wdata     = dma_busy ? d_req_wdata : mram_load_data;
  assign mram_load_ready = m_req_ready && !dma_busy;

  stt_mram_stack #(.IO(BEAT_W / 2), .WORDS(MRAM_WORDS)) u_mram (
    .clk(clk), .rst_n(rst_n), .req_valid(m_req_valid), .req_ready(m_req_ready),
    .req_we(m_req_we), .req_addr(m_req_addr), .req_wdata(m_req_wdata),
    .rsp_valid(m_rsp_valid), .rsp_rdata(m_rsp_rdata)
  );

  // ---------------------------------------------------------------- Q unit
  for (genvar a = 0; a < N_ACTIONS; a++) begin : g_q
    assign q_in[a] = fx_t'(a_rdata[16*a +: 16]);
  end

  q_unit u_q (
    .clk(clk), .rst_n(rst_n), .op(cmd_valid ? q_op : Q_NONE), .q_in(q_in),
    .reward(reward), .gamma(gamma), .action(action), .q_max(q_max),
    .target(q_target), .err(q_err), .err_valid(q_err_valid)
  );

endmodule
