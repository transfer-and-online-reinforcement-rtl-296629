// mram_dma: moves weights from the STT-MRAM stack into the global buffer.
//
// The paper transfers CONV and FC weights from the stack to the global buffer
// over 1024 I/Os; it does not describe the mover. This one copies N_WORDS
// global-buffer words (WORD_W = 4096 bits) starting at MRAM beat address
// `mram_addr` to buffer address `gb_addr`. Every buffer word is two 2048-bit MRAM
// beats: beat 2i fills bits [2047:0] and beat 2i+1 bits [4095:2048].
// Reads are issued back to back, one per clock whenever the stack is ready, so
// the copy runs at the stack's full 2048 bits per clock; a copy of n words takes
// 2n + RD_LAT + 1 clocks from `start` to `done`.
// The mover has priority on the buffer's fill port, so read data are never
// stalled. Only reads are issued: in the paper's main configuration nothing is
// written back to the stack during flight. The write-side request signals
// (m_req_we, m_req_wdata) exist so the port matches the stack's full port; they
// are held at zero on purpose.
module mram_dma #(
  parameter int MRAM_AW = 19,
  parameter int GB_AW   = 16,
  parameter int BEAT_W  = 2048,
  parameter int CNT_W   = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [MRAM_AW-1:0]  mram_addr,
  input  logic [GB_AW-1:0]    gb_addr,
  input  logic [CNT_W-1:0]    n_words,
  output logic                busy,
  output logic                done,
  // STT-MRAM request/response port
  output logic                m_req_valid,
  input  logic                m_req_ready,
  output logic                m_req_we,
  output logic [MRAM_AW-1:0]  m_req_addr,
  output logic [BEAT_W-1:0]   m_req_wdata,
  input  logic                m_rsp_valid,
  input  logic [BEAT_W-1:0]   m_rsp_rdata,
  // global-buffer fill port (write only)
  output logic                gb_we,
  output logic [GB_AW-1:0]    gb_waddr,
  output logic [2*BEAT_W-1:0] gb_wdata
);

  logic [MRAM_AW-1:0] rd_addr;
  logic [CNT_W:0]     beats_left;      // beats still to request
  logic [CNT_W:0]     beats_pending;   // beats requested or to request, not yet returned
  logic [GB_AW-1:0]   wr_addr;
  logic               half;            // 1: low half of the current word is held
  logic [BEAT_W-1:0]  low_q;

  assign m_req_valid = busy && (beats_left != 0);
  assign m_req_we    = 1'b0;
  assign m_req_addr  = rd_addr;
  assign m_req_wdata = '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      done          <= 1'b0;
      rd_addr       <= '0;
      beats_left    <= '0;
      beats_pending <= '0;
      wr_addr       <= '0;
      half          <= 1'b0;
      low_q         <= '0;
      gb_we         <= 1'b0;
      gb_waddr      <= '0;
      gb_wdata      <= '0;
    end else begin
      done  <= 1'b0;
      gb_we <= 1'b0;
      if (!busy) begin
        if (start && n_words != 0) begin
          busy          <= 1'b1;
          rd_addr       <= mram_addr;
          beats_left    <= {n_words, 1'b0};
          beats_pending <= {n_words, 1'b0};
          wr_addr       <= gb_addr;
          half          <= 1'b0;
        end
      end else begin
        if (m_req_valid && m_req_ready) begin
          rd_addr    <= rd_addr + 1'b1;
          beats_left <= beats_left - 1'b1;
        end
        if (m_rsp_valid) begin
          beats_pending <= beats_pending - 1'b1;
          if (!half) begin
            low_q <= m_rsp_rdata;
            half  <= 1'b1;
          end else begin
            gb_we    <= 1'b1;
            gb_waddr <= wr_addr;
            gb_wdata <= {m_rsp_rdata, low_q};
            wr_addr  <= wr_addr + 1'b1;
            half     <= 1'b0;
            if (beats_pending == 1) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
