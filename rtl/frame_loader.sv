// frame_loader: writes one camera frame into the global buffer.
//
// The paper's logic die loads one image frame at a time from the off-chip
// camera buffer into the global buffer before it takes an action and learns.
// The DDR link itself is outside this block: frames arrive here as a stream of
// 16-bit pixels with a valid/ready handshake. The loader packs PIX_PER_WORD = 256
// pixels into each 4096-bit buffer word (pixel i of a word in bits
// [16i+15:16i]) and writes the words to consecutive addresses from `base_addr`.
// A frame is FRAME_PIXELS pixels (224 x 224 = 50176, the paper's network input);
// a last partial word is zero-filled. `done` pulses for one clock after the last
// word has been written.
// Buffer writes use a request/grant pair (gb_req/gb_gnt) because the fill port is
// shared with the MRAM mover, which has priority. While a full word waits for its
// grant, pix_ready is low.
module frame_loader #(
  parameter int GB_AW        = 16,
  parameter int PIX_PER_WORD = 256,
  parameter int FRAME_PIXELS = 224 * 224
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [GB_AW-1:0]          base_addr,
  output logic                      busy,
  output logic                      done,
  input  logic                      pix_valid,
  output logic                      pix_ready,
  input  logic [15:0]               pix_data,
  output logic                      gb_req,
  input  logic                      gb_gnt,
  output logic [GB_AW-1:0]          gb_waddr,
  output logic [16*PIX_PER_WORD-1:0] gb_wdata
);

  localparam int PW = $clog2(PIX_PER_WORD + 1);
  localparam int FW = $clog2(FRAME_PIXELS + 1);

  logic [16*PIX_PER_WORD-1:0] word_q;
  logic [PW-1:0]              fill;
  logic [FW-1:0]              pix_left;
  logic                       pending;   // word_q full, waiting for grant
  logic                       last_word;

  assign pix_ready = busy && !pending && (pix_left != 0);
  assign gb_req    = pending;
  assign gb_wdata  = word_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      word_q    <= '0;
      fill      <= '0;
      pix_left  <= '0;
      pending   <= 1'b0;
      last_word <= 1'b0;
      gb_waddr  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy      <= 1'b1;
          gb_waddr  <= base_addr;
          pix_left  <= FW'(FRAME_PIXELS);
          fill      <= '0;
          word_q    <= '0;
          last_word <= 1'b0;
        end
      end else if (pending) begin
        if (gb_gnt) begin
          pending  <= 1'b0;
          gb_waddr <= gb_waddr + 1'b1;
          fill     <= '0;
          word_q   <= '0;
          if (last_word) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end else if (pix_valid && pix_ready) begin
        word_q[16*fill +: 16] <= pix_data;
        fill     <= fill + 1'b1;
        pix_left <= pix_left - 1'b1;
        if (int'(fill) == PIX_PER_WORD - 1 || pix_left == 1) begin
          pending   <= 1'b1;
          last_word <= (pix_left == 1);
        end
      end
    end
  end

endmodule
