// stt_mram_stack: behavioural model of the 3D-stacked STT-MRAM (not synthesizable
// logic in the real chip: a stacked non-volatile memory die reached through
// through-silicon vias; this file models its function and timing only).
//
// The paper stacks STT-MRAM dies on the logic die in the organisation of
// high-bandwidth memory, with 1024 I/Os between the stack and the global buffer
// at 2 Gbit/s each, a 10 ns read and a 30 ns write latency (Table 1), and stores
// the CONV, FC1 and FC2 weights there (about 100 MB). At the paper's 1 GHz clock
// 1024 I/Os x 2 Gbit/s move 2048 bits per clock, so one access here moves a
// BEAT_W = 2048-bit beat; WORDS = 100e6 * 8 / 2048 = 390625 beats.
//
// Interface (this design's choice, a simple request/response port):
//   req_valid/req_ready  - request handshake; req_we selects write.
//   rsp_valid/rsp_rdata  - read data, exactly RD_LAT clocks after the read was
//                          accepted. Reads are pipelined: one per clock.
//   A write is accepted in one clock and then keeps the port busy
//   (req_ready low) until WR_LAT clocks after acceptance.
// Contents are not initialised: the transfer-learned model is written into the
// stack before deployment (through this same port in simulation).
module stt_mram_stack #(
  parameter int IO     = 1024,           // paper: 1024 I/Os
  parameter int WORDS  = 390625,         // 100 MB of 2048-bit beats
  parameter int RD_LAT = 10,             // paper: 10 ns read at 1 GHz
  parameter int WR_LAT = 30,             // paper: 30 ns write at 1 GHz
  localparam int BEAT_W = 2 * IO,        // 2 Gbit/s per I/O at 1 GHz
  localparam int AW     = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [AW-1:0]     req_addr,
  input  logic [BEAT_W-1:0] req_wdata,
  output logic              rsp_valid,
  output logic [BEAT_W-1:0] rsp_rdata
);

  logic [BEAT_W-1:0] mem [WORDS];
  logic [RD_LAT-1:0] vld_pipe;
  logic [BEAT_W-1:0] dat_pipe [RD_LAT];
  int unsigned       wr_busy;

  assign req_ready = (wr_busy == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_pipe <= '0;
      wr_busy  <= 0;
    end else begin
      vld_pipe <= {vld_pipe[RD_LAT-2:0], req_valid && req_ready && !req_we};
      if (req_valid && req_ready && req_we) wr_busy <= WR_LAT - 1;
      else if (wr_busy != 0)                wr_busy <= wr_busy - 1;
    end
  end

  always_ff @(posedge clk) begin
    dat_pipe[0] <= (int'(req_addr) < WORDS) ? mem[req_addr] : '0;
    for (int i = 1; i < RD_LAT; i++) dat_pipe[i] <= dat_pipe[i-1];
    if (req_valid && req_ready && req_we && int'(req_addr) < WORDS)
      mem[req_addr] <= req_wdata;
  end

  assign rsp_valid = vld_pipe[RD_LAT-1];
  assign rsp_rdata = dat_pipe[RD_LAT-1];

endmodule
