// tb_mram_dma: the weight mover with a reduced STT-MRAM model. The MRAM is
// first written with random beats; two copies then move blocks of words into
// a testbench copy of the global buffer. Checks every buffer word (two beats,
// low beat first), the destination addresses, and the copy time of
// 2n + 10 + 1 clocks, i.e. one 2048-bit beat per clock after the read latency.
module tb_mram_dma;
  localparam int IO = 16, BW = 2 * IO, MWORDS = 64, MAW = 6, GAW = 6;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [MAW-1:0] mram_addr;
  logic [GAW-1:0] gb_addr;
  logic [15:0] n_words;
  logic d_valid, d_we, m_valid, m_ready, m_we, rsp_valid, gb_we;
  logic [MAW-1:0] d_addr, m_addr;
  logic [BW-1:0] d_wdata, m_wdata, rsp_rdata;
  logic [GAW-1:0] gb_waddr;
  logic [2*BW-1:0] gb_wdata;
  // testbench side: preload port
  logic t_valid; logic [MAW-1:0] t_addr; logic [BW-1:0] t_data;
  logic [BW-1:0] model [MWORDS];
  logic [2*BW-1:0] gb [64];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mram_dma #(.MRAM_AW(MAW), .GB_AW(GAW), .BEAT_W(BW), .CNT_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .mram_addr(mram_addr), .gb_addr(gb_addr),
    .n_words(n_words), .busy(busy), .done(done),
    .m_req_valid(d_valid), .m_req_ready(m_ready && busy), .m_req_we(d_we), .m_req_addr(d_addr),
    .m_req_wdata(d_wdata), .m_rsp_valid(rsp_valid), .m_rsp_rdata(rsp_rdata),
    .gb_we(gb_we), .gb_waddr(gb_waddr), .gb_wdata(gb_wdata));

  assign m_valid = busy ? d_valid : t_valid;
  assign m_we    = busy ? d_we    : 1'b1;
  assign m_addr  = busy ? d_addr  : t_addr;
  assign m_wdata = busy ? d_wdata : t_data;

  stt_mram_stack #(.IO(IO), .WORDS(MWORDS)) u_mram (.clk(clk), .rst_n(rst_n),
    .req_valid(m_valid), .req_ready(m_ready), .req_we(m_we), .req_addr(m_addr),
    .req_wdata(m_wdata), .rsp_valid(rsp_valid), .rsp_rdata(rsp_rdata));

  always @(posedge clk) if (gb_we) gb[gb_waddr] <= gb_wdata;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic copy(input int ma, input int ga, input int n);
    int cycles;
    @(negedge clk);
    for (int i = 0; i < 64; i++) gb[i] = '0;
    start = 1; mram_addr = MAW'(ma); gb_addr = GAW'(ga); n_words = 16'(n);
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != 2 * n + 10 + 1) begin failures++; $display("copy took %0d", cycles); end
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (gb[ga + i] !== {model[ma + 2*i + 1], model[ma + 2*i]}) failures++;
    end
    checks++;
    if (ga + n < 64 && gb[ga + n] !== '0) failures++;    // nothing past the block
  endtask

  initial begin
    start = 0; mram_addr = 0; gb_addr = 0; n_words = 0; t_valid = 0; t_addr = 0; t_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < MWORDS; i++) begin
      @(negedge clk);
      t_valid = 1; t_addr = MAW'(i); t_data = BW'($urandom); model[i] = t_data;
      @(negedge clk);
      t_valid = 0;
      while (!m_ready) @(negedge clk);
    end
    copy(0, 0, 8);
    copy(10, 20, 13);
    copy(63 - 1, 5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
