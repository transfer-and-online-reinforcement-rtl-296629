// tb_stt_mram_stack: writes a reduced MRAM model, then reads it back with
// back-to-back requests. Checks the data, the read latency of exactly 10 clocks,
// one read per clock, and that each write holds the port busy for 30 clocks.
module tb_stt_mram_stack;
  localparam int IO = 16, WORDS = 32, BW = 2 * IO, AW = 5;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_we, rsp_valid;
  logic [AW-1:0] req_addr;
  logic [BW-1:0] req_wdata, rsp_rdata;
  logic [BW-1:0] model [WORDS];
  int checks = 0, failures = 0, cyc = 0;
  int issue_cyc [$];
  logic [BW-1:0] exp_q [$];

  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  stt_mram_stack #(.IO(IO), .WORDS(WORDS)) dut (.clk(clk), .rst_n(rst_n),
    .req_valid(req_valid), .req_ready(req_ready), .req_we(req_we), .req_addr(req_addr),
    .req_wdata(req_wdata), .rsp_valid(rsp_valid), .rsp_rdata(rsp_rdata));

  // response checker, sampling in the middle of the clock
  always @(negedge clk) begin
    if (rst_n && rsp_valid) begin
      checks += 2;
      if (exp_q.size() == 0) failures++;
      else begin
        if (rsp_rdata !== exp_q.pop_front()) failures++;
        begin int d; d = cyc - issue_cyc.pop_front(); if (d != 10) begin failures++; if (failures < 3) $display("lat %0d", d); end end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int busy;
    req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      req_valid = 1; req_we = 1; req_addr = AW'(i); req_wdata = BW'($urandom); model[i] = req_wdata;
      checks++; if (!req_ready) failures++;
      @(negedge clk);
      req_valid = 0;
      busy = 0;
      while (!req_ready) begin busy++; @(negedge clk); end
      checks++; if (busy != 29) begin failures++; $display("write busy %0d", busy); end
      @(posedge clk);
    end
    // back-to-back reads
    for (int i = 0; i < 3 * WORDS; i++) begin
      int a;
      @(negedge clk);
      a = $urandom_range(WORDS - 1);
      req_valid = 1; req_we = 0; req_addr = AW'(a);
      checks++; if (!req_ready) failures++;
      exp_q.push_back(model[a]);
      issue_cyc.push_back(cyc + 1);
    end
    @(negedge clk);
    req_valid = 0;
    repeat (15) @(negedge clk);
    checks++; if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
