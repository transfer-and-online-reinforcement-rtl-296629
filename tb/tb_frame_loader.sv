// tb_frame_loader: streams two frames of random pixels with random gaps into a
// reduced frame loader (4 pixels per word, 10-pixel frames) while the buffer
// grant is withheld at random. Checks every packed word, its address, the zero
// fill of the last partial word and the done pulse.
module tb_frame_loader;
  localparam int GAW = 6, PPW = 4, FP = 10, NW = (FP + PPW - 1) / PPW;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, pix_valid, pix_ready, gb_req, gb_gnt;
  logic [GAW-1:0] base_addr, gb_waddr;
  logic [15:0] pix_data;
  logic [16*PPW-1:0] gb_wdata;
  logic [15:0] pix [FP];
  int checks = 0, failures = 0, words_seen, dones;

  always #5 clk = ~clk;

  frame_loader #(.GB_AW(GAW), .PIX_PER_WORD(PPW), .FRAME_PIXELS(FP)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .base_addr(base_addr), .busy(busy), .done(done),
    .pix_valid(pix_valid), .pix_ready(pix_ready), .pix_data(pix_data),
    .gb_req(gb_req), .gb_gnt(gb_gnt), .gb_waddr(gb_waddr), .gb_wdata(gb_wdata));

  always @(negedge clk) gb_gnt = gb_req && ($urandom_range(2) != 0);

  always @(posedge clk) begin
    if (done) dones++;
    if (gb_req && gb_gnt) begin
      logic [16*PPW-1:0] e;
      e = '0;
      for (int p = 0; p < PPW; p++)
        if (words_seen * PPW + p < FP) e[16*p +: 16] = pix[words_seen * PPW + p];
      checks += 2;
      if (gb_wdata !== e) failures++;
      if (int'(gb_waddr) != int'(base_addr) + words_seen) failures++;
      words_seen++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; base_addr = 0; pix_valid = 0; pix_data = 0; words_seen = 0; dones = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < FP; i++) pix[i] = 16'($urandom);
      @(negedge clk);
      words_seen = 0; dones = 0;
      start = 1; base_addr = GAW'(7 + 20 * f);
      @(negedge clk);
      start = 0;
      for (int i = 0; i < FP; i++) begin
        pix_valid = ($urandom_range(3) != 0);
        while (!pix_valid) begin @(negedge clk); pix_valid = ($urandom_range(3) != 0); end
        pix_data = pix[i];
        @(posedge clk);
        while (!pix_ready) @(posedge clk);
        @(negedge clk);
        pix_valid = 0;
      end
      repeat (20) @(negedge clk);
      checks += 3;
      if (words_seen != NW) failures++;
      if (dones != 1) failures++;
      if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
