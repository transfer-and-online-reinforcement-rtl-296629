// tb_global_buffer: random reads and writes on both ports of a reduced global
// buffer against a reference array; checks the one-clock read latency and that
// port A wins a same-address write collision.
module tb_global_buffer;
  localparam int WORDS = 64, W = 256, AW = 6;
  logic clk = 0;
  logic a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [W-1:0]  a_wdata, b_wdata, a_rdata, b_rdata;
  logic [W-1:0]  model [WORDS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  global_buffer #(.WORDS(WORDS), .WORD_W(W)) dut (.clk(clk),
    .a_en(a_en), .a_we(a_we), .a_addr(a_addr), .a_wdata(a_wdata), .a_rdata(a_rdata),
    .b_en(b_en), .b_we(b_we), .b_addr(b_addr), .b_wdata(b_wdata), .b_rdata(b_rdata));

  function automatic logic [W-1:0] rw();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(i); a_wdata = rw(); model[i] = a_wdata;
    end
    for (int it = 0; it < 3000; it++) begin
      logic [W-1:0] ea, eb;
      bit ra, rb;
      @(negedge clk);
      a_en = 1; b_en = 1;
      a_we = $urandom_range(1); b_we = $urandom_range(1);
      a_addr = AW'($urandom_range(WORDS - 1));
      b_addr = ($urandom_range(3) == 0) ? a_addr : AW'($urandom_range(WORDS - 1));
      a_wdata = rw(); b_wdata = rw();
      ra = !a_we; rb = !b_we;
      ea = model[a_addr]; eb = model[b_addr];
      if (b_we && !(a_we && a_addr == b_addr)) model[b_addr] = b_wdata;
      if (a_we) model[a_addr] = a_wdata;
      @(negedge clk);
      a_en = 0; b_en = 0;
      if (ra) begin checks++; if (a_rdata !== ea) failures++; end
      if (rb) begin checks++; if (b_rdata !== eb) failures++; end
    end
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 0; a_addr = AW'(i);
      @(negedge clk);
      a_en = 0;
      checks++; if (a_rdata !== model[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
