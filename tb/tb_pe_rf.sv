// tb_pe_rf: fills the whole 288-word PE register file with random words and
// reads every word back through both read ports; checks that a write with
// we low changes nothing and that a write is visible in the next clock.
module tb_pe_rf;
  import rl_pkg::*;

  localparam int WORDS = 288;
  logic clk = 0, we;
  logic [RF_AW-1:0] waddr, ra, rb;
  vec_t wdata, da, db;
  vec_t model [WORDS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pe_rf #(.WORDS(WORDS)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
    .raddr_a(ra), .rdata_a(da), .raddr_b(rb), .rdata_b(db));

  function automatic vec_t rword();
    vec_t v;
    for (int k = 0; k < LANES; k++) v[k] = fx_t'($urandom);
    return v;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; ra = 0; rb = 0; wdata = '0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      we = 1; waddr = RF_AW'(i); wdata = rword(); model[i] = wdata;
    end
    @(negedge clk);
    we = 0; wdata = rword(); waddr = 9'd7;        // must not be written
    @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      ra = RF_AW'(i); rb = RF_AW'(WORDS - 1 - i);
      #1;
      checks += 2;
      if (da !== model[i])           failures++;
      if (db !== model[WORDS-1-i])   failures++;
    end
    // write then read in the next cycle
    @(negedge clk);
    we = 1; waddr = 9'd100; wdata = rword(); model[100] = wdata; ra = 9'd100;
    @(negedge clk);
    we = 0;
    #1 checks++;
    if (da !== model[100]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
