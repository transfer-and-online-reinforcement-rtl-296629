// tb_pe: drives one processing element with a long random sequence of
// micro-operations, enabled and disabled, and compares its X and ACC registers
// after every clock with a cycle-level reference model of the PE (RF, X, ACC)
// kept in the testbench. The RF is first filled through the broadcast input.
module tb_pe;
  import rl_pkg::*;
  import tb_fx_pkg::*;

  localparam int RFW = 16;
  logic    clk = 0, rst_n = 0, en;
  pe_cmd_t cmd;
  vec_t    bus_in, xw, xn, xe, xd, as, aw, x_out, acc_out;
  int      rf_m [RFW][LANES];
  int      x_m [LANES], acc_m [LANES];
  int      checks = 0, failures = 0;
  int      op_seen [21];

  always #5 clk = ~clk;

  pe #(.RF_WORDS(RFW)) dut (.clk(clk), .rst_n(rst_n), .cmd(cmd), .en(en), .bus_in(bus_in),
    .x_west(xw), .x_north(xn), .x_east(xe), .x_diag(xd), .acc_south(as), .acc_west(aw),
    .x_out(x_out), .acc_out(acc_out));

  function automatic vec_t rvec(input int lim);
    vec_t v;
    for (int k = 0; k < LANES; k++) v[k] = fx_t'(rnd(lim));
    return v;
  endfunction

  task automatic model_step();
    int nx [LANES], na [LANES], a, b, l;
    longint sum;
    a = int'(cmd.addr_a); b = int'(cmd.addr_b); l = int'(cmd.lane);
    nx = x_m; na = acc_m;
    if (en) begin
      op_seen[int'(cmd.op)]++;
      case (cmd.op)
        PE_RF_WR_BUS: for (int k = 0; k < LANES; k++) rf_m[a][k] = lane(bus_in, k);
        PE_X_SH_E:    for (int k = 0; k < LANES; k++) nx[k] = lane(xw, k);
        PE_X_SH_S:    for (int k = 0; k < LANES; k++) nx[k] = lane(xn, k);
        PE_X_SH_W:    for (int k = 0; k < LANES; k++) nx[k] = lane(xe, k);
        PE_X_SH_DIAG: for (int k = 0; k < LANES; k++) nx[k] = lane(xd, k);
        PE_X_LD_RF:   nx = rf_m[a];
        PE_X_ST_RF:   rf_m[a] = x_m;
        PE_X_LD_ACC:  nx = acc_m;
        PE_ACC_CLR:   for (int k = 0; k < LANES; k++) na[k] = 0;
        PE_ACC_LD_RF: na = rf_m[a];
        PE_ACC_ST_RF: rf_m[a] = acc_m;
        PE_MAC_X:     for (int k = 0; k < LANES; k++) na[k] = radd(acc_m[k], rmul(x_m[l], rf_m[a][k]));
        PE_MAC_RF:    for (int k = 0; k < LANES; k++) na[k] = radd(acc_m[k], rmul(rf_m[b][l], rf_m[a][k]));
        PE_DOT: begin
          sum = 0;
          for (int k = 0; k < LANES; k++) sum += longint'(x_m[k]) * rf_m[a][k];
          na[l] = radd(acc_m[l], clamp16(longint'($floor(real'(sum) / 256.0))));
        end
        PE_PS_ADD_S:  for (int k = 0; k < LANES; k++) na[k] = radd(acc_m[k], lane(as, k));
        PE_PS_ADD_W:  for (int k = 0; k < LANES; k++) na[k] = radd(acc_m[k], lane(aw, k));
        PE_PS_MOV_S:  for (int k = 0; k < LANES; k++) na[k] = lane(as, k);
        PE_ACC_ADD_X: for (int k = 0; k < LANES; k++) na[k] = radd(acc_m[k], x_m[k]);
        PE_RELU:      for (int k = 0; k < LANES; k++) na[k] = rmax(acc_m[k], 0);
        PE_MAXP_RF:   for (int k = 0; k < LANES; k++) na[k] = rmax(acc_m[k], rf_m[a][k]);
        default: ;
      endcase
    end
    x_m = nx; acc_m = na;
  endtask

  task automatic compare();
    for (int k = 0; k < LANES; k++) begin
      checks += 2;
      if (lane(x_out, k) != x_m[k])     failures++;
      if (lane(acc_out, k) != acc_m[k]) failures++;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '0; en = 0; bus_in = '0; xw = '0; xn = '0; xe = '0; xd = '0; as = '0; aw = '0;
    for (int k = 0; k < LANES; k++) begin x_m[k] = 0; acc_m[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill the RF
    for (int i = 0; i < RFW; i++) begin
      @(negedge clk);
      en = 1; cmd = '{op: PE_RF_WR_BUS, addr_a: RF_AW'(i), addr_b: '0, lane: '0};
      bus_in = rvec(3000);
      model_step();
      @(posedge clk); #1 compare();
    end
    for (int it = 0; it < 8000; it++) begin
      @(negedge clk);
      en = ($urandom_range(9) != 0);
      cmd.op     = pe_op_e'($urandom_range(20));
      cmd.addr_a = RF_AW'($urandom_range(RFW - 1));
      cmd.addr_b = RF_AW'($urandom_range(RFW - 1));
      cmd.lane   = 3'($urandom_range(7));
      bus_in = rvec(3000); xw = rvec(3000); xn = rvec(3000); xe = rvec(3000);
      xd = rvec(3000); as = rvec(3000); aw = rvec(3000);
      model_step();
      @(posedge clk); #1 compare();
    end
    for (int o = 1; o <= 20; o++) begin
      checks++;
      if (op_seen[o] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
