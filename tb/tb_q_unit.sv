// tb_q_unit: random Q vectors; checks the chosen action (argmax, lowest index on
// ties), the Bellman target r + gamma*max Q(s',.) and the one-hot error vector,
// with results expected one clock after the operation.
module tb_q_unit;
  import rl_pkg::*;
  import tb_fx_pkg::*;

  logic clk = 0, rst_n = 0;
  q_op_e op;
  fx_t q_in [N_ACTIONS];
  fx_t reward, gamma_v, q_max, target;
  logic [2:0] action;
  vec_t err;
  logic err_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  q_unit dut (.clk(clk), .rst_n(rst_n), .op(op), .q_in(q_in), .reward(reward), .gamma(gamma_v),
    .action(action), .q_max(q_max), .target(target), .err(err), .err_valid(err_valid));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = Q_NONE; reward = '0; gamma_v = 16'sd230;   // gamma = 0.9
    for (int a = 0; a < N_ACTIONS; a++) q_in[a] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      int qs [N_ACTIONS], qn [N_ACTIONS], ea, best, bn, t, r;
      // select
      @(negedge clk);
      for (int a = 0; a < N_ACTIONS; a++) begin
        qs[a] = (it % 4 == 0) ? rnd(3) : rnd(4000);     // small range forces ties
        q_in[a] = fx_t'(qs[a]);
      end
      op = Q_SELECT;
      ea = 0; best = qs[0];
      for (int a = 1; a < N_ACTIONS; a++) if (qs[a] > best) begin best = qs[a]; ea = a; end
      @(negedge clk);
      op = Q_NONE;
      chk(int'(action) == ea, "action");
      chk(int'(q_max) == best, "q_max");
      // target with next state's Q values
      for (int a = 0; a < N_ACTIONS; a++) begin qn[a] = rnd(4000); q_in[a] = fx_t'(qn[a]); end
      r = rnd(2000); reward = fx_t'(r);
      op = Q_TARGET;
      bn = qn[0];
      for (int a = 1; a < N_ACTIONS; a++) bn = rmax(bn, qn[a]);
      t = radd(r, rmul(230, bn));
      @(negedge clk);
      op = Q_NONE;
      chk(err_valid === 1'b1, "err_valid");
      chk(int'(target) == t, "target");
      for (int k = 0; k < LANES; k++)
        chk(lane(err, k) == ((k == ea) ? radd(qs[ea], -t) : 0), "err lane");
      @(negedge clk);
      chk(err_valid === 1'b0, "err_valid pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
