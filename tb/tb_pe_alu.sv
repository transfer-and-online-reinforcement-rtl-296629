// tb_pe_alu: checks the eight MAC lanes and eight comparators of the PE against
// the reference arithmetic of tb_fx_pkg, for every function, with random
// operands that include saturating ones.
module tb_pe_alu;
  import rl_pkg::*;
  import tb_fx_pkg::*;

  alu_fn_e    fn;
  logic [2:0] ln;
  vec_t       acc, x, w, addend, res;
  fx_t        scalar;
  int checks = 0, failures = 0;

  pe_alu dut (.fn(fn), .lane(ln), .acc(acc), .scalar(scalar), .x(x), .w(w),
              .addend(addend), .res(res));

  function automatic vec_t rvec(input int lim);
    vec_t v;
    for (int k = 0; k < LANES; k++) v[k] = fx_t'(rnd(lim));
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int lim, exp_v [LANES], s;
      lim    = (it % 3 == 0) ? 32767 : 2000;
      acc    = rvec(lim); x = rvec(lim); w = rvec(lim); addend = rvec(lim);
      scalar = fx_t'(rnd(lim));
      ln     = 3'($urandom_range(7));
      fn     = alu_fn_e'($urandom_range(4));
      #1;
      s = 0;
      for (int k = 0; k < LANES; k++) exp_v[k] = lane(acc, k);
      case (fn)
        ALU_MAC:  for (int k = 0; k < LANES; k++)
                    exp_v[k] = radd(lane(acc, k), rmul(int'(scalar), lane(w, k)));
        ALU_DOT: begin
          longint sum;
          sum = 0;
          for (int k = 0; k < LANES; k++) sum += longint'(lane(x, k)) * lane(w, k);
          exp_v[ln] = radd(lane(acc, ln), clamp16(longint'($floor(real'(sum) / 256.0))));
        end
        ALU_ADD:  for (int k = 0; k < LANES; k++) exp_v[k] = radd(lane(acc, k), lane(addend, k));
        ALU_RELU: for (int k = 0; k < LANES; k++) exp_v[k] = rmax(lane(acc, k), 0);
        ALU_MAX:  for (int k = 0; k < LANES; k++) exp_v[k] = rmax(lane(acc, k), lane(w, k));
        default: ;
      endcase
      for (int k = 0; k < LANES; k++) begin
        checks++;
        if (lane(res, k) != exp_v[k]) begin
          failures++;
          if (failures < 4) $display("fn=%s lane %0d got %0d exp %0d x0=%0d w0=%0d acc=%0d", fn.name(), k, lane(res, k), exp_v[k], lane(x,0), lane(w,0), lane(acc,k));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
