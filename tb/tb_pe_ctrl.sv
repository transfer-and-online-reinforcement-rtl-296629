// tb_pe_ctrl: checks the decode of every PE micro-operation, enabled and
// disabled, against a table of the expected write enables and selects.
module tb_pe_ctrl;
  import rl_pkg::*;

  pe_op_e  op;
  logic    en;
  pe_ctl_t ctl;
  int checks = 0, failures = 0;

  pe_ctrl dut (.op(op), .en(en), .ctl(ctl));

  task automatic expect_ctl(input bit rfwe, input bit xwe, input bit accwe);
    checks++;
    if (ctl.rf_we !== rfwe || ctl.x_we !== xwe || ctl.acc_we !== accwe) begin
      failures++;
      $display("op %s: rf_we %b x_we %b acc_we %b", op.name(), ctl.rf_we, ctl.x_we, ctl.acc_we);
    end
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("op %s: %s", op.name(), what); end
  endtask

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i <= 20; i++) begin
      op = pe_op_e'(i);
      en = 1'b0; #1;
      expect_ctl(0, 0, 0);
      en = 1'b1; #1;
      case (op)
        PE_NOP:       expect_ctl(0, 0, 0);
        PE_RF_WR_BUS: begin expect_ctl(1, 0, 0); chk(ctl.rf_wsel == RFW_BUS, "wsel"); end
        PE_X_SH_E:    begin expect_ctl(0, 1, 0); chk(ctl.x_sel == XS_W, "xsel"); end
        PE_X_SH_S:    begin expect_ctl(0, 1, 0); chk(ctl.x_sel == XS_N, "xsel"); end
        PE_X_SH_W:    begin expect_ctl(0, 1, 0); chk(ctl.x_sel == XS_E, "xsel"); end
        PE_X_SH_DIAG: begin expect_ctl(0, 1, 0); chk(ctl.x_sel == XS_DIAG, "xsel"); end
        PE_X_LD_RF:   begin expect_ctl(0, 1, 0); chk(ctl.x_sel == XS_RF, "xsel"); end
        PE_X_ST_RF:   begin expect_ctl(1, 0, 0); chk(ctl.rf_wsel == RFW_X, "wsel"); end
        PE_X_LD_ACC:  begin expect_ctl(0, 1, 0); chk(ctl.x_sel == XS_ACC, "xsel"); end
        PE_ACC_CLR:   begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_ZERO, "asel"); end
        PE_ACC_LD_RF: begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_RF, "asel"); end
        PE_ACC_ST_RF: begin expect_ctl(1, 0, 0); chk(ctl.rf_wsel == RFW_ACC, "wsel"); end
        PE_MAC_X:     begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_ALU && ctl.alu_fn == ALU_MAC && ctl.scalar_from_x, "mac_x"); end
        PE_MAC_RF:    begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_ALU && ctl.alu_fn == ALU_MAC && !ctl.scalar_from_x, "mac_rf"); end
        PE_DOT:       begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_ALU && ctl.alu_fn == ALU_DOT, "dot"); end
        PE_PS_ADD_S:  begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_ALU && ctl.alu_fn == ALU_ADD && ctl.addend_sel == AD_SOUTH, "add_s"); end
        PE_PS_ADD_W:  begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_ALU && ctl.alu_fn == ALU_ADD && ctl.addend_sel == AD_WEST, "add_w"); end
        PE_PS_MOV_S:  begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_SOUTH, "mov_s"); end
        PE_ACC_ADD_X: begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_ALU && ctl.alu_fn == ALU_ADD && ctl.addend_sel == AD_X, "add_x"); end
        PE_RELU:      begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_ALU && ctl.alu_fn == ALU_RELU, "relu"); end
        PE_MAXP_RF:   begin expect_ctl(0, 0, 1); chk(ctl.acc_sel == AS_ALU && ctl.alu_fn == ALU_MAX, "maxp"); end
        default: ;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
