// pe_ctrl: control unit of one processing element.
//
// The paper names a control unit inside every PE but does not describe it. Here
// it decodes the array-wide micro-operation (rl_pkg::pe_cmd_t) into the enables
// and multiplexer selects of the PE datapath. The operation is executed only when
// `en` is high; the PE array drives `en` from the row and column masks that carve
// the array into the segments and sets of the convolution mappings.
// Purely combinational; the whole decode table is this design's choice.
module pe_ctrl
  import rl_pkg::*;
(
  input  pe_op_e  op,
  input  logic    en,
  output pe_ctl_t ctl
);

  always_comb begin
    ctl = '{rf_we: 1'b0, rf_wsel: RFW_BUS, x_we: 1'b0, x_sel: XS_W, acc_we: 1'b0,
            acc_sel: AS_ALU, alu_fn: ALU_MAC, scalar_from_x: 1'b1, addend_sel: AD_SOUTH};
    if (en) begin
      unique case (op)
        PE_NOP:       ;
        PE_RF_WR_BUS: begin ctl.rf_we = 1'b1; ctl.rf_wsel = RFW_BUS; end
        PE_X_SH_E:    begin ctl.x_we = 1'b1;  ctl.x_sel = XS_W;    end
        PE_X_SH_S:    begin ctl.x_we = 1'b1;  ctl.x_sel = XS_N;    end
        PE_X_SH_W:    begin ctl.x_we = 1'b1;  ctl.x_sel = XS_E;    end
        PE_X_SH_DIAG: begin ctl.x_we = 1'b1;  ctl.x_sel = XS_DIAG; end
        PE_X_LD_RF:   begin ctl.x_we = 1'b1;  ctl.x_sel = XS_RF;   end
        PE_X_ST_RF:   begin ctl.rf_we = 1'b1; ctl.rf_wsel = RFW_X; end
        PE_X_LD_ACC:  begin ctl.x_we = 1'b1;  ctl.x_sel = XS_ACC;  end
        PE_ACC_CLR:   begin ctl.acc_we = 1'b1; ctl.acc_sel = AS_ZERO; end
        PE_ACC_LD_RF: begin ctl.acc_we = 1'b1; ctl.acc_sel = AS_RF;   end
        PE_ACC_ST_RF: begin ctl.rf_we = 1'b1; ctl.rf_wsel = RFW_ACC; end
        PE_MAC_X:     begin ctl.acc_we = 1'b1; ctl.alu_fn = ALU_MAC; ctl.scalar_from_x = 1'b1; end
        PE_MAC_RF:    begin ctl.acc_we = 1'b1; ctl.alu_fn = ALU_MAC; ctl.scalar_from_x = 1'b0; end
        PE_DOT:       begin ctl.acc_we = 1'b1; ctl.alu_fn = ALU_DOT; end
        PE_PS_ADD_S:  begin ctl.acc_we = 1'b1; ctl.alu_fn = ALU_ADD; ctl.addend_sel = AD_SOUTH; end
        PE_PS_ADD_W:  begin ctl.acc_we = 1'b1; ctl.alu_fn = ALU_ADD; ctl.addend_sel = AD_WEST;  end
        PE_PS_MOV_S:  begin ctl.acc_we = 1'b1; ctl.acc_sel = AS_SOUTH; end
        PE_ACC_ADD_X: begin ctl.acc_we = 1'b1; ctl.alu_fn = ALU_ADD; ctl.addend_sel = AD_X;     end
        PE_RELU:      begin ctl.acc_we = 1'b1; ctl.alu_fn = ALU_RELU; end
        PE_MAXP_RF:   begin ctl.acc_we = 1'b1; ctl.alu_fn = ALU_MAX;  end
        default:      ;
      endcase
    end
  end

endmodule
