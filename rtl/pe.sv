// pe: one processing element of the systolic array.
//
// Contents follow the paper's PE: a register file (pe_rf, 4.5 KB), 8 MACs and 8
// comparators (pe_alu) and a control unit (pe_ctrl). Two 128-bit registers hold
// the PE's state:
//   X   - the vector register that moves through the array: east along a row
//         (FC forward, Fig. 7a), down a column (FC backpropagation, Fig. 8a),
//         west (moving set-2 results to set 1 in the Type III mapping) or to the
//         upper-right neighbour (diagonal reuse of image rows in convolution).
//   ACC - the eight pSUM accumulators; they are added vertically (Fig. 7b) or
//         row-wise (Fig. 8b) and are what the array edges hand to the buffer.
// Neighbour inputs are the neighbours' registered X and ACC, so every transfer is
// one hop per clock. The PE executes `cmd` on a rising edge when `en` is high.
// There is no handshake: the array controller owns the schedule.
// Reset clears X and ACC; the RF is not reset.
module pe
  import rl_pkg::*;
#(
  parameter int RF_WORDS = 288
) (
  input  logic    clk,
  input  logic    rst_n,
  input  pe_cmd_t cmd,
  input  logic    en,
  input  vec_t    bus_in,     // broadcast word from the global buffer
  input  vec_t    x_west,     // X of west neighbour (or array west edge)
  input  vec_t    x_north,    // X of north neighbour (or array north edge)
  input  vec_t    x_east,     // X of east neighbour
  input  vec_t    x_diag,     // X of lower-left neighbour
  input  vec_t    acc_south,  // ACC of south neighbour
  input  vec_t    acc_west,   // ACC of west neighbour
  output vec_t    x_out,
  output vec_t    acc_out
);

  pe_ctl_t ctl;
  vec_t    x_q, acc_q, rf_a, rf_b, alu_res, rf_wdata, addend;
  fx_t     scalar;

  pe_ctrl u_ctrl (.op(cmd.op), .en(en), .ctl(ctl));

  always_comb begin
    unique case (ctl.rf_wsel)
      RFW_BUS: rf_wdata = bus_in;
      RFW_X:   rf_wdata = x_q;
      default: rf_wdata = acc_q;
    endcase
  end

  pe_rf #(.WORDS(RF_WORDS)) u_rf (
    .clk(clk), .we(ctl.rf_we), .waddr(cmd.addr_a), .wdata(rf_wdata),
    .raddr_a(cmd.addr_a), .rdata_a(rf_a),
    .raddr_b(cmd.addr_b), .rdata_b(rf_b)
  );

  assign scalar = ctl.scalar_from_x ? fx_t'(x_q[cmd.lane]) : fx_t'(rf_b[cmd.lane]);

  always_comb begin
    unique case (ctl.addend_sel)
      AD_SOUTH: addend = acc_south;
      AD_WEST:  addend = acc_west;
      default:  addend = x_q;
    endcase
  end

  pe_alu u_alu (
    .fn(ctl.alu_fn), .lane(cmd.lane), .acc(acc_q), .scalar(scalar),
    .x(x_q), .w(rf_a), .addend(addend), .res(alu_res)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q   <= '0;
      acc_q <= '0;
    end else begin
      if (ctl.x_we) begin
        unique case (ctl.x_sel)
          XS_W:    x_q <= x_west;
          XS_N:    x_q <= x_north;
          XS_E:    x_q <= x_east;
          XS_DIAG: x_q <= x_diag;
          XS_RF:   x_q <= rf_a;
          default: x_q <= acc_q;
        endcase
      end
      if (ctl.acc_we) begin
        unique case (ctl.acc_sel)
          AS_ALU:   acc_q <= alu_res;
          AS_ZERO:  acc_q <= '0;
          AS_RF:    acc_q <= rf_a;
          default:  acc_q <= acc_south;
        endcase
      end
    end
  end

  assign x_out   = x_q;
  assign acc_out = acc_q;

endmodule
