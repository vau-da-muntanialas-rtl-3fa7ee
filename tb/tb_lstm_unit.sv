// Testbench of lstm_unit: drives complete time steps of one hidden element (four gate
// pre-activations with MACs, a reduction input, peephole and bias, LUT activations, the cell
// update c = f*c + i*g and h = o*tanh(c)), then an FCL output and state loading, and compares
// acc, c, h and y after every operation with an integer model.
module tb_lstm_unit;
  import muntaniala_pkg::*;
  import lstm_ref_pkg::*;
  logic clk = 0, rst_n = 0, sel;
  uop_e op;
  data_t w, bcast, c, h, y;
  acc_t red, acc;
  int checks = 0, failures = 0;
  int m_acc = 0, m_i = 0, m_f = 0, m_o = 0, m_g = 0, m_c = 0, m_h = 0, m_y = 0;

  lstm_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_op(input uop_e o, input int wv = 0, input int bv = 0, input int rv = 0,
                       input logic s = 1'b1);
    @(negedge clk);
    op = o; w = data_t'(wv); bcast = data_t'(bv); red = acc_t'(rv); sel = s;
    // model
    case (o)
      UOP_CLR:    m_acc = 0;
      UOP_MAC:    m_acc = add16(m_acc, wv * bv);
      UOP_PEEP:   m_acc = add16(m_acc, wv * m_c);
      UOP_BIAS:   m_acc = add16(m_acc, wv * 32);
      UOP_ADDRED: if (s) m_acc = add16(m_acc, rv);
      UOP_ACT_I:  m_i = sigm(q8(m_acc));
      UOP_ACT_F:  m_f = sigm(q8(m_acc));
      UOP_ACT_O:  m_o = sigm(q8(m_acc));
      UOP_ACT_C:  m_g = tanh_(q8(m_acc));
      UOP_ACT_Y:  m_y = sigm(q8(m_acc));
      UOP_CMUL:   m_acc = add16(0, m_f * m_c);
      UOP_CMAC:   m_acc = add16(m_acc, m_i * m_g);
      UOP_STC:    m_c = q8(m_acc);
      UOP_TANHC:  m_g = tanh_(m_c);
      UOP_HMUL:   m_acc = add16(0, m_o * m_g);
      UOP_STH:    m_h = q8(m_acc);
      UOP_LDC:    if (s) m_c = bv;
      UOP_CLRST:  begin m_c = 0; m_h = 0; end
      default: ;
    endcase
    @(posedge clk); #1;
    checks++;
    if (int'(acc) != m_acc || int'(c) != m_c || int'(h) != m_h || int'(y) != m_y) begin
      failures++;
      $display("%s: acc %0d/%0d c %0d/%0d h %0d/%0d y %0d/%0d", o.name(), acc, m_acc, c, m_c,
               h, m_h, y, m_y);
    end
  endtask

  task automatic gate(input uop_e act, input bit peep, input int n);
    do_op(UOP_CLR);
    for (int k = 0; k < n; k++) do_op(UOP_MAC, $urandom_range(0, 40) - 20, $urandom_range(0, 64) - 32);
    do_op(UOP_ADDRED, 0, 0, $urandom_range(0, 4000) - 2000, 1'b1);
    do_op(UOP_ADDRED, 0, 0, 1234, 1'b0);  // not selected: ignored
    if (peep) do_op(UOP_PEEP, $urandom_range(0, 40) - 20);
    do_op(UOP_BIAS, $urandom_range(0, 64) - 32);
    do_op(act);
  endtask

  initial begin
    op = UOP_NOP; w = 0; bcast = 0; red = 0; sel = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_op(UOP_CLRST);
    for (int t = 0; t < 40; t++) begin
      gate(UOP_ACT_I, 1, 24);
      gate(UOP_ACT_F, 1, 24);
      gate(UOP_ACT_C, 0, 24);
      do_op(UOP_CMUL); do_op(UOP_CMAC); do_op(UOP_STC);
      gate(UOP_ACT_O, 1, 24);
      do_op(UOP_TANHC); do_op(UOP_HMUL); do_op(UOP_STH);
      gate(UOP_ACT_Y, 0, 8);
      if (t % 10 == 9) begin
        do_op(UOP_LDC, 0, $urandom_range(0, 255) - 128, 0, 1'b0);
        do_op(UOP_LDC, 0, $urandom_range(0, 255) - 128, 0, 1'b1);
      end
    end
    // Saturation of the accumulator.
    do_op(UOP_CLR);
    for (int k = 0; k < 4; k++) do_op(UOP_MAC, 127, 127);
    checks++;
    if (int'(acc) != 32767) begin failures++; $display("no positive saturation: %0d", acc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
