// Testbench of act_lut: every entry of both tables against the real sigmoid and tanh, rounded
// to 8 bits with 5 fractional bits.
module tb_act_lut;
  import lstm_ref_pkg::*;
  logic [7:0] addr, ds, dt;
  int checks = 0, failures = 0;

  act_lut #(.IS_TANH(1'b0)) dut_s (.addr(addr), .data(ds));
  act_lut #(.IS_TANH(1'b1)) dut_t (.addr(addr), .data(dt));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++) begin
      addr = 8'(a);
      #1;
      checks += 2;
      if (s8(ds) != sigm(s8(addr))) begin
        failures++; $display("sigm(%0d): got %0d want %0d", s8(addr), s8(ds), sigm(s8(addr)));
      end
      if (s8(dt) != tanh_(s8(addr))) begin
        failures++; $display("tanh(%0d): got %0d want %0d", s8(addr), s8(dt), tanh_(s8(addr)));
      end
    end
    // Spot values: sigm(0) = 0.5, tanh(0) = 0, saturation ends.
    addr = 8'd0; #1; checks += 2;
    if (s8(ds) != 16) failures++;
    if (s8(dt) != 0) failures++;
    addr = 8'h7f; #1; checks += 2;
    if (s8(ds) != 31) failures++;  // sigm(3.97) = 0.981
    if (s8(dt) != 32) failures++;  // tanh(3.97) rounds to 1.0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
