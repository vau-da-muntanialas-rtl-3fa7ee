// Testbench of mac_unit: random sequences of multiply-accumulate, load and external-addend
// operations against an integer model with 16-bit saturation, including forced overflows.
module tb_mac_unit;
  import muntaniala_pkg::*;
  import lstm_ref_pkg::*;
  logic clk = 0, rst_n = 0, en, load, use_ext;
  data_t a, b;
  acc_t ext, acc;
  int model = 0, checks = 0, failures = 0, sat_hits = 0;

  mac_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; load = 0; use_ext = 0; a = 0; b = 0; ext = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      en      = ($urandom % 8) != 0;
      load    = ($urandom % 16) == 0;
      use_ext = ($urandom % 4) == 0;
      a   = data_t'($urandom);
      b   = data_t'($urandom);
      ext = acc_t'($urandom);
      if (en) begin
        int opnd, base;
        opnd  = use_ext ? int'(ext) : int'(a) * int'(b);
        base  = load ? 0 : model;
        if (base + opnd > 32767 || base + opnd < -32768) sat_hits++;
        model = add16(base, opnd);
      end
      @(posedge clk); #1;
      checks++;
      if (int'(acc) != model) begin
        failures++;
        $display("step %0d: acc %0d want %0d", n, acc, model);
      end
    end
    checks++;
    if (sat_hits == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
