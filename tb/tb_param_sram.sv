// Testbench of param_sram: byte-masked writes to random addresses, then reads compared with a
// shadow copy; checks the one-cycle read latency.
module tb_param_sram;
  localparam int DEPTH = 896, LANES = 8;
  logic clk = 0, req, we;
  logic [9:0] addr;
  logic [LANES-1:0] be;
  logic [LANES*8-1:0] wdata, rdata;
  logic [LANES*8-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  param_sram #(.DEPTH(DEPTH), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    // Fill every word completely.
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 10'(i); be = '1; wdata = {$urandom, $urandom};
      shadow[i] = wdata;
    end
    // Partial writes.
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 10'($urandom % DEPTH); be = 8'($urandom); wdata = {$urandom, $urandom};
      for (int l = 0; l < LANES; l++) if (be[l]) shadow[addr][l*8 +: 8] = wdata[l*8 +: 8];
    end
    // Reads.
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      req = 1; we = 0; addr = 10'($urandom % DEPTH);
      @(posedge clk); #1;
      checks++;
      if (rdata !== shadow[addr]) begin
        failures++; $display("addr %0d: %h want %h", addr, rdata, shadow[addr]);
      end
    end
    // Data hold when not requested.
    begin
      logic [LANES*8-1:0] last;
      last = rdata;
      @(negedge clk); req = 0; addr = addr + 10'd1;
      @(posedge clk); #1; checks++;
      if (rdata !== last) begin failures++; $display("read data changed without a request"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
