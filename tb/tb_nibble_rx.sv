// Testbench of nibble_rx: random 8-bit and 16-bit words sent as nibbles with random valid gaps
// and random consumer back-pressure; checks every word, that nothing is taken while en is low,
// and that a steady stream runs at one nibble per cycle.
module tb_nibble_rx;
  logic clk = 0, rst_n = 0;
  logic en8, en16;
  logic [3:0] nib;
  logic v8, v16, r8, r16;
  logic [7:0] w8;
  logic [15:0] w16;
  logic wv8, wv16, wr8, wr16;
  int checks = 0, failures = 0;
  logic [15:0] q8[$], q16[$];

  nibble_rx #(.NNIB(2)) dut8  (.clk, .rst_n, .en(en8),  .nib(nib), .nib_valid(v8),
    .nib_ready(r8), .word(w8), .word_valid(wv8), .word_ready(wr8));
  nibble_rx #(.NNIB(4)) dut16 (.clk, .rst_n, .en(en16), .nib(nib), .nib_valid(v16),
    .nib_ready(r16), .word(w16), .word_valid(wv16), .word_ready(wr16));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Consumers
  always @(posedge clk) if (rst_n) begin
    if (wv8 && wr8) begin
      checks++;
      if (w8 !== q8[0][7:0]) begin failures++; $display("8-bit word %h want %h", w8, q8[0]); end
      void'(q8.pop_front());
    end
    if (wv16 && wr16) begin
      checks++;
      if (w16 !== q16[0]) begin failures++; $display("16-bit word %h want %h", w16, q16[0]); end
      void'(q16.pop_front());
    end
  end
  always @(negedge clk) begin wr8 = ($urandom % 3) != 0; wr16 = ($urandom % 3) != 0; end

  task automatic send(input logic wide, input logic [15:0] w, input bit gaps);
    int n = wide ? 4 : 2;
    if (wide) q16.push_back(w); else q8.push_back(w);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      while (gaps && ($urandom % 3) == 0) begin v8 = 0; v16 = 0; @(negedge clk); end
      nib = w[i*4 +: 4];
      if (wide) v16 = 1; else v8 = 1;
      @(posedge clk);
      while (!(wide ? r16 : r8)) @(posedge clk);
    end
    @(negedge clk); v8 = 0; v16 = 0;
  endtask

  initial begin
    int t0, t1;
    en8 = 1; en16 = 1; nib = 0; v8 = 0; v16 = 0; wr8 = 1; wr16 = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) send(1'b0, 16'($urandom), 1'b1);
    for (int n = 0; n < 300; n++) send(1'b1, 16'($urandom), 1'b1);
    // Disabled receiver takes nothing.
    @(negedge clk); en8 = 0; v8 = 1; nib = 4'ha;
    repeat (5) begin @(posedge clk); #1; checks++; if (r8) failures++; end
    @(negedge clk); v8 = 0; en8 = 1;
    // Throughput: 16-bit words back to back with an always-ready consumer.
    repeat (4) @(posedge clk);
    force wr16 = 1'b1;
    t0 = $time;
    for (int n = 0; n < 50; n++) begin
      logic [15:0] w = 16'($urandom);
      q16.push_back(w);
      for (int i = 0; i < 4; i++) begin
        @(negedge clk); nib = w[i*4 +: 4]; v16 = 1;
        @(posedge clk); checks++; if (!r16) failures++;
      end
    end
    @(negedge clk); v16 = 0;
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > 201) begin failures++; $display("stream too slow: %0d cycles", (t1 - t0) / 10); end
    repeat (5) @(posedge clk);
    checks++;
    if (q8.size() != 0 || q16.size() != 0) begin failures++; $display("words lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
