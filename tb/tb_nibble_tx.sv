// Testbench of nibble_tx: random 8- and 16-bit words sent to either the die-side or the
// external ready, with random back-pressure on both; a receiver model rebuilds the words and
// checks them, and checks that the unselected ready never completes a transfer.
module tb_nibble_tx;
  logic clk = 0, rst_n = 0;
  logic [15:0] word;
  logic is16, use_ext, load, load_ready;
  logic [3:0] nib;
  logic nib_valid, nib_ext, ready_die, ready_ext;
  int checks = 0, failures = 0, stalls = 0;
  typedef struct { logic [15:0] w; logic wide; logic ext; } item_t;
  item_t q[$];
  logic [15:0] acc;
  int cnt = 0;

  nibble_tx dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    ready_die = ($urandom % 3) != 0;
    ready_ext = ($urandom % 3) != 0;
  end

  // Receiver model
  always @(posedge clk) if (rst_n && nib_valid) begin
    if (q.size() == 0) begin failures++; $display("valid without a word"); end
    else if (nib_ext !== q[0].ext) begin failures++; $display("nib_ext wrong"); end
    else if ((q[0].ext ? ready_ext : ready_die)) begin
      acc[cnt*4 +: 4] = nib;
      cnt++;
      if (cnt == (q[0].wide ? 4 : 2)) begin
        checks++;
        if ((q[0].wide ? acc : {8'b0, acc[7:0]}) !== (q[0].wide ? q[0].w : {8'b0, q[0].w[7:0]})) begin
          failures++; $display("word %h want %h", acc, q[0].w);
        end
        void'(q.pop_front());
        cnt = 0; acc = 0;
      end
    end else stalls++;
  end

  initial begin
    word = 0; is16 = 0; use_ext = 0; load = 0; acc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      word = 16'($urandom); is16 = $urandom % 2; use_ext = $urandom % 2; load = 1;
      @(posedge clk);
      while (!load_ready) @(posedge clk);
      q.push_back('{word, is16, use_ext});
      @(negedge clk); load = 0;
      if ($urandom % 4 == 0) @(negedge clk);
    end
    wait (q.size() == 0);
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never seen"); end
    $display("back-pressure cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
