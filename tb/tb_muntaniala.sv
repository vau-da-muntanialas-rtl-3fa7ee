// Testbench of one Muntaniala die used on its own (a 1x1 grid: master, no left neighbour, own
// hidden state fed back). An external-controller model streams configuration, the parameter
// image and input features over p; results come back over o with random back-pressure on the
// external ready. Everything is compared with an integer LSTM model.
//
// Part A: 96 inputs, 96 hidden units, two time steps; after each, CMD_STORE_ST reads c and h.
//         The RUN cycle count is checked against the 1x1 figure of 101.2 us at 10 MHz.
// Part B: 100 inputs, 80 active units, 40 FCL outputs, state loaded with CMD_LOAD_ST, h and y
//         written out directly after the step, random gaps on the p stream.
module tb_muntaniala;
  import muntaniala_pkg::*;
  import lstm_ref_pkg::*;

  localparam int NH = 96, DEPTH = 896;
  logic clk = 0, rst_n = 0;
  cmd_e cmd;
  logic [3:0] p_data, o_data;
  logic p_valid, p_ready, o_valid, o_ready_ext, busy;
  int checks = 0, failures = 0;
  bit gaps = 0, bp = 0;
  int stalls = 0;

  muntaniala dut (
    .clk, .rst_n, .cmd, .p_data, .p_valid, .p_ready,
    .r_data(4'h0), .r_valid(1'b0), .r_ready(),
    .h_data(4'h0), .h_valid(1'b0), .h_ready(),
    .o_data, .o_valid, .o_ext(), .o_ready_die(1'b0), .o_ready_ext, .busy
  );

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model state
  int nx, nh_in, nh_act, no;
  int wx [4][NH][128];
  int wh [4][NH][NH];
  int pp [4][NH];
  int bb [4][NH];
  int wy [NH][NH];
  int by [NH];
  int x [128];
  int hprev [NH];
  int c [NH];
  int hnew [NH];
  int y [NH];

  function automatic void model_step();
    int g [4][NH];
    int acc;
    for (int q = 0; q < 4; q++) begin
      for (int u = 0; u < nh_act; u++) begin
        acc = 0;
        for (int k = 0; k < nx; k++) acc = add16(acc, wx[q][u][k] * x[k]);
        for (int k = 0; k < nh_in; k++) acc = add16(acc, wh[q][u][k] * hprev[k]);
        if (q == 3) begin
          // gate o uses the updated cell state
          int ci, cf;
          ci = add16(0, g[1][u] * c[u]);
          ci = add16(ci, g[0][u] * g[2][u]);
          c[u] = q8(ci);
        end
        if (q != 2) acc = add16(acc, pp[q][u] * c[u]);
        acc = add16(acc, bb[q][u] * 32);
        g[q][u] = (q == 2) ? tanh_(q8(acc)) : sigm(q8(acc));
      end
    end
    for (int u = 0; u < nh_act; u++) hnew[u] = q8(add16(0, g[3][u] * tanh_(c[u])));
    for (int u = 0; u < nh_act; u++) hprev[u] = hnew[u];
    for (int o = 0; o < no; o++) begin
      acc = 0;
      for (int k = 0; k < nh_in; k++) acc = add16(acc, wy[o][k] * hprev[k]);
      acc = add16(acc, by[o] * 32);
      y[o] = sigm(q8(acc));
    end
  endfunction

  // ---------------------------------------------------------------- stream helpers
  task automatic send_byte(input int b);
    for (int i = 0; i < 2; i++) begin
      @(negedge clk);
      while (gaps && ($urandom % 4) == 0) begin p_valid = 0; @(negedge clk); end
      p_data = 4'(b >> (4 * i)); p_valid = 1;
      @(posedge clk);
      while (!p_ready) @(posedge clk);
    end
  endtask
  // End of a burst: valid stays high between bytes of a burst and drops here.
  task automatic p_stop();
    @(negedge clk); p_valid = 0;
  endtask

  int rx_q [$];
  logic [7:0] rx_acc;
  int rx_n = 0;
  always @(negedge clk) o_ready_ext = bp ? (($urandom % 3) != 0) : 1'b1;
  always @(posedge clk) if (rst_n && o_valid) begin
    if (o_ready_ext) begin
      rx_acc[rx_n*4 +: 4] = o_data;
      rx_n++;
      if (rx_n == 2) begin rx_q.push_back(s8(rx_acc)); rx_n = 0; end
    end else stalls++;
  end

  task automatic command(input cmd_e c_);
    @(negedge clk); cmd = c_;
    @(negedge clk); @(negedge clk);
  endtask
  task automatic finish_cmd();
    while (busy) @(negedge clk);
    cmd = CMD_NOP;
    @(negedge clk); @(negedge clk);
  endtask

  task automatic configure(input int nx_, input int nha, input int no_, input logic out_ext);
    int nwords;
    nx = nx_; nh_act = nha; nh_in = nha; no = no_;
    nwords = 4 * (nx + nh_in) + 7 + ((no != 0) ? nh_in + 1 : 0);
    command(CMD_LOAD_CFG);
    send_byte(nx); send_byte(nh_in); send_byte(nh_act); send_byte(no);
    send_byte({out_ext, 1'b1, 1'b0, 1'b0, 1'b0, 1'b1});  // out_ext, self_h, master
    send_byte(nwords & 255); send_byte(nwords >> 8);
    p_stop();
    finish_cmd();
  endtask

  function automatic int rw(); return $urandom_range(0, 24) - 12; endfunction
  function automatic int rv(); return $urandom_range(0, 64) - 32; endfunction

  task automatic load_params();
    int img [$];
    for (int q = 0; q < 4; q++) begin
      for (int k = 0; k < nx; k++) for (int u = 0; u < NH; u++) begin wx[q][u][k] = rw(); img.push_back(wx[q][u][k]); end
      for (int k = 0; k < nh_in; k++) for (int u = 0; u < NH; u++) begin wh[q][u][k] = rw(); img.push_back(wh[q][u][k]); end
      if (q != 2) for (int u = 0; u < NH; u++) begin pp[q][u] = rw(); img.push_back(pp[q][u]); end
      for (int u = 0; u < NH; u++) begin bb[q][u] = rw(); img.push_back(bb[q][u]); end
    end
    if (no != 0) begin
      for (int k = 0; k < nh_in; k++) for (int u = 0; u < NH; u++) begin wy[u][k] = rw(); img.push_back(wy[u][k]); end
      for (int u = 0; u < NH; u++) begin by[u] = rw(); img.push_back(by[u]); end
    end
    command(CMD_LOAD_PARAM);
    foreach (img[i]) send_byte(img[i]);
    p_stop();
    finish_cmd();
  endtask

  task automatic check_q(input string what, input int exp_[], input int n);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (rx_q.size() == 0) begin failures++; $display("%s[%0d] missing", what, i); end
      else begin
        int v = rx_q.pop_front();
        if (v != exp_[i]) begin
          failures++;
          if (failures < 20) $display("%s[%0d]: got %0d want %0d", what, i, v, exp_[i]);
        end
      end
    end
  endtask

  task automatic store_and_check();
    int cv [], hv [];
    cv = new[NH]; hv = new[NH];
    foreach (cv[i]) begin cv[i] = c[i]; hv[i] = hprev[i]; end
    command(CMD_STORE_ST);
    finish_cmd();
    repeat (4) @(negedge clk);
    check_q("c", cv, nh_act);
    check_q("h", hv, nh_act);
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    int t0, cyc;
    cmd = CMD_NOP; p_data = 0; p_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- Part A
    configure(96, 96, 0, 1'b0);
    load_params();
    command(CMD_CLEAR_ST); finish_cmd();
    for (int u = 0; u < NH; u++) begin c[u] = 0; hprev[u] = 0; end
    for (int t = 0; t < 2; t++) begin
      for (int k = 0; k < nx; k++) x[k] = rv();
      @(negedge clk); cmd = CMD_RUN; t0 = $time;
      @(negedge clk);
      for (int k = 0; k < nx; k++) send_byte(x[k]);
      p_stop();
      while (busy) @(negedge clk);
      cyc = ($time - t0) / 10;
      cmd = CMD_NOP; @(negedge clk); @(negedge clk);
      $display("RUN 96x96: %0d cycles", cyc);
      checks++;
      if (cyc < 961 || cyc > 1063) begin failures++; $display("cycle count off the 1012-cycle figure by >5%%"); end
      model_step();
      store_and_check();
    end

    // ---- Part B
    gaps = 1; bp = 1;
    configure(100, 80, 40, 1'b1);
    load_params();
    command(CMD_LOAD_ST);
    for (int u = 0; u < nh_act; u++) begin c[u] = rv(); send_byte(c[u]); end
    for (int u = 0; u < nh_in; u++) begin hprev[u] = rv(); send_byte(hprev[u]); end
    p_stop();
    finish_cmd();
    for (int k = 0; k < nx; k++) x[k] = rv();
    command(CMD_RUN);
    for (int k = 0; k < nx; k++) send_byte(x[k]);
    p_stop();
    finish_cmd();
    repeat (4) @(negedge clk);
    begin
      int hv [], yv [];
      model_step();
      hv = new[NH]; yv = new[NH];
      foreach (hv[i]) begin hv[i] = hnew[i]; yv[i] = y[i]; end
      check_q("h_out", hv, nh_act);
      check_q("y", yv, no);
    end
    store_and_check();
    checks++;
    if (rx_q.size() != 0) begin failures++; $display("%0d extra output words", rx_q.size()); end
    checks++;
    if (stalls == 0) begin failures++; $display("no output back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
