// End-to-end testbench of the 2x2 Vau da Muntanialas grid at its default size (four dies of
// 96 LSTM units: one layer of 192 hidden elements). The testbench plays the external
// controller: it streams configuration, parameter images and input-feature tiles to every die
// over its own p interface (in parallel) and collects the masters' results from out[0..N-1].
// All results are compared with an integer model of the whole layer that follows the same
// order of saturating additions as the grid (own partial sum, then the left neighbour's).
//
// Phase T: 96 inputs per column, no FCL: one step; the RUN cycle count is checked against the
//          2x2 figure of 295.2 us at 10 MHz; CMD_STORE_ST reads c and h of the masters.
// Phase W: the demonstrator workload shape 1L-192NH-123NI (inputs split 62/61 over the two
//          columns) with a 62-output FCL (31 per row), three time steps, external back-pressure
//          and gaps on the p streams, then CMD_LOAD_ST of a fresh state and one more step. Each
//          step is checked against the 330 us (3300 cycles at 10 MHz) measured on the board for
//          this network with its output layer; the 10 % margin covers the random back-pressure.
//          Weights and inputs are random: the trained network's values are not available.
// Counted mechanisms (each must occur): reduction transfers, slave stalls on the reduction
// link, hidden-state distribution transfers, local hidden-state feedback, FCL outputs,
// external output back-pressure, state store, state load.
module tb_vau_da_muntanialas;
  import muntaniala_pkg::*;
  import lstm_ref_pkg::*;

  localparam int N = 2, NH = 96, R = N * NH;
  logic clk = 0, rst_n = 0;
  cmd_e cmd;
  logic [3:0] p_data  [N][N];
  logic       p_valid [N][N];
  logic       p_ready [N][N];
  logic [3:0] out_data  [N];
  logic       out_valid [N];
  logic       out_ready [N];
  logic       busy [N][N];
  int checks = 0, failures = 0;
  bit gaps = 0, bp = 0;

  vau_da_muntanialas dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- mechanism counters
  int n_red = 0, n_slave_stall = 0, n_hdist = 0, n_self = 0, n_ext_stall = 0, n_store = 0,
      n_load = 0, n_fcl = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      if (dut.r_valid[i][j] && dut.r_ready[i][j]) n_red++;
      if (dut.h_valid[i][j] && dut.h_ready[i][j]) n_hdist++;
      if (j < N - 1 && dut.o_valid[i][j] && !dut.o_rdy_die[i][j]) n_slave_stall++;
    end
    if (dut.g_row[N-1].g_col[N-1].u_die.hbuf_copy) n_self++;
    for (int i = 0; i < N; i++) if (out_valid[i] && !out_ready[i]) n_ext_stall++;
  end

  // ---------------------------------------------------------------- layer model
  int nxt, no_loc;           // total inputs, FCL outputs per row
  int nxj [N];
  int xo  [N];
  int wx [4][R][256];
  int wh [4][R][R];
  int pp [4][R];
  int bb [4][R];
  int wy [R][R];
  int by [R];
  int x [256];
  int h [R];
  int c [R];
  int y [R];

  function automatic int chain(input int q, input int r, input bit fcl);
    int acc = 0, p;
    for (int j = 0; j < N; j++) begin
      p = 0;
      if (!fcl) for (int k = 0; k < nxj[j]; k++) p = add16(p, wx[q][r][xo[j] + k] * x[xo[j] + k]);
      for (int k = 0; k < NH; k++)
        p = add16(p, (fcl ? wy[r][j*NH + k] : wh[q][r][j*NH + k]) * h[j*NH + k]);
      acc = (j == 0) ? p : add16(p, acc);
    end
    return acc;
  endfunction

  function automatic void model_step();
    int g [4][R];
    int acc, hn [R];
    for (int q = 0; q < 4; q++)
      for (int r = 0; r < R; r++) begin
        acc = chain(q, r, 1'b0);
        if (q == 3) c[r] = q8(add16(add16(0, g[1][r] * c[r]), g[0][r] * g[2][r]));
        if (q != 2) acc = add16(acc, pp[q][r] * c[r]);
        acc = add16(acc, bb[q][r] * 32);
        g[q][r] = (q == 2) ? tanh_(q8(acc)) : sigm(q8(acc));
      end
    for (int r = 0; r < R; r++) hn[r] = q8(add16(0, g[3][r] * tanh_(c[r])));
    h = hn;
    for (int i = 0; i < N; i++)
      for (int v = 0; v < no_loc; v++) begin
        int o = i * NH + v;
        acc = add16(chain(0, o, 1'b1), by[o] * 32);
        y[o] = sigm(q8(acc));
      end
  endfunction

  // ---------------------------------------------------------------- per-die streams
  int sq [N][N][$];   // bytes queued for each die's p stream

  task automatic send_stream(input int i, input int j);
    for (int n = 0; n < sq[i][j].size(); n++) begin
      for (int s = 0; s < 2; s++) begin
        @(negedge clk);
        while (gaps && ($urandom % 5) == 0) begin p_valid[i][j] = 0; @(negedge clk); end
        p_data[i][j] = 4'(sq[i][j][n] >> (4 * s)); p_valid[i][j] = 1;
        @(posedge clk);
        while (!p_ready[i][j]) @(posedge clk);
      end
    end
    @(negedge clk); p_valid[i][j] = 0;
  endtask

  // One driver process per die; send_all starts them together and waits for all of them.
  bit go [N][N];
  for (genvar gi = 0; gi < N; gi++) begin : g_drv_r
    for (genvar gj = 0; gj < N; gj++) begin : g_drv_c
      initial forever begin
        wait (go[gi][gj]);
        send_stream(gi, gj);
        sq[gi][gj].delete();
        go[gi][gj] = 0;
      end
    end
  end

  task automatic send_all();
    bit any;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) go[i][j] = 1;
    do begin
      @(negedge clk);
      any = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) any |= go[i][j];
    end while (any);
  endtask

  task automatic command(input cmd_e c_);
    @(negedge clk); cmd = c_;
    @(negedge clk); @(negedge clk);
  endtask
  task automatic finish_cmd();
    bit any;
    do begin
      any = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) any |= busy[i][j];
      if (any) @(negedge clk);
    end while (any);
    cmd = CMD_NOP;
    @(negedge clk); @(negedge clk);
  endtask

  // Output collection from the masters
  int oq [N][$];
  logic [7:0] oacc [N];
  int on [N];
  always @(negedge clk) for (int i = 0; i < N; i++) out_ready[i] = bp ? (($urandom % 3) != 0) : 1'b1;
  always @(posedge clk) if (rst_n) for (int i = 0; i < N; i++) if (out_valid[i] && out_ready[i]) begin
    oacc[i][on[i]*4 +: 4] = out_data[i];
    on[i]++;
    if (on[i] == 2) begin oq[i].push_back(s8(oacc[i])); on[i] = 0; end
  end

  task automatic expect_rows(input string what, input int v [R], input int n);
    for (int i = 0; i < N; i++)
      for (int u = 0; u < n; u++) begin
        checks++;
        if (oq[i].size() == 0) begin failures++; $display("%s row %0d: missing", what, i*NH+u); end
        else begin
          int got = oq[i].pop_front();
          if (got != v[i*NH + u]) begin
            failures++;
            if (failures < 2000) $display("%s[%0d]: got %0d want %0d", what, i*NH+u, got, v[i*NH+u]);
          end
        end
      end
  endtask

  // ---------------------------------------------------------------- set-up helpers
  function automatic int rw(); return $urandom_range(0, 20) - 10; endfunction
  function automatic int rv(); return $urandom_range(0, 64) - 32; endfunction

  task automatic configure_and_load(input int nx_total, input int no_, input logic out_ext);
    nxt = nx_total; no_loc = no_;
    for (int j = 0; j < N; j++) begin
      nxj[j] = nxt / N + ((j < nxt % N) ? 1 : 0);
      xo[j]  = (j == 0) ? 0 : xo[j-1] + nxj[j-1];
    end
    for (int q = 0; q < 4; q++) for (int r = 0; r < R; r++) begin
      for (int k = 0; k < nxt; k++) wx[q][r][k] = rw();
      for (int k = 0; k < R; k++)   wh[q][r][k] = rw();
      pp[q][r] = rw(); bb[q][r] = rw();
    end
    for (int r = 0; r < R; r++) begin
      for (int k = 0; k < R; k++) wy[r][k] = rw();
      by[r] = rw();
    end
    // configuration bytes
    command(CMD_LOAD_CFG);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      bit m = (j == N - 1), self = (i == N - 1 && j == N - 1);
      int nw = 4 * (nxj[j] + NH) + (m ? 7 : 0) + ((no_loc != 0) ? NH + (m ? 1 : 0) : 0);
      sq[i][j].push_back(nxj[j]); sq[i][j].push_back(NH); sq[i][j].push_back(NH);
      sq[i][j].push_back(no_loc);
      sq[i][j].push_back({26'b0, m & out_ext, self, m & (N > 1), !self, j > 0, m});
      sq[i][j].push_back(nw & 255); sq[i][j].push_back(nw >> 8);
    end
    send_all();
    finish_cmd();
    // parameter images, in the order the dies consume them
    command(CMD_LOAD_PARAM);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      bit m = (j == N - 1);
      for (int q = 0; q < 4; q++) begin
        for (int k = 0; k < nxj[j]; k++) for (int u = 0; u < NH; u++) sq[i][j].push_back(wx[q][i*NH+u][xo[j]+k]);
        for (int k = 0; k < NH; k++)     for (int u = 0; u < NH; u++) sq[i][j].push_back(wh[q][i*NH+u][j*NH+k]);
        if (m && q != 2) for (int u = 0; u < NH; u++) sq[i][j].push_back(pp[q][i*NH+u]);
        if (m)           for (int u = 0; u < NH; u++) sq[i][j].push_back(bb[q][i*NH+u]);
      end
      if (no_loc != 0) begin
        for (int k = 0; k < NH; k++) for (int u = 0; u < NH; u++)
          sq[i][j].push_back((u < no_loc) ? wy[i*NH+u][j*NH+k] : 0);
        if (m) for (int u = 0; u < NH; u++) sq[i][j].push_back((u < no_loc) ? by[i*NH+u] : 0);
      end
    end
    send_all();
    finish_cmd();
  endtask

  task automatic run_step(output int cycles);
    int t0;
    for (int k = 0; k < nxt; k++) x[k] = rv();
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      for (int k = 0; k < nxj[j]; k++) sq[i][j].push_back(x[xo[j] + k]);
    t0 = $time;
    command(CMD_RUN);
    send_all();
    finish_cmd();
    cycles = ($time - t0) / 10 - 4;
    model_step();
  endtask

  task automatic store_and_check();
    command(CMD_STORE_ST);
    finish_cmd();
    repeat (4) @(negedge clk);
    n_store++;
    expect_rows("c", c, NH);
    expect_rows("h", h, NH);
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    int cyc;
    cmd = CMD_NOP;
    for (int i = 0; i < N; i++) begin
      out_ready[i] = 1; on[i] = 0;
      for (int j = 0; j < N; j++) begin p_data[i][j] = 0; p_valid[i][j] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- Phase T
    configure_and_load(R, 0, 1'b0);
    command(CMD_CLEAR_ST); finish_cmd();
    for (int r = 0; r < R; r++) begin c[r] = 0; h[r] = 0; end
    run_step(cyc);
    $display("RUN 2x2, 192 inputs: %0d cycles", cyc);
    checks++;
    if (cyc < 2804 || cyc > 3100) begin failures++; $display("cycle count off the 2952-cycle figure by >5%%"); end
    store_and_check();

    // ---- Phase W
    gaps = 1; bp = 1;
    configure_and_load(123, 31, 1'b1);
    command(CMD_CLEAR_ST); finish_cmd();
    for (int r = 0; r < R; r++) begin c[r] = 0; h[r] = 0; end
    for (int t = 0; t < 3; t++) begin
      run_step(cyc);
      $display("RUN 1L-192NH-123NI + FCL, step %0d: %0d cycles", t, cyc);
      checks++;
      if (cyc < 2970 || cyc > 3630) begin failures++; $display("cycle count off the 330 us figure by >10%%"); end
      repeat (4) @(negedge clk);
      expect_rows("h_out", h, NH);
      expect_rows("y", y, no_loc);
      n_fcl += N * no_loc;
    end
    store_and_check();
    // Fresh state loaded into every die: c to each die's units, h tile j to column j.
    command(CMD_LOAD_ST);
    for (int r = 0; r < R; r++) begin c[r] = rv(); h[r] = rv(); end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      for (int u = 0; u < NH; u++) sq[i][j].push_back((j == N - 1) ? c[i*NH+u] : 0);
      for (int u = 0; u < NH; u++) sq[i][j].push_back(h[j*NH+u]);
    end
    send_all();
    finish_cmd();
    n_load++;
    run_step(cyc);
    repeat (4) @(negedge clk);
    expect_rows("h_out", h, NH);
    expect_rows("y", y, no_loc);

    for (int i = 0; i < N; i++) begin
      checks++;
      if (oq[i].size() != 0) begin failures++; $display("row %0d: %0d extra outputs", i, oq[i].size()); end
    end
    $display("mechanisms: reduction=%0d slave_stall=%0d hidden_dist=%0d self_h=%0d fcl=%0d ext_stall=%0d store=%0d load=%0d",
             n_red, n_slave_stall, n_hdist, n_self, n_fcl, n_ext_stall, n_store, n_load);
    checks += 8;
    if (n_red == 0)         begin failures++; $display("no reduction transfer"); end
    if (n_slave_stall == 0) begin failures++; $display("no slave stall"); end
    if (n_hdist == 0)       begin failures++; $display("no hidden-state distribution"); end
    if (n_self == 0)        begin failures++; $display("no local hidden-state feedback"); end
    if (n_fcl == 0)         begin failures++; $display("no FCL output"); end
    if (n_ext_stall == 0)   begin failures++; $display("no external back-pressure"); end
    if (n_store == 0)       begin failures++; $display("no state store"); end
    if (n_load == 0)        begin failures++; $display("no state load"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
