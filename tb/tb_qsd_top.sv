// tb_qsd_top: end-to-end test of the discrimination pipeline at its
// default (and only) size.
//
// Plays the host and the off-chip memory around qsd_top:
//  - initialisation: loads the weights and biases over the configuration
//    port;
//  - iterations: places I and Q sample arrays in memory, pulses start and
//    waits for done, then compares every result word in memory, and every
//    state seen on the state tap, with qsd_ref_pkg's model.
// Iteration 1 uses the hand-set separating network on samples drawn from
// two clusters centred at I = -1.0 and I = +1.0 (the two-state readout
// picture) and also reports how many samples land on their cluster's
// side. Iteration 2 reloads random weights and uses random samples. A
// third, short iteration runs with a memory that is always ready, to
// check the pipeline rate: one result per 10 kernel cycles. A fourth
// iteration keeps reads fast but makes writes slow, so results back up
// from the writer into the kernel. A start pulsed while busy must be
// ignored.
// Each mechanism of the design is counted and must occur at least once:
// read and write back-pressure from memory, back-pressure from the writer
// into the kernel, the kernel waiting for one of its two input streams,
// ReLU clipping, both state outputs, weight reload and the ignored start.
module tb_qsd_top;
  import qsd_pkg::*;
  import qsd_ref_pkg::*;

  localparam int I_BASE = 32'h0000_1000;
  localparam int Q_BASE = 32'h0000_9000;
  localparam int O_BASE = 32'h0001_1000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic                   cfg_we;
  logic [CFG_AW-1:0]      cfg_addr;
  logic [DATA_W-1:0]      cfg_data;
  logic                   start, busy, done;
  logic [ADDR_W-1:0]      i_base, q_base, out_base;
  logic [LEN_W-1:0]       num_samples;
  logic [1:0]             arvalid, arready, rvalid, rready;
  logic [1:0][31:0]       araddr, rdata;
  logic                   awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0]            awaddr, wdata;
  logic                   state_valid, state_bit;

  qsd_top dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .start, .i_base, .q_base, .out_base, .num_samples, .busy, .done,
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr),
    .m_rvalid(rvalid), .m_rready(rready), .m_rdata(rdata),
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata),
    .m_bvalid(bvalid), .m_bready(bready),
    .state_valid, .state_bit
  );

  mem_model #(.NR(2), .MAX_LAT(8), .READY_PCT(65)) u_mem (
    .clk, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata,
    .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready
  );

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_kernel_bp = 0, n_join_wait = 0, n_relu = 0, n_state0 = 0, n_state1 = 0;
  int n_reload = 0, n_ignored_start = 0, n_iter = 0;
  logic [31:0] tap_exp [$];

  always @(posedge clk) if (rst_n) begin
    if (dut.u_kernel.m_tvalid && !dut.u_kernel.m_tready) n_kernel_bp++;
    if (dut.u_kernel.s_i_tvalid != dut.u_kernel.s_q_tvalid) n_join_wait++;
    if (state_valid) begin
      logic [31:0] e;
      if (state_bit) n_state1++; else n_state0++;
      if (tap_exp.size() == 0) begin
        checks++; failures++;
        $display("FAIL state tap: unexpected result");
      end else begin
        e = tap_exp.pop_front();
        check("state tap", state_bit, e[16]);
      end
    end
  end

  task automatic load_weights();
    for (int l = 0; l < 3; l++)
      for (int idx = 0; idx < cfg_count(l); idx++) begin
        #1 cfg_we = 1'b1;
        cfg_addr = {2'(l), CFG_IDX_W'(idx)};
        cfg_data = DATA_W'(cfg_value(l, idx));
        @(posedge clk);
      end
    #1 cfg_we = 1'b0;
    n_reload++;
  endtask

  function automatic int gauss(int mean, int sd);
    // sum of four uniforms, roughly normal with the given spread
    int s = 0;
    for (int k = 0; k < 4; k++) s += int'($urandom_range(2 * sd, 0)) - sd;
    return mean + s / 2;
  endfunction

  // one iteration over n samples; clusters=1 draws from the two clusters
  task automatic iteration(int n, bit clusters, output int cycles);
    int is [], qs [], lbl [];
    int sc, correct = 0, t0;
    logic [31:0] exp [];
    is = new[n]; qs = new[n]; lbl = new[n]; exp = new[n];
    for (int k = 0; k < n; k++) begin
      if (clusters) begin
        lbl[k] = $urandom_range(1, 0);
        is[k] = gauss((lbl[k] != 0) ? 256 : -256, 110);
        qs[k] = gauss(0, 110);
      end else begin
        is[k] = rnd(4000);
        qs[k] = rnd(4000);
      end
      u_mem.poke(I_BASE + 4 * k, 32'(is[k]));
      u_mem.poke(Q_BASE + 4 * k, 32'(qs[k]));
      u_mem.poke(O_BASE + 4 * k, 32'hdead_beef);
      sc = score(is[k], qs[k], n_relu);
      exp[k] = result_word(sc);
      tap_exp.push_back(exp[k]);
      if (clusters && ((sc > 0) == (lbl[k] == 1))) correct++;
    end
    u_mem.poke(O_BASE + 4 * n, 32'hdead_beef);
    #1 start = 1; i_base = I_BASE; q_base = Q_BASE; out_base = O_BASE;
    num_samples = LEN_W'(n);
    @(posedge clk); t0 = cycle;
    #1 start = 0;
    // a second start while busy must be ignored
    repeat (20) @(posedge clk);
    #1 start = 1; num_samples = LEN_W'(3);
    if (busy) n_ignored_start++;
    @(posedge clk);
    #1 start = 0;
    while (!done) @(posedge clk);
    cycles = cycle - t0;
    n_iter++;
    for (int k = 0; k < n; k++) check("result in memory", u_mem.peek(O_BASE + 4 * k), exp[k]);
    check("no write past the buffer", u_mem.peek(O_BASE + 4 * n), 32'hdead_beef);
    check("tap drained", tap_exp.size(), 0);
    if (clusters)
      $display("iteration %0d: %0d samples, %0d cycles, %0d classified on their cluster's side",
               n_iter, n, cycles, correct);
    else
      $display("iteration %0d: %0d samples, %0d cycles", n_iter, n, cycles);
  endtask

  initial begin
    int c;
    cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    start = 0; i_base = '0; q_base = '0; out_base = '0; num_samples = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;

    // initialisation
    separating_weights();
    load_weights();
    // iteration 1: clustered readout samples
    iteration(400, 1'b1, c);
    // iteration 2: new weights, random samples
    random_weights(250);
    load_weights();
    iteration(400, 1'b0, c);
    // iteration 3: ideal memory, rate check
    u_mem.ready_pct = 100;
    u_mem.max_lat   = 2;
    iteration(100, 1'b0, c);
    checks++;
    if (c > 100 * 10 + 40) begin
      failures++;
      $display("FAIL rate: 100 samples took %0d cycles", c);
    end
    // iteration 4: fast reads, slow writes, so the writer holds the kernel
    u_mem.wr_ready_pct = 12;
    u_mem.max_lat      = 6;
    iteration(100, 1'b0, c);

    $display("mechanisms: read_stall=%0d write_stall=%0d kernel_backpressure=%0d join_wait=%0d",
             u_mem.n_ar_stall, u_mem.n_aw_stall, n_kernel_bp, n_join_wait);
    $display("            relu_cut=%0d state0=%0d state1=%0d weight_loads=%0d ignored_start=%0d iterations=%0d",
             n_relu, n_state0, n_state1, n_reload, n_ignored_start, n_iter);
    begin
      int counts [9];
      counts = '{u_mem.n_ar_stall, u_mem.n_aw_stall, n_kernel_bp, n_join_wait,
                 n_relu, n_state0, n_state1, n_reload - 1, n_ignored_start};
      foreach (counts[k]) begin
        checks++;
        if (counts[k] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
