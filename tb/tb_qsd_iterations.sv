// tb_qsd_iterations: the measured run of the discriminator, replayed on
// the RTL: one initialisation (weight load) followed by two iterations,
// each of which moves a buffer of readout samples through the kernel.
//
// For each iteration the testbench records, in cycles of the pipeline
// clock: the time from start to done, and for every sample the kernel
// latency from its input handshake to its result being valid. The first
// sample of an iteration finds the kernel empty and must take exactly 17
// cycles; later samples of a full-rate stream wait in layer 1 for layer 2
// and may take up to 23. Both iterations must show the same latency
// sequence and the same start-to-done time, since memory here answers
// with a fixed delay and the kernel's timing does not depend on data.
// One sample per iteration is the smallest case and is run first; a
// 64-sample pair follows. All results are compared with the reference
// model.
module tb_qsd_iterations;
  import qsd_pkg::*;
  import qsd_ref_pkg::*;

  localparam int LAT      = (2 + 1) + (8 + 1) + (4 + 1);
  localparam int LAT_FLOW = 23;

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

  // fixed-latency, always-ready memory
  mem_model #(.NR(2), .MAX_LAT(1), .READY_PCT(100)) u_mem (
    .clk, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata,
    .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready
  );

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // kernel latency monitor: input handshakes queue a timestamp, results pop
  // it; the latencies of the current iteration are collected in lat
  int in_t [$];
  int lat [$];
  int n_lat = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_kernel.s_i_tvalid && dut.u_kernel.s_i_tready) in_t.push_back(cycle);
    if (dut.u_kernel.m_tvalid && !dut.u_kernel.m_tready) begin
      checks++; failures++;
      $display("FAIL kernel output stalled with an always-ready memory");
    end
    if (dut.u_kernel.m_tvalid && dut.u_kernel.m_tready) begin
      lat.push_back(cycle - in_t.pop_front());
      n_lat++;
    end
  end

  task automatic initialisation(output int cycles);
    int t0 = cycle;
    random_weights(200);
    for (int l = 0; l < 3; l++)
      for (int idx = 0; idx < cfg_count(l); idx++) begin
        #1 cfg_we = 1'b1;
        cfg_addr = {2'(l), CFG_IDX_W'(idx)};
        cfg_data = DATA_W'(cfg_value(l, idx));
        @(posedge clk);
      end
    #1 cfg_we = 1'b0;
    cycles = cycle - t0;
  endtask

  task automatic iteration(int n, output int cycles, output int lats [$]);
    int t0, dummy = 0;
    logic [31:0] exp [];
    lat.delete();
    exp = new[n];
    for (int k = 0; k < n; k++) begin
      int si = rnd(3000), sq = rnd(3000);
      u_mem.poke(32'h100 + 4 * k, 32'(si));
      u_mem.poke(32'h4100 + 4 * k, 32'(sq));
      exp[k] = result_word(score(si, sq, dummy));
    end
    #1 start = 1; i_base = 32'h100; q_base = 32'h4100; out_base = 32'h8100;
    num_samples = LEN_W'(n);
    @(posedge clk); t0 = cycle;
    #1 start = 0;
    while (!done) @(posedge clk);
    cycles = cycle - t0;
    for (int k = 0; k < n; k++)
      check("result", int'(u_mem.peek(32'h8100 + 4 * k)), int'(exp[k]));
    lats = lat;
    check("results timed", lats.size(), n);
    if (lats.size() > 0) check("first sample latency", lats[0], LAT);
    foreach (lats[k]) begin
      checks++;
      if (lats[k] < LAT || lats[k] > LAT_FLOW) begin
        failures++;
        $display("FAIL sample %0d latency %0d outside %0d..%0d", k, lats[k], LAT, LAT_FLOW);
      end
    end
  endtask

  initial begin
    int ci, c1, c2;
    int l1 [$], l2 [$];
    cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    start = 0; i_base = '0; q_base = '0; out_base = '0; num_samples = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;

    initialisation(ci);
    for (int size = 1; size <= 64; size += 63) begin
      int lmax = 0;
      iteration(size, c1, l1);
      iteration(size, c2, l2);
      foreach (l1[k]) if (l1[k] > lmax) lmax = l1[k];
      $display("%0d sample(s) per iteration: initialisation %0d cycles, iteration 1 %0d cycles, iteration 2 %0d cycles, kernel latency %0d..%0d cycles",
               size, ci, c1, c2, l1[0], lmax);
      check("iterations take equal time", c1, c2);
      check("same number of results", l1.size(), l2.size());
      foreach (l1[k])
        if (k < l2.size()) check("same latency in both iterations", l1[k], l2[k]);
    end
    check("kernel results timed", n_lat, 2 * 1 + 2 * 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
