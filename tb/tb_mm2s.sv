// tb_mm2s: self-checking test of mm2s against the behavioural memory.
//
// Fills memory with random words, then runs transfers of various lengths
// (0, 1, short and long, aligned at different base addresses) under random
// memory latency, random address-ready stalls and random stream
// back-pressure. Every stream word must equal the memory word at
// base + 4*k in order, exactly num_words words must come out, done must
// rise only after the last one and busy must fall with it. A final
// transfer with an always-ready memory of latency up to 2 and a
// always-ready sink checks the streaming rate: N words within N + 6 cycles.
module tb_mm2s;
  import qsd_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic              start, busy, done;
  logic [ADDR_W-1:0] base_addr;
  logic [LEN_W-1:0]  num_words;
  logic [0:0]        arvalid, arready, rvalid, rready;
  logic [0:0][31:0]  araddr, rdata;
  logic              t_valid, t_ready;
  logic [AXIS_W-1:0] t_data;
  logic              unused_awready, unused_wready, unused_bvalid;

  mm2s dut (
    .clk, .rst_n, .start, .base_addr, .num_words, .busy, .done,
    .m_arvalid(arvalid[0]), .m_arready(arready[0]), .m_araddr(araddr[0]),
    .m_rvalid(rvalid[0]), .m_rready(rready[0]), .m_rdata(rdata[0]),
    .m_tvalid(t_valid), .m_tready(t_ready), .m_tdata(t_data)
  );

  mem_model #(.NR(1), .MAX_LAT(6), .READY_PCT(60)) u_mem (
    .clk, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata,
    .awvalid(1'b0), .awready(unused_awready), .awaddr(32'd0),
    .wvalid(1'b0), .wready(unused_wready), .wdata(32'd0),
    .bvalid(unused_bvalid), .bready(1'b1)
  );

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  int sink_pct = 70;
  int n_tstall = 0;
  always @(negedge clk) t_ready <= (int'($urandom_range(99, 0)) < sink_pct);
  always @(posedge clk) if (t_valid && !t_ready) n_tstall++;

  // one transfer; returns the number of cycles from start to done
  task automatic transfer(int base, int n, output int cycles);
    int got = 0;
    int t0;
    #1 start = 1; base_addr = ADDR_W'(base); num_words = LEN_W'(n);
    @(posedge clk); t0 = cycle;
    #1 start = 0;
    while (!done) begin
      @(posedge clk);
      if (t_valid && t_ready) begin
        check("stream word", t_data, u_mem.peek(base + 4 * got));
        got++;
        if (got == n) check("busy before last word leaves", busy, 1);
      end
      #1;
      if (!done && got == n && n != 0) begin
        checks++; failures++;
        $display("FAIL done late");
      end
    end
    cycles = cycle - t0;
    check("word count", got, n);
    check("busy after done", busy, 0);
    repeat (3) begin
      @(posedge clk);
      check("no word after done", t_valid && t_ready, 0);
    end
  endtask

  initial begin
    int c;
    start = 0; base_addr = '0; num_words = '0;
    for (int a = 0; a < 4096; a += 4) u_mem.poke(a, $urandom());
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    transfer(0, 0, c);
    transfer(16, 1, c);
    transfer(64, 7, c);
    transfer(1024, 200, c);
    for (int k = 0; k < 10; k++)
      transfer(4 * int'($urandom_range(500, 0)), int'($urandom_range(40, 1)), c);

    // rate with a fast memory and an always-ready sink
    u_mem.ready_pct = 100;
    u_mem.max_lat   = 2;
    sink_pct        = 100;
    repeat (2) @(posedge clk);
    transfer(2048, 100, c);
    checks++;
    if (c > 100 + 6) begin
      failures++;
      $display("FAIL rate: 100 words took %0d cycles", c);
    end

    checks++;
    if (n_tstall == 0 || u_mem.n_ar_stall == 0) begin
      failures++;
      $display("FAIL coverage: stream stalls %0d, read stalls %0d", n_tstall, u_mem.n_ar_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
