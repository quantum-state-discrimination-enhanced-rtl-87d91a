// tb_s2mm: self-checking test of s2mm against the behavioural memory.
//
// A stream source with random gaps sends random words; s2mm must write
// word k to byte address base + 4*k, take exactly num_words words (the
// source offers more than that, the surplus must stay untaken), raise done
// only after the last write response and leave busy low afterwards.
// Memory address and data ready drop at random. Lengths 0, 1, short and
// long are covered. A final transfer with an always-ready memory and an
// always-valid source checks the rate: N words in at most N + 2*MAX_LAT + 4
// cycles from start to done.
module tb_s2mm;
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
  logic              s_valid, s_ready;
  logic [AXIS_W-1:0] s_data;
  logic              awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0]       awaddr, wdata;
  logic [0:0]        unused_arready, unused_rvalid;
  logic [0:0][31:0]  unused_rdata;

  s2mm dut (
    .clk, .rst_n, .start, .base_addr, .num_words, .busy, .done,
    .s_tvalid(s_valid), .s_tready(s_ready), .s_tdata(s_data),
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata),
    .m_bvalid(bvalid), .m_bready(bready)
  );

  mem_model #(.NR(1), .MAX_LAT(4), .READY_PCT(60)) u_mem (
    .clk, .arvalid(1'b0), .arready(unused_arready), .araddr(32'd0),
    .rvalid(unused_rvalid), .rready(1'b1), .rdata(unused_rdata),
    .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready
  );

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  int gap_max = 3;
  int n_sstall = 0;
  logic [31:0] words [$];
  int sent = 0;
  bit src_on = 0;

  // source: offers words[sent] with random gaps while src_on
  always @(posedge clk) begin
    if (s_valid && s_ready) sent++;
    if (s_valid && !s_ready) n_sstall++;
  end
  always @(negedge clk) begin
    if (!src_on || sent >= words.size()) s_valid <= 1'b0;
    else if (s_valid && !s_ready) s_valid <= 1'b1;  // hold offered word
    else if (gap_max == 0 || $urandom_range(gap_max, 0) != 0) begin
      s_valid <= 1'b1;
      s_data  <= words[sent];
    end else s_valid <= 1'b0;
  end

  task automatic transfer(int base, int n, output int cycles);
    int t0;
    words.delete();
    sent = 0;
    for (int k = 0; k < n + 5; k++) words.push_back($urandom());
    for (int k = 0; k < n + 5; k++) u_mem.poke(base + 4 * k, 32'hffff_ffff);
    @(negedge clk);
    src_on = 1;
    start = 1; base_addr = ADDR_W'(base); num_words = LEN_W'(n);
    @(posedge clk); t0 = cycle;
    #1 start = 0;
    while (!done) @(posedge clk);
    cycles = cycle - t0;
    #1;
    check("busy after done", busy, 0);
    repeat (4) @(posedge clk);
    src_on = 0;
    check("words taken", sent, n);
    for (int k = 0; k < n; k++)
      check("memory word", u_mem.peek(base + 4 * k), words[k]);
    for (int k = n; k < n + 5; k++)
      check("no write past end", u_mem.peek(base + 4 * k), 32'hffff_ffff);
  endtask

  initial begin
    int c;
    start = 0; base_addr = '0; num_words = '0; s_valid = 0; s_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    transfer(0, 0, c);
    transfer(256, 1, c);
    transfer(512, 9, c);
    transfer(4096, 300, c);
    for (int k = 0; k < 8; k++)
      transfer(4 * int'($urandom_range(2000, 0)), int'($urandom_range(30, 1)), c);

    u_mem.ready_pct = 100;
    gap_max = 0;
    transfer(8192, 100, c);
    checks++;
    if (c > 100 + 2 * 4 + 4) begin
      failures++;
      $display("FAIL rate: 100 words took %0d cycles", c);
    end

    checks++;
    if (n_sstall == 0 || u_mem.n_aw_stall == 0) begin
      failures++;
      $display("FAIL coverage: stream stalls %0d, write stalls %0d", n_sstall, u_mem.n_aw_stall);
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
