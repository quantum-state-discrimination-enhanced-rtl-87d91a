// tb_nn_kernel: self-checking test of nn_kernel.
//
// Loads random weights through the configuration port, then runs three
// phases and compares every output word with qsd_ref_pkg's model:
//  1. isolated samples: the latency from input handshake to valid output
//     must be exactly (2+1) + (8+1) + (4+1) = 17 cycles for every sample;
//  2. streaming with independent random gaps on the I and Q streams and
//     random output back-pressure: results must arrive in order and match;
//  3. full-rate streaming: consecutive results must be 10 cycles apart.
// ReLU clipping, output stalls and I/Q misalignment are counted and must
// each happen at least once.
module tb_nn_kernel;
  import qsd_pkg::*;
  import qsd_ref_pkg::*;

  localparam int LAT  = (2 + 1) + (8 + 1) + (4 + 1);
  localparam int RATE = 8 + 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic              cfg_we;
  logic [CFG_AW-1:0] cfg_addr;
  act_t              cfg_data;
  logic              i_valid, i_ready, q_valid, q_ready, o_valid, o_ready;
  logic [AXIS_W-1:0] i_data, q_data, o_data;

  nn_kernel dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .s_i_tvalid(i_valid), .s_i_tready(i_ready), .s_i_tdata(i_data),
    .s_q_tvalid(q_valid), .s_q_tready(q_ready), .s_q_tdata(q_data),
    .m_tvalid(o_valid), .m_tready(o_ready), .m_tdata(o_data)
  );

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic load_weights();
    for (int l = 0; l < 3; l++)
      for (int idx = 0; idx < cfg_count(l); idx++) begin
        cfg_we = 1'b1;
        cfg_addr = {2'(l), CFG_IDX_W'(idx)};
        cfg_data = act_t'(cfg_value(l, idx));
        @(posedge clk); #1;
      end
    cfg_we = 1'b0;
  endtask

  int neg_hidden = 0, n_stall = 0, n_skew = 0;
  logic [31:0] exp_q [$];
  int is [$], qs [$];
  int n_out = 0;
  int last_out = -1;
  int phase = 0;
  bit stall_en = 1'b0;
  int n_gap_checks = 0;

  // output monitor: compare in order, track output spacing in phase 3
  always @(posedge clk) if (rst_n) begin
    if (o_valid && !o_ready) n_stall++;
    if (i_valid != q_valid) n_skew++;
    if (o_valid && o_ready) begin
      if (exp_q.size() == 0) begin
        checks++; failures++;
        $display("FAIL unexpected output");
      end else begin
        check("result word", o_data, exp_q.pop_front());
      end
      if (phase == 3 && last_out >= 0) begin
        check("output spacing", cycle - last_out, RATE);
        n_gap_checks++;
      end
      last_out = cycle;
      n_out++;
    end
  end

  always @(negedge clk) o_ready <= stall_en ? ($urandom_range(3, 0) != 0) : 1'b1;

  task automatic push_sample();
    int si, sq;
    si = rnd(2000); sq = rnd(2000);
    is.push_back(si); qs.push_back(sq);
    exp_q.push_back(result_word(score(si, sq, neg_hidden)));
  endtask

  // I and Q drivers with their own random gaps
  task automatic drive_i(int n, bit gaps);
    for (int k = 0; k < n; k++) begin
      if (gaps) repeat ($urandom_range(4, 0)) @(posedge clk);
      #1 i_valid = 1'b1; i_data = AXIS_W'(is[k]);
      do @(posedge clk); while (!i_ready);
      #1 i_valid = 1'b0;
    end
  endtask
  task automatic drive_q(int n, bit gaps);
    for (int k = 0; k < n; k++) begin
      if (gaps) repeat ($urandom_range(4, 0)) @(posedge clk);
      #1 q_valid = 1'b1; q_data = {16'hdead, 16'(qs[k])};  // upper half ignored
      do @(posedge clk); while (!q_ready);
      #1 q_valid = 1'b0;
    end
  endtask

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    i_valid = 0; q_valid = 0; i_data = '0; q_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    random_weights(200);
    load_weights();

    // ---- phase 1: isolated samples, exact latency ----
    phase = 1;
    for (int n = 0; n < 20; n++) begin
      int t0;
      is.delete(); qs.delete();
      push_sample();
      #1 i_valid = 1; q_valid = 1; i_data = AXIS_W'(is[0]); q_data = AXIS_W'(qs[0]);
      do @(posedge clk); while (!(i_ready && q_ready));
      t0 = cycle;
      #1 i_valid = 0; q_valid = 0;
      while (!o_valid) begin @(posedge clk); #1; end
      check("kernel latency", cycle - t0, LAT);
      @(posedge clk); #1;
    end

    // ---- phase 2: random gaps and back-pressure ----
    phase = 2;
    stall_en = 1'b1;
    is.delete(); qs.delete();
    for (int n = 0; n < 300; n++) push_sample();
    fork
      drive_i(300, 1'b1);
      drive_q(300, 1'b1);
    join
    while (exp_q.size() != 0) @(posedge clk);
    stall_en = 1'b0;
    repeat (5) @(posedge clk);

    // ---- phase 3: full rate ----
    random_weights(300);
    load_weights();
    phase = 3;
    last_out = -1;
    is.delete(); qs.delete();
    for (int n = 0; n < 50; n++) push_sample();
    fork
      drive_i(50, 1'b0);
      drive_q(50, 1'b0);
    join
    while (exp_q.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);

    check("outputs received", n_out, 20 + 300 + 50);
    checks++;
    if (neg_hidden == 0 || n_stall == 0 || n_skew == 0 || n_gap_checks == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("coverage: relu_cut=%0d out_stall=%0d iq_skew=%0d spacing=%0d",
             neg_hidden, n_stall, n_skew, n_gap_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
