// tb_dense_layer: self-checking test of dense_layer.
//
// Two layers are tested side by side: the default one (2 inputs, 8 ReLU
// neurons, the first hidden layer) and a linear 4-input, 1-neuron layer
// (the output layer). Random weights, biases and inputs are loaded; each
// result is compared with a reference computed here with 64-bit integer
// arithmetic, and the cycles from input handshake to valid output are
// checked against N_IN + 1. Random back-pressure on out_ready checks that
// a result is held until taken. Large weights make some sums saturate and
// some go negative, so saturation and ReLU are both exercised.
module tb_dense_layer;
  import qsd_pkg::*;

  localparam int unsigned A_IN = 2, A_OUT = 8;
  localparam int unsigned B_IN = 4, B_OUT = 1;
  localparam int unsigned N_VEC = 200;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- DUT A: defaults ----------------
  logic                        a_cfg_we;
  logic [CFG_IDX_W-1:0]        a_cfg_addr;
  act_t                        a_cfg_data;
  logic                        a_in_valid, a_in_ready, a_out_valid, a_out_ready;
  logic [A_IN-1:0][DATA_W-1:0] a_in_vec;
  logic [A_OUT-1:0][DATA_W-1:0] a_out_vec;

  dense_layer dut_a (
    .clk, .rst_n,
    .cfg_we(a_cfg_we), .cfg_addr(a_cfg_addr), .cfg_data(a_cfg_data),
    .in_valid(a_in_valid), .in_ready(a_in_ready), .in_vec(a_in_vec),
    .out_valid(a_out_valid), .out_ready(a_out_ready), .out_vec(a_out_vec)
  );

  // ---------------- DUT B: linear output layer ----------------
  logic                        b_cfg_we;
  logic [CFG_IDX_W-1:0]        b_cfg_addr;
  act_t                        b_cfg_data;
  logic                        b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  logic [B_IN-1:0][DATA_W-1:0] b_in_vec;
  logic [B_OUT-1:0][DATA_W-1:0] b_out_vec;

  dense_layer #(.N_IN(B_IN), .N_OUT(B_OUT), .RELU(1'b0)) dut_b (
    .clk, .rst_n,
    .cfg_we(b_cfg_we), .cfg_addr(b_cfg_addr), .cfg_data(b_cfg_data),
    .in_valid(b_in_valid), .in_ready(b_in_ready), .in_vec(b_in_vec),
    .out_valid(b_out_valid), .out_ready(b_out_ready), .out_vec(b_out_vec)
  );

  // reference parameters
  int wa [A_IN][A_OUT]; int ba [A_OUT];
  int wb [B_IN][B_OUT]; int bb [B_OUT];
  int n_relu = 0, n_sat = 0, n_stall = 0;

  function automatic int rnd16(int span);
    return int'($urandom_range(2 * span, 0)) - span;
  endfunction

  // reference: bias<<FRAC + sum x*w, ReLU, >>FRAC, saturate
  function automatic int ref_neuron(longint s, bit relu);
    longint q;
    if (relu && s < 0) return 0;
    q = s >>> FRAC;
    if (q > 32767) return 32767;
    if (q < -32768) return -32768;
    return int'(q);
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // run one vector through DUT A and check it
  task automatic run_a(int xs[A_IN], int span_ready);
    int t0, lat;
    longint s;
    int exp;
    for (int i = 0; i < A_IN; i++) a_in_vec[i] = DATA_W'(xs[i]);
    a_in_valid = 1'b1;
    do @(posedge clk); while (!a_in_ready);
    t0 = cycle;
    #1 a_in_valid = 1'b0;
    a_out_ready = 1'b0;
    while (!a_out_valid) begin @(posedge clk); #1; end
    lat = cycle - t0;
    check("layer A latency", lat, A_IN + 1);
    // random stall before taking the result
    repeat ($urandom_range(span_ready, 0)) begin
      @(posedge clk); #1;
      n_stall++;
      checks++;
      if (!a_out_valid) failures++;
    end
    for (int k = 0; k < A_OUT; k++) begin
      s = longint'(ba[k]) <<< FRAC;
      for (int i = 0; i < A_IN; i++) s += longint'(xs[i]) * longint'(wa[i][k]);
      exp = ref_neuron(s, 1'b1);
      if (s < 0) n_relu++;
      if (exp == 32767 || exp == -32768) n_sat++;
      check($sformatf("layer A out[%0d]", k), int'($signed(a_out_vec[k])), exp);
    end
    a_out_ready = 1'b1;
    @(posedge clk); #1;
    a_out_ready = 1'b0;
  endtask

  task automatic run_b(int xs[B_IN]);
    int t0;
    longint s;
    int exp;
    for (int i = 0; i < B_IN; i++) b_in_vec[i] = DATA_W'(xs[i]);
    b_in_valid = 1'b1;
    do @(posedge clk); while (!b_in_ready);
    t0 = cycle;
    #1 b_in_valid = 1'b0;
    b_out_ready = 1'b1;
    while (!b_out_valid) begin @(posedge clk); #1; end
    check("layer B latency", cycle - t0, B_IN + 1);
    s = longint'(bb[0]) <<< FRAC;
    for (int i = 0; i < B_IN; i++) s += longint'(xs[i]) * longint'(wb[i][0]);
    exp = ref_neuron(s, 1'b0);
    if (s < 0) n_relu++;
    check("layer B out", int'($signed(b_out_vec[0])), exp);
    @(posedge clk); #1;
  endtask

  initial begin
    int xa[A_IN];
    int xb[B_IN];
    a_cfg_we = 0; a_cfg_addr = '0; a_cfg_data = '0;
    b_cfg_we = 0; b_cfg_addr = '0; b_cfg_data = '0;
    a_in_valid = 0; a_in_vec = '0; a_out_ready = 0;
    b_in_valid = 0; b_in_vec = '0; b_out_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int pass = 0; pass < 2; pass++) begin
      // pass 0: small weights, pass 1: large weights (saturation)
      int span;
      span = (pass == 0) ? 512 : 32767;
      for (int i = 0; i < A_IN; i++)
        for (int k = 0; k < A_OUT; k++) begin
          wa[i][k] = rnd16(span);
          a_cfg_we = 1; a_cfg_addr = CFG_IDX_W'(i * A_OUT + k); a_cfg_data = act_t'(wa[i][k]);
          @(posedge clk); #1;
        end
      for (int k = 0; k < A_OUT; k++) begin
        ba[k] = rnd16(span);
        a_cfg_we = 1; a_cfg_addr = CFG_IDX_W'(A_IN * A_OUT + k); a_cfg_data = act_t'(ba[k]);
        @(posedge clk); #1;
      end
      a_cfg_we = 0;
      for (int i = 0; i < B_IN; i++) begin
        wb[i][0] = rnd16(span);
        b_cfg_we = 1; b_cfg_addr = CFG_IDX_W'(i); b_cfg_data = act_t'(wb[i][0]);
        @(posedge clk); #1;
      end
      bb[0] = rnd16(span);
      b_cfg_we = 1; b_cfg_addr = CFG_IDX_W'(B_IN); b_cfg_data = act_t'(bb[0]);
      @(posedge clk); #1;
      b_cfg_we = 0;

      for (int n = 0; n < N_VEC / 2; n++) begin
        for (int i = 0; i < A_IN; i++) xa[i] = rnd16(span);
        for (int i = 0; i < B_IN; i++) xb[i] = rnd16(span);
        run_a(xa, 3);
        run_b(xb);
      end
    end

    checks++;
    if (n_relu == 0 || n_sat == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL coverage relu=%0d sat=%0d stall=%0d", n_relu, n_sat, n_stall);
    end
    $display("coverage: relu=%0d saturate=%0d stall=%0d", n_relu, n_sat, n_stall);
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
