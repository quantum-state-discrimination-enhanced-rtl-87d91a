// nn_kernel: neural-network state discriminator for one readout channel.
//
// Classifies a qubit readout sample, a point (I, Q) in the IQ plane, with
// the 2-8-4-1 network of the reference design:
//   L1 = ReLU(W1 * (I, Q) + B1)   8 neurons
//   L2 = ReLU(W2 * L1 + B2)       4 neurons
//   L3 = W3 * L2 + B3             1 neuron, the score
// and reports the score and the state decision (1 when L3 > 0).
//
// How it works: the kernel has two input streams, one carrying I samples
// and one carrying Q samples, and one output stream, like the two input
// and one output stream ports of the reference kernel. A sample is taken
// when both inputs are valid and layer 1 is idle (the two streams are
// consumed in lock-step). The three layers are dense_layer vector units
// chained by valid/ready, so while layer 2 works on sample n, layer 1 can
// already hold sample n+1. Each stream word carries a signed 16-bit value
// (Q7.8) in bits [15:0]; bits [31:16] are ignored. The output word is a
// qsd_pkg::result_word_t: score in [15:0], state in [16], zeros above.
// Which input stream carries I and which carries Q, the number format and
// the decision threshold of 0 are choices of this implementation.
//
// Weights: cfg_addr = {layer, index} with layer 0, 1, 2 for L1, L2, L3 and
// index as in dense_layer (W[i][k] at i*N_OUT+k, then the biases).
//
// Timing: a sample accepted while the kernel is empty gives its result in
// cycle c + KERNEL_LATENCY (17 cycles) when the output is not stalled; the
// latency does not depend on the data. Under continuous input, layer 1
// takes the next sample early and holds its result until layer 2 is free,
// so from input handshake to result a sample then takes 23 cycles; the
// results still leave every 10 cycles. The sustained rate is set by the
// longest layer, one sample every N_H1 + 2 = 10 cycles (accept, eight
// multiply-accumulate steps, hand-over).
module nn_kernel
  import qsd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration (weights and biases)
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  act_t              cfg_data,
  // input stream 0: I samples
  input  logic              s_i_tvalid,
  output logic              s_i_tready,
  input  logic [AXIS_W-1:0] s_i_tdata,
  // input stream 1: Q samples
  input  logic              s_q_tvalid,
  output logic              s_q_tready,
  input  logic [AXIS_W-1:0] s_q_tdata,
  // output stream: result words
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic [AXIS_W-1:0] m_tdata
);

  logic [CFG_IDX_W-1:0] cfg_idx;
  logic                 cfg_l1, cfg_l2, cfg_l3;

  assign cfg_idx = cfg_addr[CFG_IDX_W-1:0];
  assign cfg_l1  = cfg_we && (cfg_addr[CFG_AW-1 -: 2] == CFG_L1);
  assign cfg_l2  = cfg_we && (cfg_addr[CFG_AW-1 -: 2] == CFG_L2);
  assign cfg_l3  = cfg_we && (cfg_addr[CFG_AW-1 -: 2] == CFG_L3);

  // ---------------- input join ----------------
  logic                          l1_in_valid, l1_in_ready;
  logic [N_IQ-1:0][DATA_W-1:0]   l1_in;

  assign l1_in_valid = s_i_tvalid && s_q_tvalid;
  assign s_i_tready  = l1_in_ready && s_q_tvalid;
  assign s_q_tready  = l1_in_ready && s_i_tvalid;
  assign l1_in[0]    = s_i_tdata[DATA_W-1:0];
  assign l1_in[1]    = s_q_tdata[DATA_W-1:0];

  // ---------------- layers ----------------
  logic                          l1_valid, l1_ready;
  logic [N_H1-1:0][DATA_W-1:0]   l1_out;
  logic                          l2_valid, l2_ready;
  logic [N_H2-1:0][DATA_W-1:0]   l2_out;
  logic [N_SCORE-1:0][DATA_W-1:0] l3_out;

  dense_layer #(.N_IN(N_IQ), .N_OUT(N_H1), .RELU(1'b1)) u_layer1 (
    .clk, .rst_n,
    .cfg_we(cfg_l1), .cfg_addr(cfg_idx), .cfg_data,
    .in_valid(l1_in_valid), .in_ready(l1_in_ready), .in_vec(l1_in),
    .out_valid(l1_valid), .out_ready(l1_ready), .out_vec(l1_out)
  );

  dense_layer #(.N_IN(N_H1), .N_OUT(N_H2), .RELU(1'b1)) u_layer2 (
    .clk, .rst_n,
    .cfg_we(cfg_l2), .cfg_addr(cfg_idx), .cfg_data,
    .in_valid(l1_valid), .in_ready(l1_ready), .in_vec(l1_out),
    .out_valid(l2_valid), .out_ready(l2_ready), .out_vec(l2_out)
  );

  dense_layer #(.N_IN(N_H2), .N_OUT(N_SCORE), .RELU(1'b0)) u_layer3 (
    .clk, .rst_n,
    .cfg_we(cfg_l3), .cfg_addr(cfg_idx), .cfg_data,
    .in_valid(l2_valid), .in_ready(l2_ready), .in_vec(l2_out),
    .out_valid(m_tvalid), .out_ready(m_tready), .out_vec(l3_out)
  );

  // ---------------- result word ----------------
  result_word_t res;
  always_comb begin
    res       = '0;
    res.score = act_t'(l3_out[0]);
    res.state = ($signed(l3_out[0]) > 0);
  end
  assign m_tdata = res;

  // Stream rule: a word, once offered, stays until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
