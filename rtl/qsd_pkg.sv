// qsd_pkg: types and constants shared by the state discrimination pipeline.
//
// The network is the 2-8-4-1 multilayer perceptron of the discriminator:
// an (I, Q) readout sample goes through two hidden layers of 8 and 4 ReLU
// neurons and one linear output neuron. The layer sizes are the ones of
// the reference network; the number format (signed 16-bit Q7.8 values,
// 48-bit accumulators) and the stream word layout are choices of this
// implementation.
package qsd_pkg;

  // ---------------- network shape (reference network) ----------------
  localparam int unsigned N_IQ    = 2;  // layer 1 inputs: I and Q
  localparam int unsigned N_H1    = 8;  // layer 1 neurons
  localparam int unsigned N_H2    = 4;  // layer 2 neurons
  localparam int unsigned N_SCORE = 1;  // layer 3 neurons (score L3)

  // ---------------- number format (implementation choice) ------------
  localparam int unsigned DATA_W = 16;  // activations, weights, biases
  localparam int unsigned FRAC   = 8;   // fractional bits of all values
  localparam int unsigned ACC_W  = 48;  // accumulator width

  // ---------------- streams and memory ----------------
  localparam int unsigned AXIS_W = 32;  // stream and memory word width
  localparam int unsigned ADDR_W = 32;  // byte address width
  localparam int unsigned LEN_W  = 16;  // transfer length in words

  // Weight/bias configuration address: {layer, index}.
  localparam int unsigned CFG_IDX_W = 6;  // largest layer: 8*4+4 = 36 entries
  localparam int unsigned CFG_AW    = CFG_IDX_W + 2;

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Layer selector in the upper two configuration address bits.
  typedef enum logic [1:0] {
    CFG_L1 = 2'd0,
    CFG_L2 = 2'd1,
    CFG_L3 = 2'd2
  } cfg_layer_e;

  // Input stream word: the sample sits sign-extended in the low 16 bits.
  // Output stream word of the kernel.
  typedef struct packed {
    logic [AXIS_W-DATA_W-2:0] zero;   // [31:17] always 0
    logic                     state;  // [16]    1 when L3 > 0
    act_t                     score;  // [15:0]  L3
  } result_word_t;

  // Cycles from the input handshake of a sample to the cycle in which its
  // result is valid at the kernel output: each layer spends one cycle per
  // input element on its vector multiply-accumulate, plus one cycle in
  // which it loads the new input vector and the biases.
  localparam int unsigned KERNEL_LATENCY = N_IQ + N_H1 + N_H2 + 3;

  // Arithmetic shift by FRAC and saturation to the activation range.
  localparam acc_t ACT_MAX = (acc_t'(1) <<< (DATA_W - 1)) - acc_t'(1);
  localparam acc_t ACT_MIN = -(acc_t'(1) <<< (DATA_W - 1));

  function automatic act_t requant(acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > ACT_MAX)      return act_t'(ACT_MAX);
    else if (s < ACT_MIN) return act_t'(ACT_MIN);
    else                  return act_t'(s);
  endfunction

endpackage
