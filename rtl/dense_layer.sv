// dense_layer: one fully connected layer of the discriminator network.
//
// Computes out[k] = act(B[k] + sum_i x[i] * W[i][k]) for k = 0..N_OUT-1,
// where act is ReLU when RELU = 1 and the identity otherwise. This is the
// per-layer computation of the reference network (weighted sums plus
// biases, ReLU after the hidden layers, none after the output layer).
//
// How it works: the layer is a vector unit of N_OUT multiply-accumulate
// lanes. When an input vector is accepted, each lane's accumulator is
// loaded with its bias (shifted to the product scale). Then, one cycle per
// input element, x[i] is broadcast to all lanes and multiplied by the
// weight row W[i][0..N_OUT-1]; every lane adds its product. This mirrors the
// "input element times weight vector" vector mapping of the forward pass.
// The accumulators are 48 bits wide and cannot overflow for these sizes.
// The result is ReLU'd, shifted right by FRAC (arithmetic, truncating) and
// saturated to 16 bits. The number format and the truncating rounding are
// choices of this implementation.
//
// Interface: valid/ready handshake on both sides; in_ready is high only
// while the layer is idle, so a layer holds one vector at a time.
// Weights and biases are a register file written through cfg_*:
// address i*N_OUT+k holds W[i][k], address N_IN*N_OUT+k holds B[k]; all are
// cleared by reset. Writes while a vector is being processed take effect at
// once, so the host should load them before streaming samples.
//
// Timing: input accepted in cycle c, result valid from cycle c+N_IN+1
// until out_ready is seen; the next input is accepted at the earliest in
// the cycle after the result leaves.
module dense_layer
  import qsd_pkg::*;
#(
  parameter int unsigned N_IN  = 2,
  parameter int unsigned N_OUT = 8,
  parameter bit          RELU  = 1'b1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // weight / bias configuration
  input  logic                           cfg_we,
  input  logic [CFG_IDX_W-1:0]           cfg_addr,
  input  act_t                           cfg_data,
  // input vector
  input  logic                           in_valid,
  output logic                           in_ready,
  input  logic [N_IN-1:0][DATA_W-1:0]    in_vec,
  // output vector
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic [N_OUT-1:0][DATA_W-1:0]   out_vec
);

  localparam int unsigned STEP_W = (N_IN > 1) ? $clog2(N_IN) : 1;

  typedef enum logic [1:0] {
    S_IDLE = 2'd0,
    S_MAC  = 2'd1,
    S_OUT  = 2'd2
  } state_e;

  state_e              state;
  logic [STEP_W-1:0]   step;
  act_t                x   [N_IN];
  act_t                w   [N_IN][N_OUT];
  act_t                b   [N_OUT];
  acc_t                acc [N_OUT];

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);

  // ---------------- weight and bias register file ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_IN; i++)
        for (int k = 0; k < N_OUT; k++) w[i][k] <= '0;
      for (int k = 0; k < N_OUT; k++) b[k] <= '0;
    end else if (cfg_we) begin
      for (int i = 0; i < N_IN; i++)
        for (int k = 0; k < N_OUT; k++)
          if (int'(cfg_addr) == i * N_OUT + k) w[i][k] <= cfg_data;
      for (int k = 0; k < N_OUT; k++)
        if (int'(cfg_addr) == N_IN * N_OUT + k) b[k] <= cfg_data;
    end
  end

  // ---------------- control and vector MAC ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      step  <= '0;
      for (int i = 0; i < N_IN; i++) x[i] <= '0;
      for (int k = 0; k < N_OUT; k++) acc[k] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          for (int i = 0; i < N_IN; i++) x[i] <= act_t'(in_vec[i]);
          for (int k = 0; k < N_OUT; k++) acc[k] <= acc_t'(b[k]) <<< FRAC;
          step  <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          for (int k = 0; k < N_OUT; k++)
            acc[k] <= acc[k] + acc_t'(x[step]) * acc_t'(w[step][k]);
          if (int'(step) == N_IN - 1) state <= S_OUT;
          else                        step  <= step + 1'b1;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- activation and requantisation ----------------
  always_comb begin
    for (int k = 0; k < N_OUT; k++) begin
      if (RELU && acc[k] < 0) out_vec[k] = '0;
      else                    out_vec[k] = requant(acc[k]);
    end
  end

  // A presented result must stay until it is taken.
  property p_out_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_vec);
  endproperty
  a_out_hold: assert property (p_out_hold);

endmodule
