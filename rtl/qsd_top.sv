// qsd_top: streaming qubit state discrimination pipeline.
//
// Classifies a buffer of readout samples held in off-chip memory and
// writes one result word per sample back to memory:
//
//   memory --read 0--> mm2s (I) --stream--> +-----------+
//                                            | nn_kernel |--stream--> s2mm --write--> memory
//   memory --read 1--> mm2s (Q) --stream--> +-----------+
//
// The I components of the samples are one array of 32-bit words at
// i_base, the Q components another at q_base; result k lands at
// out_base + 4*k (qsd_pkg::result_word_t: score L3 in [15:0], state in
// [16]). This follows the reference streaming pipeline: memory-to-stream
// and stream-to-memory movers in programmable logic around a kernel with
// two input streams and one output stream. The memory ports are where the
// on-chip network to DDR would connect; the configuration port and the
// start/done control are where the host processor would connect. Both
// are brought out as plain signals.
//
// Operation: the host first writes the weights and biases through cfg_*
// (address {layer, index}, see nn_kernel), once. For each iteration it
// sets the three base addresses and num_samples and pulses start; the two
// readers and the writer start together and done rises when the last
// result is in memory (busy is high until then). state_valid/state_bit
// show each result as the writer takes it, for logic in the fabric that
// reacts to a measurement without going through memory. Starting all
// three movers from one pulse, and the state tap, are choices of this
// implementation.
//
// Timing: a sample reaches the kernel a few cycles after its read returns;
// the kernel adds 17 cycles of latency and accepts one sample every 10
// cycles, which sets the throughput of the whole pipeline.
module qsd_top
  import qsd_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // weight and bias configuration (host)
  input  logic                    cfg_we,
  input  logic [CFG_AW-1:0]       cfg_addr,
  input  logic [DATA_W-1:0]       cfg_data,
  // iteration control (host)
  input  logic                    start,
  input  logic [ADDR_W-1:0]       i_base,
  input  logic [ADDR_W-1:0]       q_base,
  input  logic [ADDR_W-1:0]       out_base,
  input  logic [LEN_W-1:0]        num_samples,
  output logic                    busy,
  output logic                    done,
  // memory read ports: [0] I samples, [1] Q samples
  output logic [1:0]              m_arvalid,
  input  logic [1:0]              m_arready,
  output logic [1:0][ADDR_W-1:0]  m_araddr,
  input  logic [1:0]              m_rvalid,
  output logic [1:0]              m_rready,
  input  logic [1:0][AXIS_W-1:0]  m_rdata,
  // memory write port: results
  output logic                    m_awvalid,
  input  logic                    m_awready,
  output logic [ADDR_W-1:0]       m_awaddr,
  output logic                    m_wvalid,
  input  logic                    m_wready,
  output logic [AXIS_W-1:0]       m_wdata,
  input  logic                    m_bvalid,
  output logic                    m_bready,
  // result tap
  output logic                    state_valid,
  output logic                    state_bit
);

  logic              i_tvalid, i_tready, q_tvalid, q_tready, o_tvalid, o_tready;
  logic [AXIS_W-1:0] i_tdata, q_tdata, o_tdata;
  logic              busy_i, busy_q, busy_o, done_i, done_q, done_o;
  result_word_t      res;
  logic              go;

  // A start while any mover is still busy is ignored by all three.
  assign go = start && !busy;

  mm2s u_mm2s_i (
    .clk, .rst_n,
    .start(go), .base_addr(i_base), .num_words(num_samples), .busy(busy_i), .done(done_i),
    .m_arvalid(m_arvalid[0]), .m_arready(m_arready[0]), .m_araddr(m_araddr[0]),
    .m_rvalid(m_rvalid[0]), .m_rready(m_rready[0]), .m_rdata(m_rdata[0]),
    .m_tvalid(i_tvalid), .m_tready(i_tready), .m_tdata(i_tdata)
  );

  mm2s u_mm2s_q (
    .clk, .rst_n,
    .start(go), .base_addr(q_base), .num_words(num_samples), .busy(busy_q), .done(done_q),
    .m_arvalid(m_arvalid[1]), .m_arready(m_arready[1]), .m_araddr(m_araddr[1]),
    .m_rvalid(m_rvalid[1]), .m_rready(m_rready[1]), .m_rdata(m_rdata[1]),
    .m_tvalid(q_tvalid), .m_tready(q_tready), .m_tdata(q_tdata)
  );

  nn_kernel u_kernel (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_data(act_t'(cfg_data)),
    .s_i_tvalid(i_tvalid), .s_i_tready(i_tready), .s_i_tdata(i_tdata),
    .s_q_tvalid(q_tvalid), .s_q_tready(q_tready), .s_q_tdata(q_tdata),
    .m_tvalid(o_tvalid), .m_tready(o_tready), .m_tdata(o_tdata)
  );

  s2mm u_s2mm (
    .clk, .rst_n,
    .start(go), .base_addr(out_base), .num_words(num_samples), .busy(busy_o), .done(done_o),
    .s_tvalid(o_tvalid), .s_tready(o_tready), .s_tdata(o_tdata),
    .m_awvalid, .m_awready, .m_awaddr,
    .m_wvalid, .m_wready, .m_wdata,
    .m_bvalid, .m_bready
  );

  assign busy = busy_i || busy_q || busy_o;
  assign done = done_i && done_q && done_o;

  assign res         = result_word_t'(o_tdata);
  assign state_valid = o_tvalid && o_tready;
  assign state_bit   = res.state;

endmodule
