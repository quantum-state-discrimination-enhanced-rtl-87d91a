// s2mm: stream to memory-mapped data mover.
//
// Takes num_words words from a stream and writes them to consecutive
// 32-bit memory words starting at byte address base_addr. It is the data
// mover that returns the discriminator results to off-chip memory.
//
// How it works: a start pulse latches the base address and the length.
// Each stream word is registered and offered on a single-beat memory write
// channel: address (aw*) and data (w*) handshakes, which may complete in
// either order or together, and a write response (b*). The next stream
// word is taken in the cycle in which both handshakes of the current word
// complete, so the mover sustains one word per cycle when memory keeps up.
// done rises when the write response of the last word has arrived and
// stays high until the next start; busy is high in between. The
// single-beat write channel (in the style of AXI4-Lite) is a choice of this
// implementation; the movers are only named by function in the reference
// design. Write responses carry no error code here.
//
// Timing: a start while busy is ignored; s_tready is low while idle.
module s2mm
  import qsd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [LEN_W-1:0]  num_words,
  output logic              busy,
  output logic              done,
  // input stream
  input  logic              s_tvalid,
  output logic              s_tready,
  input  logic [AXIS_W-1:0] s_tdata,
  // memory write channel
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [ADDR_W-1:0] m_awaddr,
  output logic              m_wvalid,
  input  logic              m_wready,
  output logic [AXIS_W-1:0] m_wdata,
  input  logic              m_bvalid,
  output logic              m_bready
);

  logic [LEN_W-1:0]  len, accepted, responded;
  logic [ADDR_W-1:0] addr;
  logic              aw_pend, w_pend;
  logic              aw_fire, w_fire, b_fire, t_fire;
  logic              aw_free, w_free;

  assign m_awvalid = aw_pend;
  assign m_wvalid  = w_pend;
  assign m_bready  = 1'b1;

  assign aw_fire = m_awvalid && m_awready;
  assign w_fire  = m_wvalid && m_wready;
  assign b_fire  = m_bvalid && m_bready;
  assign aw_free = !aw_pend || aw_fire;
  assign w_free  = !w_pend || w_fire;

  assign s_tready = busy && (accepted != len) && aw_free && w_free;
  assign t_fire   = s_tvalid && s_tready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      len       <= '0;
      accepted  <= '0;
      responded <= '0;
      addr      <= '0;
      aw_pend   <= 1'b0;
      w_pend    <= 1'b0;
      m_awaddr  <= '0;
      m_wdata   <= '0;
    end else if (!busy) begin
      if (start) begin
        busy      <= (num_words != 0);
        done      <= (num_words == 0);
        len       <= num_words;
        accepted  <= '0;
        responded <= '0;
        addr      <= base_addr;
      end
    end else begin
      if (aw_fire) aw_pend <= 1'b0;
      if (w_fire)  w_pend  <= 1'b0;
      if (t_fire) begin
        aw_pend  <= 1'b1;
        w_pend   <= 1'b1;
        m_awaddr <= addr;
        m_wdata  <= s_tdata;
        addr     <= addr + ADDR_W'(AXIS_W / 8);
        accepted <= accepted + 1'b1;
      end
      if (b_fire) begin
        responded <= responded + 1'b1;
        if (responded + 1'b1 == len) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Write address and data are held until accepted.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata));
  a_b_expected: assert property (@(posedge clk) disable iff (!rst_n)
    b_fire |-> busy && responded != accepted);

endmodule
