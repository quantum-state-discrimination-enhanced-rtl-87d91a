// mm2s: memory-mapped to stream data mover.
//
// Reads num_words consecutive 32-bit words from memory, starting at byte
// address base_addr, and sends them in order on a stream. It is the data
// mover that feeds the discriminator kernel with readout samples from
// off-chip memory.
//
// How it works: a start pulse latches the base address and the length.
// Reads are issued on a single-beat memory read channel (address
// handshake ar*, data handshake r*, in the style of AXI4-Lite) at
// consecutive word addresses. Returned words go into a FIFO of FIFO_DEPTH
// entries, whose head drives the stream. A read is only issued when the
// FIFO has room for it counting all reads still in flight, so r_ready can
// stay high and several reads overlap the memory latency. done rises when
// the last word has left on the stream and stays high until the next
// start; busy is high in between. The single-beat read channel, the FIFO
// and its depth are choices of this implementation; the movers are only
// named by function in the reference design.
//
// Timing: with a memory that answers every read after L cycles the mover
// sustains one word per cycle once L + 2 <= FIFO_DEPTH; a start while busy is
// ignored.
module mm2s
  import qsd_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [LEN_W-1:0]  num_words,
  output logic              busy,
  output logic              done,
  // memory read channel
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [ADDR_W-1:0] m_araddr,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [AXIS_W-1:0] m_rdata,
  // output stream
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic [AXIS_W-1:0] m_tdata
);

  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [LEN_W-1:0]  len, issued, received, sent;
  logic [ADDR_W-1:0] addr;
  logic              fifo_empty, fifo_full;
  logic [CW-1:0]     fifo_count;
  logic [LEN_W-1:0]  in_flight;
  logic              ar_fire, r_fire, t_fire;

  assign in_flight = issued - received;
  assign m_arvalid = busy && (issued != len) &&
                     ((LEN_W + 1)'(fifo_count) + (LEN_W + 1)'(in_flight) < (LEN_W + 1)'(FIFO_DEPTH));
  assign m_araddr  = addr;
  assign m_rready  = 1'b1;
  assign m_tvalid  = !fifo_empty;

  assign ar_fire = m_arvalid && m_arready;
  assign r_fire  = m_rvalid && m_rready;
  assign t_fire  = m_tvalid && m_tready;

  sync_fifo #(.WIDTH(AXIS_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push(r_fire), .wr_data(m_rdata),
    .pop(t_fire), .rd_data(m_tdata),
    .empty(fifo_empty), .full(fifo_full), .count(fifo_count)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      len      <= '0;
      issued   <= '0;
      received <= '0;
      sent     <= '0;
      addr     <= '0;
    end else if (!busy) begin
      if (start) begin
        busy     <= (num_words != 0);
        done     <= (num_words == 0);
        len      <= num_words;
        issued   <= '0;
        received <= '0;
        sent     <= '0;
        addr     <= base_addr;
      end
    end else begin
      if (ar_fire) begin
        issued <= issued + 1'b1;
        addr   <= addr + ADDR_W'(AXIS_W / 8);
      end
      if (r_fire) received <= received + 1'b1;
      if (t_fire) begin
        sent <= sent + 1'b1;
        if (sent + 1'b1 == len) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Read address must be held until accepted; no data beyond what was asked.
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr));
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    r_fire |-> !fifo_full);

endmodule
