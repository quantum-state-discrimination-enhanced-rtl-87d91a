// mem_model: behavioural model of the off-chip memory seen through the
// on-chip network, for the testbenches only (not synthesizable).
//
// One word-addressed store (32-bit words, byte addresses, indexed by
// address / 4) shared by NR single-beat read ports and one single-beat
// write port, with the handshakes of mm2s and s2mm. Each read is answered
// in order after a random latency of 1..MAX_LAT cycles; address and
// write-data ready signals drop at random (READY_PCT percent high) to
// create back-pressure (both can be changed while running through
// ready_pct and max_lat; wr_ready_pct, when set to 0..100, gives the
// write port its own ready percentage); a write response follows each completed write
// after 1..MAX_LAT cycles. Words never written read as 0. The testbench
// fills and inspects the store through the poke and peek functions.
module mem_model #(
  parameter int NR        = 1,
  parameter int MAX_LAT   = 4,
  parameter int READY_PCT = 70
) (
  input  logic                 clk,
  // read ports
  input  logic [NR-1:0]        arvalid,
  output logic [NR-1:0]        arready,
  input  logic [NR-1:0][31:0]  araddr,
  output logic [NR-1:0]        rvalid,
  input  logic [NR-1:0]        rready,
  output logic [NR-1:0][31:0]  rdata,
  // write port
  input  logic                 awvalid,
  output logic                 awready,
  input  logic [31:0]          awaddr,
  input  logic                 wvalid,
  output logic                 wready,
  input  logic [31:0]          wdata,
  output logic                 bvalid,
  input  logic                 bready
);

  logic [31:0] store [int];
  int ready_pct = READY_PCT;  // may be changed by the testbench
  int wr_ready_pct = -1;       // -1: writes use ready_pct as well
  int max_lat   = MAX_LAT;
  int cycle = 0;
  int n_reads = 0, n_writes = 0, n_ar_stall = 0, n_aw_stall = 0;

  typedef struct { int addr; int due; } req_t;
  req_t rq [NR][$];
  int   last_due [NR];
  int   awq [$];
  logic [31:0] wq [$];
  int   bq [$];
  int   last_b = 0;

  function automatic void poke(int byte_addr, logic [31:0] v);
    store[byte_addr / 4] = v;
  endfunction
  function automatic logic [31:0] peek(int byte_addr);
    return store.exists(byte_addr / 4) ? store[byte_addr / 4] : 32'd0;
  endfunction

  function automatic int wr_pct();
    return (wr_ready_pct < 0) ? ready_pct : wr_ready_pct;
  endfunction

  function automatic int lat();
    return int'($urandom_range(max_lat, 1));
  endfunction

  initial begin
    arready = '0; rvalid = '0; rdata = '0;
    awready = 1'b0; wready = 1'b0; bvalid = 1'b0;
    for (int p = 0; p < NR; p++) last_due[p] = 0;
  end

  always @(posedge clk) begin
    cycle++;
    for (int p = 0; p < NR; p++) begin
      req_t r;
      if (rvalid[p] && rready[p]) void'(rq[p].pop_front());
      if (arvalid[p] && !arready[p]) n_ar_stall++;
      if (arvalid[p] && arready[p]) begin
        r.addr = int'(araddr[p]);
        r.due  = cycle + lat();
        if (r.due <= last_due[p]) r.due = last_due[p] + 1;
        last_due[p] = r.due;
        rq[p].push_back(r);
        n_reads++;
      end
      arready[p] <= (int'($urandom_range(99, 0)) < ready_pct);
      if (rq[p].size() != 0 && rq[p][0].due <= cycle) begin
        rvalid[p] <= 1'b1;
        rdata[p]  <= peek(rq[p][0].addr);
      end else begin
        rvalid[p] <= 1'b0;
      end
    end

    if (bvalid && bready) void'(bq.pop_front());
    if (awvalid && !awready) n_aw_stall++;
    if (awvalid && awready) awq.push_back(int'(awaddr));
    if (wvalid && wready) wq.push_back(wdata);
    while (awq.size() != 0 && wq.size() != 0) begin
      int d;
      poke(awq.pop_front(), wq.pop_front());
      n_writes++;
      d = cycle + lat();
      if (d <= last_b) d = last_b + 1;
      last_b = d;
      bq.push_back(d);
    end
    awready <= (int'($urandom_range(99, 0)) < wr_pct());
    wready  <= (int'($urandom_range(99, 0)) < wr_pct());
    bvalid  <= (bq.size() != 0 && bq[0] <= cycle);
  end

endmodule
