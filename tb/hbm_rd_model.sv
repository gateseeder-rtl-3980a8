// hbm_rd_model: behavioural model of one HBM memory section seen through a
// read-only memory channel (the single-beat AXI read subset used by the
// kernel). Not synthesizable; it stands in for the HBM stack, its controller
// and the AXI switch, which are vendor parts.
//
// Storage is a sparse associative array of DW-bit words (unwritten words read
// as 0), filled by the testbench through hierarchical access to `mem`.
// A request is accepted when ar_valid && ar_ready; its word is returned in
// order LATENCY cycles later or after, held on r_data until r_ready. With
// stall_pct (initially STALL_PCT) > 0, ar_ready and r_valid are randomly withheld to exercise the
// kernel's backpressure; `stall_cycles` counts the cycles a request waited.
module hbm_rd_model #(
  parameter int unsigned DW        = 64,
  parameter int unsigned AW        = 40,
  parameter int unsigned LATENCY   = 8,
  parameter int unsigned MAX_OUT   = 32,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic          clk,
  input  logic          ar_valid,
  output logic          ar_ready,
  input  logic [AW-1:0] ar_addr,
  output logic          r_valid,
  input  logic          r_ready,
  output logic [DW-1:0] r_data
);
  logic [DW-1:0] mem [logic [AW-1:0]];
  logic [AW-1:0] q_addr [$];
  longint unsigned q_due [$];
  longint unsigned now = 0;
  int unsigned stall_cycles = 0;
  int unsigned stall_pct = STALL_PCT;  // may be changed by the testbench
  int unsigned nreq = 0;

  function automatic logic [DW-1:0] peek(input logic [AW-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  // All outputs are registered: each clock edge first completes the
  // handshakes seen in the past cycle, then computes the next cycle's outputs.
  initial begin
    ar_ready = 1'b0;
    r_valid  = 1'b0;
    r_data   = '0;
  end

  always @(posedge clk) begin
    bit g_ar, g_r;
    if (r_valid && r_ready) begin
      void'(q_addr.pop_front());
      void'(q_due.pop_front());
    end
    if (ar_valid && ar_ready) begin
      q_addr.push_back(ar_addr);
      q_due.push_back(now + LATENCY);
      nreq++;
    end
    if (ar_valid && !ar_ready) stall_cycles++;
    now++;
    g_ar = (stall_pct == 0) || (($urandom % 100) >= stall_pct);
    g_r  = (stall_pct == 0) || (($urandom % 100) >= stall_pct);
    ar_ready <= g_ar && (q_addr.size() < MAX_OUT);
    r_valid  <= g_r && (q_addr.size() != 0) && (q_due[0] <= now);
    r_data   <= (q_addr.size() != 0) ? peek(q_addr[0]) : '0;
  end
endmodule
