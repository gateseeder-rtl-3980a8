// hbm_wr_model: behavioural model of one HBM memory section seen through a
// write-only memory channel (address and data in one single-beat handshake).
// Not synthesizable; it stands in for the HBM stack, its controller and the
// AXI switch. A word is stored when w_valid && w_ready; with stall_pct (initially STALL_PCT) > 0
// w_ready is randomly withheld and `stall_cycles` counts the cycles a write
// waited. The testbench reads `mem` and `nwrites` hierarchically.
module hbm_wr_model #(
  parameter int unsigned DW        = 64,
  parameter int unsigned AW        = 40,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic          clk,
  input  logic          w_valid,
  output logic          w_ready,
  input  logic [AW-1:0] w_addr,
  input  logic [DW-1:0] w_data
);
  logic [DW-1:0] mem [logic [AW-1:0]];
  int unsigned stall_cycles = 0;
  int unsigned stall_pct = STALL_PCT;  // may be changed by the testbench
  int unsigned nwrites = 0;
  initial w_ready = 1'b0;

  always @(posedge clk) begin
    if (w_valid && w_ready) begin
      mem[w_addr] = w_data;
      nwrites++;
    end
    if (w_valid && !w_ready) stall_cycles++;
    w_ready <= (stall_pct == 0) || (($urandom % 100) >= stall_pct);
  end
endmodule
