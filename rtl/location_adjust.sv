// location_adjust: Location delta calculation and anchor write-back.
//
// For each location record from key_querying the module forms an anchor:
// delta = L_ref - L_read (32-bit two's complement), the strand bit
// ref_str XOR read_str (1 when read and reference minimizers were taken from
// opposite strands), the read location, and writes it as one 64-bit word
// (gs_pkg::anchor_t) to the next address of the PE's anchor buffer,
// anc_base, anc_base+1, ... An end-of-read marker is written as a word with
// only the eor bit set, so the host can split the anchor list
// by read. The end-of-batch marker is not written; it raises done, and
// nb_words then holds the number of words written.
//
// One record per cycle: the delta is computed in the same cycle the record
// is accepted and the write request is registered, so the step costs no
// throughput.
// Write channel: single-beat address+data handshake (w_valid && w_ready).
// From the paper: delta as the reference location minus the read location,
// computed on the FPGA, anchors stored in a per-PE buffer in the HBM. This
// design's choices: the anchor word layout, the read-boundary markers, and
// that delta is formed the same way on both strands, as the paper writes it.
module location_adjust
  import gs_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ADDR_W-1:0]    anc_base,
  // location stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [LOC_W-1:0]     in_ref_loc,
  input  logic                 in_ref_str,
  input  logic [LOC_W-1:0]     in_rd_loc,
  input  logic                 in_rd_str,
  input  logic                 in_eor,
  input  logic                 in_last,
  // anchor-buffer write channel
  output logic                 w_valid,
  input  logic                 w_ready,
  output logic [ADDR_W-1:0]    w_addr,
  output logic [ANCHOR_DW-1:0] w_data,
  // status
  output logic                 done,
  output logic [31:0]          nb_words
);
  anchor_t a;

  always_comb begin
    a        = '0;
    a.eor    = in_eor;
    if (!in_eor) begin
      a.rd_loc = in_rd_loc[RDLOC_W-1:0];
      a.str   = in_ref_str ^ in_rd_str;
      a.delta = in_ref_loc - in_rd_loc;
    end
  end

  assign in_ready = !w_valid || w_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_valid  <= 1'b0;
      w_addr   <= '0;
      w_data   <= '0;
      done     <= 1'b0;
      nb_words <= '0;
    end else if (start) begin
      w_valid  <= 1'b0;
      done     <= 1'b0;
      nb_words <= '0;
    end else begin
      if (w_valid && w_ready) w_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_last) begin
          done <= 1'b1;
        end else begin
          w_valid  <= 1'b1;
          w_addr   <= anc_base + ADDR_W'(nb_words);
          w_data   <= a;
          nb_words <= nb_words + 1;
        end
      end
    end
  end

  // A write request holds its address and data until it is taken.
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n || start)
    (w_valid && !w_ready) |=> (w_valid && $stable(w_addr) && $stable(w_data)));

endmodule
