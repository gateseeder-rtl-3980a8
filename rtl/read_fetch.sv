// read_fetch: streams the bases of one read batch out of its memory section.
//
// The batch is a run of 4-bit base codes (gs_pkg::base_e) packed into
// RD_DW-bit words starting at word address rd_base; nb_bases counts every
// code including the E separators. After a start pulse the module issues one
// word read per cycle on its read channel while it has room for the answer,
// keeps the returned words in a small FIFO and hands out one base per cycle on
// a valid/ready stream. When all nb_bases codes have gone out it sends one
// more token with out_last set (its base is meaningless) and raises done.
//
// Read channel: a single-beat subset of an AXI read channel. A request is
// taken when ar_valid && ar_ready; its word comes back, in order, when
// r_valid && r_ready. Requests to consecutive addresses let the memory side
// merge them into bursts. The word packing and this channel subset are this
// design's choices; the paper says only that the batch is a stream of reads
// separated by E held in one memory section.
module read_fetch
  import gs_pkg::*;
#(
  parameter int unsigned RD_DW     = 256,  // read-channel word width
  parameter int unsigned PREFETCH  = 4     // words buffered ahead
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] rd_base,
  input  logic [31:0]       nb_bases,
  output logic              done,
  // read channel
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [RD_DW-1:0]  r_data,
  // base stream
  output logic              out_valid,
  input  logic              out_ready,
  output base_e             out_base,
  output logic              out_last
);
  localparam int unsigned BPW  = RD_DW / 4;           // bases per word
  localparam int unsigned BW   = $clog2(BPW);
  localparam int unsigned CW   = $clog2(PREFETCH + 1);

  logic        active;
  logic [31:0] words_total, words_req, bases_out;
  logic [ADDR_W-1:0] next_addr;
  logic [BW-1:0]     sub;          // base index inside the head word
  logic [CW:0]       inflight;     // requested and not yet popped
  logic              last_sent;

  logic              wf_valid, wf_pop;
  logic [RD_DW-1:0]  wf_data;
  logic [CW-1:0]     wf_count;

  gs_fifo #(.WIDTH(RD_DW), .DEPTH(PREFETCH)) u_words (
    .clk, .rst_n, .clear(start),
    .in_valid(r_valid), .in_ready(r_ready), .in_data(r_data),
    .out_valid(wf_valid), .out_ready(wf_pop), .out_data(wf_data),
    .count(wf_count)
  );

  assign ar_valid = active && (words_req != words_total) &&
                    (inflight < (CW+1)'(PREFETCH));
  assign ar_addr  = next_addr;

  logic all_bases_out;
  assign all_bases_out = (bases_out == nb_bases);

  always_comb begin
    out_valid = 1'b0;
    out_last  = 1'b0;
    out_base  = base_e'(wf_data[sub*4 +: 4]);
    if (active && !all_bases_out) begin
      out_valid = wf_valid;
    end else if (active && all_bases_out && !last_sent) begin
      out_valid = 1'b1;
      out_last  = 1'b1;
    end
  end

  // Pop the head word after its last base, or after the batch's last base.
  assign wf_pop = out_valid && out_ready && !out_last &&
                  ((sub == BW'(BPW - 1)) || (bases_out + 1 == nb_bases));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      done        <= 1'b0;
      words_total <= '0;
      words_req   <= '0;
      bases_out   <= '0;
      next_addr   <= '0;
      sub         <= '0;
      inflight    <= '0;
      last_sent   <= 1'b0;
    end else if (start) begin
      active      <= 1'b1;
      done        <= 1'b0;
      words_total <= (nb_bases + BPW - 1) / BPW;
      words_req   <= '0;
      bases_out   <= '0;
      next_addr   <= rd_base;
      sub         <= '0;
      inflight    <= '0;
      last_sent   <= 1'b0;
    end else if (active) begin
      if (ar_valid && ar_ready) begin
        words_req <= words_req + 1;
        next_addr <= next_addr + 1'b1;
      end
      inflight <= inflight + (CW+1)'(ar_valid && ar_ready) - (CW+1)'(wf_pop);
      if (out_valid && out_ready) begin
        if (out_last) begin
          last_sent <= 1'b1;
          active    <= 1'b0;
          done      <= 1'b1;
        end else begin
          bases_out <= bases_out + 1;
          sub       <= wf_pop ? '0 : sub + 1'b1;
        end
      end
    end
  end

endmodule
