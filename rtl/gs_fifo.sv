// gs_fifo: synchronous first-word-fall-through FIFO joining two dataflow tasks.
//
// Each pair of tasks inside a processing element is joined by one of these so
// that the producer can run ahead of the consumer, as the stream FIFOs of the
// original high-level-synthesis dataflow design do. Storage is a plain array
// with a write and a read pointer; the head entry is visible on out_data while
// out_valid is high. A push happens when in_valid && in_ready, a pop when
// out_valid && out_ready; both may happen in the same cycle. in_ready depends
// only on the fill level, so no combinational path runs from out_ready to
// in_ready. Depth and width are this design's
// choice: the paper gives neither.
module gs_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,     // synchronous flush
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign out_valid = (count != '0);
  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else if (clear) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // The fill level never passes the depth.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= DEPTH[$clog2(DEPTH+1)-1:0]);

endmodule
