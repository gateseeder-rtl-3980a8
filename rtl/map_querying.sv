// map_querying: first step of index querying, seed -> [start, end) of its
// location list in the key array.
//
// The map array is indexed by the seed's hash. Entry h holds the key-array
// index of the first location of hash h and entry h+1 the index just past
// its last location, so the locations of h are key[map[h] .. map[h+1]-1]. For
// each seed the module issues two single-word reads, map_base+h and
// map_base+h+1, on consecutive cycles: a new seed can start every second
// cycle (initiation interval 2, as the paper states for this task). The seed's
// read location and strand wait in a metadata FIFO while the reads are in
// flight, so many seeds can be outstanding; responses return in order.
// End-of-read and end-of-batch markers pass through the metadata FIFO without
// a memory access and keep their place in the stream.
//
// Output: one record per seed (or marker) in a register with valid/ready:
// ptr_start, ptr_end, the seed's read location and strand, eor and last.
// From the paper: two map accesses per seed to get the start and end
// pointers, interval 2, one dedicated memory channel. This design's choices:
// the pointer layout (end pointer = next entry's start), 32-bit pointers,
// the metadata FIFO depth.
module map_querying
  import gs_pkg::*;
#(
  parameter int unsigned K          = 15,
  parameter int unsigned META_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] map_base,
  // seed stream
  input  logic              seed_valid,
  output logic              seed_ready,
  input  logic [2*K-1:0]    seed_hash,
  input  logic [LOC_W-1:0]  seed_loc,
  input  logic              seed_str,
  input  logic              seed_eor,
  input  logic              seed_last,
  // map-array read channel
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [PTR_W-1:0]  r_data,
  // pointer stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [PTR_W-1:0]  out_start,
  output logic [PTR_W-1:0]  out_end,
  output logic [LOC_W-1:0]  out_loc,
  output logic              out_str,
  output logic              out_eor,
  output logic              out_last
);
  typedef struct packed {
    logic             marker;   // no memory access for this entry
    logic             eor;
    logic             last;
    logic             str;
    logic [LOC_W-1:0] loc;
  } meta_t;

  // ------------------------------------------------------------ request side
  logic  phase;                 // 0: read map[h] next, 1: read map[h+1] next
  logic  m_in_valid, m_in_ready, m_out_valid, m_out_ready;
  meta_t m_in, m_out;
  logic  is_marker;

  assign is_marker = seed_eor || seed_last;
  assign m_in      = '{marker: is_marker, eor: seed_eor, last: seed_last,
                       str: seed_str, loc: seed_loc};

  // Markers enter the metadata FIFO directly; a seed enters it together with
  // its first map read.
  always_comb begin
    ar_valid   = 1'b0;
    m_in_valid = 1'b0;
    seed_ready = 1'b0;
    ar_addr    = map_base + ADDR_W'(seed_hash) + ADDR_W'(phase);
    if (seed_valid) begin
      if (is_marker) begin
        m_in_valid = 1'b1;
        seed_ready = m_in_ready;
      end else if (!phase) begin
        ar_valid   = m_in_ready;
        m_in_valid = ar_ready;
      end else begin
        ar_valid   = 1'b1;
        seed_ready = ar_ready;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                 phase <= 1'b0;
    else if (start)                             phase <= 1'b0;
    else if (seed_valid && !is_marker && ar_valid && ar_ready) phase <= !phase;
  end

  logic [$clog2(META_DEPTH+1)-1:0] m_count;
  gs_fifo #(.WIDTH($bits(meta_t)), .DEPTH(META_DEPTH)) u_meta (
    .clk, .rst_n, .clear(start),
    .in_valid(m_in_valid), .in_ready(m_in_ready), .in_data(m_in),
    .out_valid(m_out_valid), .out_ready(m_out_ready), .out_data(m_out),
    .count(m_count)
  );

  // ----------------------------------------------------------- response side
  logic             got_first;
  logic [PTR_W-1:0] first_ptr;
  logic             free;

  assign free        = !out_valid || out_ready;
  assign r_ready     = m_out_valid && !m_out.marker && (!got_first || free);
  assign m_out_ready = free && m_out_valid &&
                       (m_out.marker || (got_first && r_valid));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_start <= '0;
      out_end   <= '0;
      out_loc   <= '0;
      out_str   <= 1'b0;
      out_eor   <= 1'b0;
      out_last  <= 1'b0;
      got_first <= 1'b0;
      first_ptr <= '0;
    end else if (start) begin
      out_valid <= 1'b0;
      got_first <= 1'b0;
    end else begin
      if (r_valid && r_ready && !got_first) begin
        first_ptr <= r_data;
        got_first <= 1'b1;
      end
      if (free) begin
        out_valid <= 1'b0;
        if (m_out_ready) begin
          out_valid <= 1'b1;
          out_start <= m_out.marker ? '0 : first_ptr;
          out_end   <= m_out.marker ? '0 : r_data;
          out_loc   <= m_out.loc;
          out_str   <= m_out.str;
          out_eor   <= m_out.eor;
          out_last  <= m_out.last;
          if (!m_out.marker) got_first <= 1'b0;
        end
      end
    end
  end

endmodule
