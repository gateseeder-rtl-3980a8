// key_querying: second step of index querying, [start, end) -> locations.
//
// For each pointer record from map_querying the module reads the key-array
// entries key_base+start .. key_base+end-1, one request per cycle on
// consecutive addresses (so the memory side can serve them as a burst), and
// for each returned entry emits one record that pairs the reference location
// and strand of the entry with the read location and strand of the seed. An
// empty list (start == end, a seed absent from the index or removed from it
// for occurring more than max_occ times) costs no memory access and emits
// nothing. The seed's fields and its entry count wait in a metadata FIFO
// while the reads are in flight. End-of-read and end-of-batch markers pass
// through in order.
//
// Throughput: one location per cycle when the memory keeps up; a seed with n
// locations occupies the request side for n cycles. `empty_lists` counts the
// seeds whose list was empty.
// From the paper: consecutive key-array reads between the two pointers on a
// memory channel of its own, and pairing each location with the seed's read
// location to form an anchor. This design's choices: the key entry layout
// (gs_pkg::key_entry_t) and single-word requests.
module key_querying
  import gs_pkg::*;
#(
  parameter int unsigned META_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] key_base,
  // pointer stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [PTR_W-1:0]  in_start,
  input  logic [PTR_W-1:0]  in_end,
  input  logic [LOC_W-1:0]  in_loc,
  input  logic              in_str,
  input  logic              in_eor,
  input  logic              in_last,
  // key-array read channel
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [KEY_DW-1:0] r_data,
  // location stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [LOC_W-1:0]  out_ref_loc,
  output logic              out_ref_str,
  output logic [LOC_W-1:0]  out_rd_loc,
  output logic              out_rd_str,
  output logic              out_eor,
  output logic              out_last,
  output logic [31:0]       empty_lists
);
  typedef struct packed {
    logic             marker;
    logic             eor;
    logic             last;
    logic             str;
    logic [LOC_W-1:0] loc;
    logic [PTR_W-1:0] cnt;      // number of key entries requested
  } meta_t;

  // ------------------------------------------------------------ request side
  logic             busy;       // a list is being requested
  logic [PTR_W-1:0] req_ptr;
  logic             is_marker, is_empty;
  logic             m_in_valid, m_in_ready, m_out_valid, m_out_ready;
  meta_t            m_in, m_out;

  assign is_marker = in_eor || in_last;
  assign is_empty  = !is_marker && (in_end <= in_start);
  assign m_in      = '{marker: is_marker, eor: in_eor, last: in_last, str: in_str,
                       loc: in_loc,
                       cnt: (is_marker || is_empty) ? '0 : in_end - in_start};

  always_comb begin
    ar_valid   = 1'b0;
    ar_addr    = key_base + ADDR_W'(busy ? req_ptr : in_start);
    m_in_valid = 1'b0;
    in_ready   = 1'b0;
    if (in_valid) begin
      if (is_marker || is_empty) begin
        m_in_valid = 1'b1;
        in_ready   = m_in_ready;
      end else if (!busy) begin
        ar_valid   = m_in_ready;
        m_in_valid = ar_ready;
        in_ready   = ar_ready && m_in_ready && (in_end - in_start == 1);
      end else begin
        ar_valid   = 1'b1;
        in_ready   = ar_ready && (req_ptr + 1 == in_end);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      req_ptr     <= '0;
      empty_lists <= '0;
    end else if (start) begin
      busy        <= 1'b0;
      empty_lists <= '0;
    end else begin
      if (ar_valid && ar_ready) begin
        req_ptr <= (busy ? req_ptr : in_start) + 1;
        busy    <= !in_ready;
      end
      if (in_valid && in_ready && is_empty) empty_lists <= empty_lists + 1;
    end
  end

  logic [$clog2(META_DEPTH+1)-1:0] m_count;
  gs_fifo #(.WIDTH($bits(meta_t)), .DEPTH(META_DEPTH)) u_meta (
    .clk, .rst_n, .clear(start),
    .in_valid(m_in_valid), .in_ready(m_in_ready), .in_data(m_in),
    .out_valid(m_out_valid), .out_ready(m_out_ready), .out_data(m_out),
    .count(m_count)
  );

  // ----------------------------------------------------------- response side
  logic [PTR_W-1:0] got;        // entries of the head list received so far
  logic             free;
  key_entry_t       entry;

  assign free    = !out_valid || out_ready;
  assign entry   = key_entry_t'(r_data);
  assign r_ready = free && m_out_valid && !m_out.marker && (m_out.cnt != '0);
  assign m_out_ready = m_out_valid &&
                       ((m_out.marker && free) ||
                        (!m_out.marker && m_out.cnt == '0) ||
                        (r_valid && r_ready && got + 1 == m_out.cnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_ref_loc <= '0;
      out_ref_str <= 1'b0;
      out_rd_loc  <= '0;
      out_rd_str  <= 1'b0;
      out_eor     <= 1'b0;
      out_last    <= 1'b0;
      got         <= '0;
    end else if (start) begin
      out_valid <= 1'b0;
      got       <= '0;
    end else begin
      if (free) out_valid <= 1'b0;
      if (m_out_valid && m_out.marker && free) begin
        out_valid   <= 1'b1;
        out_eor     <= m_out.eor;
        out_last    <= m_out.last;
        out_ref_loc <= '0;
        out_ref_str <= 1'b0;
        out_rd_loc  <= m_out.loc;
        out_rd_str  <= m_out.str;
      end else if (r_valid && r_ready) begin
        out_valid   <= 1'b1;
        out_eor     <= 1'b0;
        out_last    <= 1'b0;
        out_ref_loc <= entry.loc;
        out_ref_str <= entry.str;
        out_rd_loc  <= m_out.loc;
        out_rd_str  <= m_out.str;
        got         <= (got + 1 == m_out.cnt) ? '0 : got + 1;
      end
    end
  end

endmodule
