// gs_pe: one processing element of the seeding kernel.
//
// Four tasks run concurrently as a dataflow pipeline, joined by FIFOs:
//   seed_extraction  reads the batch, emits minimizer seeds (1 window/cycle)
//   map_querying     map[h], map[h+1] -> [start, end) (1 seed / 2 cycles)
//   key_querying     key[start..end-1] -> reference locations (1 / cycle)
//   location_adjust  delta = L_ref - L_read, writes anchors (1 / cycle)
// Each task owns one memory channel, four per PE: the read batch, the map
// array, the key array and the anchor buffer. The read batch and the anchor
// buffer are private to the PE; the map and key arrays are the shared index
// (the sharing itself happens in the memory system outside the PE).
//
// Use: set the base addresses and nb_bases, pulse start for one cycle, wait
// for done. nb_words is then the number of 64-bit words written to the anchor
// buffer (anchors plus one end-of-read word per read). start also clears all
// FIFOs and counters, so a PE can be reused for the next batch.
// The task split, the channel count and the use of FIFOs follow the paper;
// FIFO depths are this design's choice.
module gs_pe
  import gs_pkg::*;
#(
  parameter int unsigned K          = 15,
  parameter int unsigned W          = 10,
  parameter int unsigned RD_DW      = 256,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ADDR_W-1:0]    rd_base,
  input  logic [31:0]          nb_bases,
  input  logic [ADDR_W-1:0]    map_base,
  input  logic [ADDR_W-1:0]    key_base,
  input  logic [ADDR_W-1:0]    anc_base,
  output logic                 done,
  output logic [31:0]          nb_words,
  output logic [31:0]          empty_lists,
  // read-batch channel
  output logic                 rd_ar_valid,
  input  logic                 rd_ar_ready,
  output logic [ADDR_W-1:0]    rd_ar_addr,
  input  logic                 rd_r_valid,
  output logic                 rd_r_ready,
  input  logic [RD_DW-1:0]     rd_r_data,
  // map-array channel
  output logic                 map_ar_valid,
  input  logic                 map_ar_ready,
  output logic [ADDR_W-1:0]    map_ar_addr,
  input  logic                 map_r_valid,
  output logic                 map_r_ready,
  input  logic [PTR_W-1:0]     map_r_data,
  // key-array channel
  output logic                 key_ar_valid,
  input  logic                 key_ar_ready,
  output logic [ADDR_W-1:0]    key_ar_addr,
  input  logic                 key_r_valid,
  output logic                 key_r_ready,
  input  logic [KEY_DW-1:0]    key_r_data,
  // anchor-buffer channel
  output logic                 anc_w_valid,
  input  logic                 anc_w_ready,
  output logic [ADDR_W-1:0]    anc_w_addr,
  output logic [ANCHOR_DW-1:0] anc_w_data
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  typedef struct packed {
    logic [2*K-1:0]   hash;
    logic [LOC_W-1:0] loc;
    logic             str, eor, last;
  } seed_t;

  typedef struct packed {
    logic [PTR_W-1:0] ptr_start, ptr_end;
    logic [LOC_W-1:0] loc;
    logic             str, eor, last;
  } ptrs_t;

  typedef struct packed {
    logic [LOC_W-1:0] ref_loc;
    logic             ref_str;
    logic [LOC_W-1:0] rd_loc;
    logic             rd_str, eor, last;
  } locs_t;

  // ------------------------------------------------ task 1: seed extraction
  seed_t se_out, mq_in;
  logic  se_valid, se_ready, mq_in_valid, mq_in_ready, se_done;
  logic [CW-1:0] c0, c1, c2;

  seed_extraction #(.K(K), .W(W), .RD_DW(RD_DW)) u_seed (
    .clk, .rst_n, .start, .rd_base, .nb_bases, .done(se_done),
    .ar_valid(rd_ar_valid), .ar_ready(rd_ar_ready), .ar_addr(rd_ar_addr),
    .r_valid(rd_r_valid), .r_ready(rd_r_ready), .r_data(rd_r_data),
    .seed_valid(se_valid), .seed_ready(se_ready),
    .seed_hash(se_out.hash), .seed_loc(se_out.loc), .seed_str(se_out.str),
    .seed_eor(se_out.eor), .seed_last(se_out.last)
  );

  gs_fifo #(.WIDTH($bits(seed_t)), .DEPTH(FIFO_DEPTH)) u_f0 (
    .clk, .rst_n, .clear(start),
    .in_valid(se_valid), .in_ready(se_ready), .in_data(se_out),
    .out_valid(mq_in_valid), .out_ready(mq_in_ready), .out_data(mq_in),
    .count(c0)
  );

  // ------------------------------------------------ task 2: map querying
  ptrs_t mq_out, kq_in;
  logic  mq_valid, mq_ready, kq_in_valid, kq_in_ready;

  map_querying #(.K(K), .META_DEPTH(FIFO_DEPTH)) u_map (
    .clk, .rst_n, .start, .map_base,
    .seed_valid(mq_in_valid), .seed_ready(mq_in_ready),
    .seed_hash(mq_in.hash), .seed_loc(mq_in.loc), .seed_str(mq_in.str),
    .seed_eor(mq_in.eor), .seed_last(mq_in.last),
    .ar_valid(map_ar_valid), .ar_ready(map_ar_ready), .ar_addr(map_ar_addr),
    .r_valid(map_r_valid), .r_ready(map_r_ready), .r_data(map_r_data),
    .out_valid(mq_valid), .out_ready(mq_ready),
    .out_start(mq_out.ptr_start), .out_end(mq_out.ptr_end),
    .out_loc(mq_out.loc), .out_str(mq_out.str),
    .out_eor(mq_out.eor), .out_last(mq_out.last)
  );

  gs_fifo #(.WIDTH($bits(ptrs_t)), .DEPTH(FIFO_DEPTH)) u_f1 (
    .clk, .rst_n, .clear(start),
    .in_valid(mq_valid), .in_ready(mq_ready), .in_data(mq_out),
    .out_valid(kq_in_valid), .out_ready(kq_in_ready), .out_data(kq_in),
    .count(c1)
  );

  // ------------------------------------------------ task 3: key querying
  locs_t kq_out, la_in;
  logic  kq_valid, kq_ready, la_in_valid, la_in_ready;

  key_querying #(.META_DEPTH(FIFO_DEPTH)) u_key (
    .clk, .rst_n, .start, .key_base,
    .in_valid(kq_in_valid), .in_ready(kq_in_ready),
    .in_start(kq_in.ptr_start), .in_end(kq_in.ptr_end),
    .in_loc(kq_in.loc), .in_str(kq_in.str),
    .in_eor(kq_in.eor), .in_last(kq_in.last),
    .ar_valid(key_ar_valid), .ar_ready(key_ar_ready), .ar_addr(key_ar_addr),
    .r_valid(key_r_valid), .r_ready(key_r_ready), .r_data(key_r_data),
    .out_valid(kq_valid), .out_ready(kq_ready),
    .out_ref_loc(kq_out.ref_loc), .out_ref_str(kq_out.ref_str),
    .out_rd_loc(kq_out.rd_loc), .out_rd_str(kq_out.rd_str),
    .out_eor(kq_out.eor), .out_last(kq_out.last),
    .empty_lists
  );

  gs_fifo #(.WIDTH($bits(locs_t)), .DEPTH(FIFO_DEPTH)) u_f2 (
    .clk, .rst_n, .clear(start),
    .in_valid(kq_valid), .in_ready(kq_ready), .in_data(kq_out),
    .out_valid(la_in_valid), .out_ready(la_in_ready), .out_data(la_in),
    .count(c2)
  );

  // ------------------------------------------------ task 4: location delta
  location_adjust u_loc (
    .clk, .rst_n, .start, .anc_base,
    .in_valid(la_in_valid), .in_ready(la_in_ready),
    .in_ref_loc(la_in.ref_loc), .in_ref_str(la_in.ref_str),
    .in_rd_loc(la_in.rd_loc), .in_rd_str(la_in.rd_str),
    .in_eor(la_in.eor), .in_last(la_in.last),
    .w_valid(anc_w_valid), .w_ready(anc_w_ready),
    .w_addr(anc_w_addr), .w_data(anc_w_data),
    .done, .nb_words
  );

endmodule
