// gateseeder_top: the FPGA seeding kernel, M processing elements side by side.
//
// Each PE maps one batch of reads on its own: it extracts minimizer seeds,
// looks them up in the index (map array, then key array) and writes anchors
// (delta, read location, strand) to its own anchor buffer. Every PE has four
// memory channels, brought out here as arrays indexed by PE number:
//   rd_*   the PE's read batch        (read,  RD_DW-bit words)
//   map_*  the map array of the index (read,  32-bit entries)
//   key_*  the key array of the index (read,  64-bit entries)
//   anc_*  the PE's anchor buffer     (write, 64-bit anchors)
// In the target system each channel is one AXI port of the HBM controller,
// which connects it through its switch to one memory section; M = 8 PEs use
// all 32 ports of the board. The index is shared, so all PEs receive the same
// map_base and key_base, while read and anchor buffers are per PE.
//
// Control: load the per-PE bases and batch lengths, pulse start for one
// cycle; done[i] rises when PE i has written its last anchor, all_done when
// every PE has. A PE given nb_bases = 0 finishes at once with no anchors.
// The host, the HBM, its controller and the switch are outside this module.
// From the paper: M = 8 PEs with four channels each, a shared index and
// private read and anchor buffers. This design's choices: a common start and
// the status outputs.
module gateseeder_top
  import gs_pkg::*;
#(
  parameter int unsigned M          = 8,
  parameter int unsigned K          = 15,
  parameter int unsigned W          = 10,
  parameter int unsigned RD_DW      = 256,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ADDR_W-1:0]    map_base,
  input  logic [ADDR_W-1:0]    key_base,
  input  logic [ADDR_W-1:0]    rd_base     [M],
  input  logic [31:0]          nb_bases    [M],
  input  logic [ADDR_W-1:0]    anc_base    [M],
  output logic                 done        [M],
  output logic                 all_done,
  output logic [31:0]          nb_words    [M],
  output logic [31:0]          empty_lists [M],
  // read-batch channels
  output logic                 rd_ar_valid  [M],
  input  logic                 rd_ar_ready  [M],
  output logic [ADDR_W-1:0]    rd_ar_addr   [M],
  input  logic                 rd_r_valid   [M],
  output logic                 rd_r_ready   [M],
  input  logic [RD_DW-1:0]     rd_r_data    [M],
  // map-array channels
  output logic                 map_ar_valid [M],
  input  logic                 map_ar_ready [M],
  output logic [ADDR_W-1:0]    map_ar_addr  [M],
  input  logic                 map_r_valid  [M],
  output logic                 map_r_ready  [M],
  input  logic [PTR_W-1:0]     map_r_data   [M],
  // key-array channels
  output logic                 key_ar_valid [M],
  input  logic                 key_ar_ready [M],
  output logic [ADDR_W-1:0]    key_ar_addr  [M],
  input  logic                 key_r_valid  [M],
  output logic                 key_r_ready  [M],
  input  logic [KEY_DW-1:0]    key_r_data   [M],
  // anchor-buffer channels
  output logic                 anc_w_valid  [M],
  input  logic                 anc_w_ready  [M],
  output logic [ADDR_W-1:0]    anc_w_addr   [M],
  output logic [ANCHOR_DW-1:0] anc_w_data   [M]
);
  logic [M-1:0] done_vec;

  for (genvar i = 0; i < int'(M); i++) begin : g_pe
    gs_pe #(.K(K), .W(W), .RD_DW(RD_DW), .FIFO_DEPTH(FIFO_DEPTH)) u_pe (
      .clk, .rst_n, .start,
      .rd_base(rd_base[i]), .nb_bases(nb_bases[i]),
      .map_base, .key_base, .anc_base(anc_base[i]),
      .done(done[i]), .nb_words(nb_words[i]), .empty_lists(empty_lists[i]),
      .rd_ar_valid(rd_ar_valid[i]), .rd_ar_ready(rd_ar_ready[i]),
      .rd_ar_addr(rd_ar_addr[i]), .rd_r_valid(rd_r_valid[i]),
      .rd_r_ready(rd_r_ready[i]), .rd_r_data(rd_r_data[i]),
      .map_ar_valid(map_ar_valid[i]), .map_ar_ready(map_ar_ready[i]),
      .map_ar_addr(map_ar_addr[i]), .map_r_valid(map_r_valid[i]),
      .map_r_ready(map_r_ready[i]), .map_r_data(map_r_data[i]),
      .key_ar_valid(key_ar_valid[i]), .key_ar_ready(key_ar_ready[i]),
      .key_ar_addr(key_ar_addr[i]), .key_r_valid(key_r_valid[i]),
      .key_r_ready(key_r_ready[i]), .key_r_data(key_r_data[i]),
      .anc_w_valid(anc_w_valid[i]), .anc_w_ready(anc_w_ready[i]),
      .anc_w_addr(anc_w_addr[i]), .anc_w_data(anc_w_data[i])
    );
    assign done_vec[i] = done[i];
  end

  assign all_done = &done_vec;

endmodule
