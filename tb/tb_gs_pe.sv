// tb_gs_pe: end-to-end test of one processing element at its defaults
// (K = 15, W = 10).
//
// A 6000-base random reference with planted repeats is indexed by the
// software model (max_occ = 3), and the map and key arrays are written into
// two read-channel memory models in the layout the PE expects. A batch of 40
// reads of every kind (exact, mutated, reverse complement, random, with N,
// too short) is packed into a third memory model. After start, every word
// the PE writes to its anchor buffer is compared with the model's anchors
// and end-of-read words; nb_words and empty_lists are checked. The run is
// repeated, with random stalls on all four channels, to check that a PE can
// be restarted for a new batch.
module tb_gs_pe;
  import gs_pkg::*;
  import gs_tb_pkg::*;

  localparam int K = 15, W = 10, RD_DW = 256, BPW = RD_DW / 4, MAX_OCC = 3;
  localparam logic [ADDR_W-1:0] MAP_BASE = 40'h10_0000_0000;
  localparam logic [ADDR_W-1:0] KEY_BASE = 40'h20_0000_0000;
  localparam logic [ADDR_W-1:0] RD_BASE  = 40'h30_0000_0000;
  localparam logic [ADDR_W-1:0] ANC_BASE = 40'h40_0000_0000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] rd_base = RD_BASE, map_base = MAP_BASE, key_base = KEY_BASE;
  logic [ADDR_W-1:0] anc_base = ANC_BASE;
  logic [31:0] nb_bases, nb_words, empty_lists;
  logic done;
  logic rd_ar_valid, rd_ar_ready, rd_r_valid, rd_r_ready;
  logic [ADDR_W-1:0] rd_ar_addr;
  logic [RD_DW-1:0] rd_r_data;
  logic map_ar_valid, map_ar_ready, map_r_valid, map_r_ready;
  logic [ADDR_W-1:0] map_ar_addr;
  logic [PTR_W-1:0] map_r_data;
  logic key_ar_valid, key_ar_ready, key_r_valid, key_r_ready;
  logic [ADDR_W-1:0] key_ar_addr;
  logic [KEY_DW-1:0] key_r_data;
  logic anc_w_valid, anc_w_ready;
  logic [ADDR_W-1:0] anc_w_addr;
  logic [ANCHOR_DW-1:0] anc_w_data;

  gs_pe #(.K(K), .W(W), .RD_DW(RD_DW)) dut (.*);

  hbm_rd_model #(.DW(RD_DW), .AW(ADDR_W), .LATENCY(12)) u_rd (
    .clk, .ar_valid(rd_ar_valid), .ar_ready(rd_ar_ready), .ar_addr(rd_ar_addr),
    .r_valid(rd_r_valid), .r_ready(rd_r_ready), .r_data(rd_r_data));
  hbm_rd_model #(.DW(PTR_W), .AW(ADDR_W), .LATENCY(12)) u_map (
    .clk, .ar_valid(map_ar_valid), .ar_ready(map_ar_ready), .ar_addr(map_ar_addr),
    .r_valid(map_r_valid), .r_ready(map_r_ready), .r_data(map_r_data));
  hbm_rd_model #(.DW(KEY_DW), .AW(ADDR_W), .LATENCY(12)) u_key (
    .clk, .ar_valid(key_ar_valid), .ar_ready(key_ar_ready), .ar_addr(key_ar_addr),
    .r_valid(key_r_valid), .r_ready(key_r_ready), .r_data(key_r_data));
  hbm_wr_model #(.DW(ANCHOR_DW), .AW(ADDR_W)) u_anc (
    .clk, .w_valid(anc_w_valid), .w_ready(anc_w_ready), .w_addr(anc_w_addr),
    .w_data(anc_w_data));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  gs_index idx;
  byte unsigned refseq[$];
  longint unsigned exp_w[$];
  int nmiss, nmulti, nrev;

  // Write map entries for address a and a+1.
  function automatic void put_map(longint unsigned a);
    u_map.mem[MAP_BASE + ADDR_W'(a)]     = idx.map_at(a);
    u_map.mem[MAP_BASE + ADDR_W'(a + 1)] = idx.map_at(a + 1);
  endfunction

  function automatic void load_index();
    foreach (idx.sorted[i]) begin
      longint unsigned hh = idx.sorted[i];
      put_map(hh);
      foreach (idx.hits[hh][j])
        u_key.mem[KEY_BASE + ADDR_W'(idx.first[hh] + j)] =
          {31'd0, idx.hits[hh][j].str, idx.hits[hh][j].loc};
    end
  endfunction

  // Pack nreads reads into the read memory; fill exp_w; return nb_bases.
  function automatic int make_batch(int nreads);
    byte unsigned codes[$];
    exp_w.delete();
    nmiss = 0; nmulti = 0; nrev = 0;
    for (int r = 0; r < nreads; r++) begin
      byte unsigned rd[$];
      seed_s sd[$];
      sample_read(refseq, r % 6, rd);
      minimizers(rd, K, W, sd);
      foreach (sd[i]) if (!idx.hits.exists(sd[i].hash)) put_map(sd[i].hash);
      read_anchors(idx, rd, K, W, exp_w, nmiss, nmulti, nrev);
      foreach (rd[i]) codes.push_back(rd[i]);
      codes.push_back(5);
    end
    for (int wd = 0; wd * BPW < codes.size(); wd++) begin
      logic [RD_DW-1:0] word = '0;
      for (int b = 0; b < BPW && wd * BPW + b < codes.size(); b++)
        word[4*b +: 4] = 4'(codes[wd * BPW + b]);
      u_rd.mem[RD_BASE + ADDR_W'(wd)] = word;
    end
    return codes.size();
  endfunction

  task automatic run_batch(int nreads, int stall);
    int n;
    longint t0;
    u_anc.mem.delete();
    u_rd.stall_pct = stall; u_map.stall_pct = stall;
    u_key.stall_pct = stall; u_anc.stall_pct = stall;
    n = make_batch(nreads);
    nb_bases = n;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    t0 = $time;
    @(posedge clk);
    wait (done);
    check(nb_words == exp_w.size(), $sformatf("nb_words %0d vs %0d", nb_words, exp_w.size()));
    check(empty_lists == nmiss, $sformatf("empty_lists %0d vs %0d", empty_lists, nmiss));
    foreach (exp_w[i])
      check(u_anc.mem.exists(ANC_BASE + ADDR_W'(i)) &&
            u_anc.mem[ANC_BASE + ADDR_W'(i)] == exp_w[i],
            $sformatf("anchor word %0d: %h vs %h", i, u_anc.mem[ANC_BASE + ADDR_W'(i)], exp_w[i]));
    check(nmulti > 0 && nrev > 0 && nmiss > 0, "multi-hit, reverse and missing seeds occur");
    $display("batch: %0d bases, %0d words, %0d empty lists, %0d multi-hit seeds, %0d reverse anchors, %0d cycles",
             n, exp_w.size(), nmiss, nmulti, nrev, ($time - t0) / 10);
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idx = new();
    make_reference(6000, refseq);
    idx.build(refseq, K, W, MAX_OCC);
    load_index();
    $display("index: %0d reference bases, %0d hashes, %0d key entries",
             refseq.size(), idx.sorted.size(), idx.nkeys());
    nb_bases = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_batch(40, 0);
    run_batch(40, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
