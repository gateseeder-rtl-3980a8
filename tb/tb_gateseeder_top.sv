// tb_gateseeder_top: end-to-end test of the whole kernel at its default
// parameters (8 PEs, K = 15, W = 10): the top is instantiated without a
// parameter list.
//
// The software model builds a reference with planted repeats and its index
// (max_occ = 3). The map and key arrays are loaded into the map and key
// memory models of every PE (the index is shared; in hardware the memory
// switch gives all PEs the same index), and each PE gets its own batch of
// reads and its own anchor buffer. Three runs:
//   1. all PEs, 30 reads each, no stalls;
//   2. all PEs, new batches, random stalls on all 32 channels;
//   3. PE 7 with an empty batch (nb_bases = 0), the rest with new batches;
//   4. all PEs, new batches, every channel stalled 85% of the time, so that
//      the FIFOs between the tasks fill up and backpressure reaches the
//      seed extractor.
// After each run every anchor-buffer word of every PE is compared with the
// model, as are nb_words and empty_lists. The test counts how often each
// mechanism of the design happened and fails if one never did: channel
// stalls, a full FIFO between two dataflow tasks (backpressure),
// seeds with no index entry, seeds whose entries were removed by max_occ,
// seeds with several locations, reverse-strand anchors, reads with N, reads
// too short for a window, all 8 PEs busy in the same cycle, PE restart and an
// empty batch.
module tb_gateseeder_top;
  import gs_pkg::*;
  import gs_tb_pkg::*;

  localparam int M = 8, K = 15, W = 10, RD_DW = 256, BPW = RD_DW / 4;
  localparam int FIFO_DEPTH = 16, MAX_OCC = 3, NREADS = 30;
  localparam logic [ADDR_W-1:0] MAP_BASE = 40'h10_0000_0000;
  localparam logic [ADDR_W-1:0] KEY_BASE = 40'h20_0000_0000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0]    map_base = MAP_BASE, key_base = KEY_BASE;
  logic [ADDR_W-1:0]    rd_base [M], anc_base [M];
  logic [31:0]          nb_bases [M], nb_words [M], empty_lists [M];
  logic                 done [M], all_done;
  logic                 rd_ar_valid [M], rd_ar_ready [M], rd_r_valid [M], rd_r_ready [M];
  logic [ADDR_W-1:0]    rd_ar_addr [M];
  logic [RD_DW-1:0]     rd_r_data [M];
  logic                 map_ar_valid [M], map_ar_ready [M], map_r_valid [M], map_r_ready [M];
  logic [ADDR_W-1:0]    map_ar_addr [M];
  logic [PTR_W-1:0]     map_r_data [M];
  logic                 key_ar_valid [M], key_ar_ready [M], key_r_valid [M], key_r_ready [M];
  logic [ADDR_W-1:0]    key_ar_addr [M];
  logic [KEY_DW-1:0]    key_r_data [M];
  logic                 anc_w_valid [M], anc_w_ready [M];
  logic [ADDR_W-1:0]    anc_w_addr [M];
  logic [ANCHOR_DW-1:0] anc_w_data [M];

  gateseeder_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------ shared images and events
  logic [PTR_W-1:0]     map_img [logic [ADDR_W-1:0]];
  logic [KEY_DW-1:0]    key_img [logic [ADDR_W-1:0]];
  logic [RD_DW-1:0]     rd_img  [M][$];
  longint unsigned      exp_w   [M][$];
  int                   exp_empty [M];
  int                   stall_pct = 0;
  event                 ev_load_index, ev_load_batch, ev_check;
  int                   acks = 0;
  int unsigned          stall_total = 0;

  for (genvar i = 0; i < M; i++) begin : g_ch
    hbm_rd_model #(.DW(RD_DW), .AW(ADDR_W), .LATENCY(12)) u_rd (
      .clk, .ar_valid(rd_ar_valid[i]), .ar_ready(rd_ar_ready[i]), .ar_addr(rd_ar_addr[i]),
      .r_valid(rd_r_valid[i]), .r_ready(rd_r_ready[i]), .r_data(rd_r_data[i]));
    hbm_rd_model #(.DW(PTR_W), .AW(ADDR_W), .LATENCY(12)) u_map (
      .clk, .ar_valid(map_ar_valid[i]), .ar_ready(map_ar_ready[i]), .ar_addr(map_ar_addr[i]),
      .r_valid(map_r_valid[i]), .r_ready(map_r_ready[i]), .r_data(map_r_data[i]));
    hbm_rd_model #(.DW(KEY_DW), .AW(ADDR_W), .LATENCY(12)) u_key (
      .clk, .ar_valid(key_ar_valid[i]), .ar_ready(key_ar_ready[i]), .ar_addr(key_ar_addr[i]),
      .r_valid(key_r_valid[i]), .r_ready(key_r_ready[i]), .r_data(key_r_data[i]));
    hbm_wr_model #(.DW(ANCHOR_DW), .AW(ADDR_W)) u_anc (
      .clk, .w_valid(anc_w_valid[i]), .w_ready(anc_w_ready[i]), .w_addr(anc_w_addr[i]),
      .w_data(anc_w_data[i]));

    initial forever begin
      @(ev_load_index);
      foreach (map_img[a]) u_map.mem[a] = map_img[a];
      foreach (key_img[a]) u_key.mem[a] = key_img[a];
      acks++;
    end

    initial forever begin
      @(ev_load_batch);
      u_anc.mem.delete();
      foreach (rd_img[i][wd]) u_rd.mem[rd_base[i] + ADDR_W'(wd)] = rd_img[i][wd];
      u_rd.stall_pct = stall_pct; u_map.stall_pct = stall_pct;
      u_key.stall_pct = stall_pct; u_anc.stall_pct = stall_pct;
      acks++;
    end

    initial forever begin
      @(ev_check);
      check(nb_words[i] == exp_w[i].size(),
            $sformatf("PE %0d nb_words %0d vs %0d", i, nb_words[i], exp_w[i].size()));
      check(empty_lists[i] == exp_empty[i],
            $sformatf("PE %0d empty_lists %0d vs %0d", i, empty_lists[i], exp_empty[i]));
      foreach (exp_w[i][j])
        check(u_anc.mem.exists(anc_base[i] + ADDR_W'(j)) &&
              u_anc.mem[anc_base[i] + ADDR_W'(j)] == exp_w[i][j],
              $sformatf("PE %0d word %0d", i, j));
      check(!u_anc.mem.exists(anc_base[i] + ADDR_W'(exp_w[i].size())),
            $sformatf("PE %0d wrote past its anchors", i));
      stall_total += u_rd.stall_cycles + u_map.stall_cycles + u_key.stall_cycles +
                     u_anc.stall_cycles;
      acks++;
    end
  end

  // ------------------------------------------------ mechanism counters
  int n_fifo_full = 0, n_all_busy = 0, n_miss = 0, n_filtered = 0, n_multi = 0;
  int n_rev = 0, n_nreads = 0, n_short = 0, n_restart = 0, n_empty_batch = 0;
  bit running = 0;

  always @(posedge clk) if (running) begin
    int busy;
    busy = 0;
    for (int i = 0; i < M; i++) if (!done[i]) busy++;
    if (busy == M) n_all_busy++;
  end
  for (genvar i = 0; i < M; i++) begin : g_mon
    always @(posedge clk)
      if (running && (dut.g_pe[i].u_pe.c0 == FIFO_DEPTH || dut.g_pe[i].u_pe.c1 == FIFO_DEPTH ||
                      dut.g_pe[i].u_pe.c2 == FIFO_DEPTH)) n_fifo_full++;
  end

  gs_index idx;
  byte unsigned refseq[$];
  int filtered_hash [longint unsigned];

  function automatic void put_map(longint unsigned a);
    map_img[MAP_BASE + ADDR_W'(a)]     = idx.map_at(a);
    map_img[MAP_BASE + ADDR_W'(a + 1)] = idx.map_at(a + 1);
  endfunction

  function automatic void build_batches(int empty_pe);
    for (int i = 0; i < M; i++) begin
      byte unsigned codes[$];
      int nm = 0, nmu = 0, nrv = 0;
      rd_img[i].delete();
      exp_w[i].delete();
      rd_base[i]  = 40'h30_0000_0000 + ADDR_W'(i) * 40'h1_0000_0000;
      anc_base[i] = 40'h80_0000_0000 + ADDR_W'(i) * 40'h1_0000_0000;
      if (i != empty_pe) begin
        for (int r = 0; r < NREADS; r++) begin
          byte unsigned rd[$];
          seed_s sd[$];
          sample_read(refseq, (r + i) % 6, rd);
          minimizers(rd, K, W, sd);
          if (sd.size() == 0) n_short++;
          foreach (rd[b]) if (rd[b] == 4) begin n_nreads++; break; end
          foreach (sd[s]) begin
            if (!idx.hits.exists(sd[s].hash)) put_map(sd[s].hash);
            if (filtered_hash.exists(sd[s].hash)) n_filtered++;
          end
          read_anchors(idx, rd, K, W, exp_w[i], nm, nmu, nrv);
          foreach (rd[b]) codes.push_back(rd[b]);
          codes.push_back(5);
        end
      end
      n_miss += nm; n_multi += nmu; n_rev += nrv;
      exp_empty[i] = nm;
      nb_bases[i] = codes.size();
      for (int wd = 0; wd * BPW < codes.size(); wd++) begin
        logic [RD_DW-1:0] word = '0;
        for (int b = 0; b < BPW && wd * BPW + b < codes.size(); b++)
          word[4*b +: 4] = 4'(codes[wd * BPW + b]);
        rd_img[i].push_back(word);
      end
    end
  endfunction

  task automatic run(int stall, int empty_pe, string name);
    longint t0;
    int total = 0;
    stall_pct = stall;
    acks = 0; ->ev_load_batch; wait (acks == M);
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    t0 = $time;
    running = 1;
    @(posedge clk);
    wait (all_done);
    running = 0;
    acks = 0; ->ev_check; wait (acks == M);
    for (int i = 0; i < M; i++) total += exp_w[i].size();
    if (empty_pe >= 0) begin
      check(nb_words[empty_pe] == 0, "empty batch writes nothing");
      n_empty_batch++;
    end
    $display("%s: %0d anchor words over %0d PEs in %0d cycles", name, total, M, ($time - t0) / 10);
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seed_s all[$];
    int cnt [longint unsigned];
    idx = new();
    make_reference(6000, refseq);
    idx.build(refseq, K, W, MAX_OCC);
    minimizers(refseq, K, W, all);
    foreach (all[s]) cnt[all[s].hash] = cnt.exists(all[s].hash) ? cnt[all[s].hash] + 1 : 1;
    foreach (cnt[h]) if (cnt[h] > MAX_OCC) filtered_hash[h] = 1;
    foreach (idx.sorted[s]) begin
      longint unsigned hh;
      hh = idx.sorted[s];
      put_map(hh);
      foreach (idx.hits[hh][j])
        key_img[KEY_BASE + ADDR_W'(idx.first[hh] + j)] =
          {31'd0, idx.hits[hh][j].str, idx.hits[hh][j].loc};
    end
    for (int i = 0; i < M; i++) begin
      rd_base[i] = '0; anc_base[i] = '0; nb_bases[i] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // each batch adds map entries for its missing seeds, so the index is
    // (re)loaded after the batches are built
    build_batches(-1);
    acks = 0; ->ev_load_index; wait (acks == M);
    run(0, -1, "run 1 (no stalls)");
    n_restart++;
    build_batches(-1);
    acks = 0; ->ev_load_index; wait (acks == M);
    run(25, -1, "run 2 (random stalls)");
    n_restart++;
    build_batches(M - 1);
    acks = 0; ->ev_load_index; wait (acks == M);
    run(10, M - 1, "run 3 (PE 7 empty)");
    n_restart++;
    build_batches(-1);
    acks = 0; ->ev_load_index; wait (acks == M);
    run(85, -1, "run 4 (heavy stalls)");

    $display("mechanisms: channel stall cycles=%0d, FIFO-full cycles=%0d, all-PEs-busy cycles=%0d",
             stall_total, n_fifo_full, n_all_busy);
    $display("mechanisms: missing seeds=%0d, max_occ-filtered seeds=%0d, multi-location seeds=%0d, reverse anchors=%0d",
             n_miss, n_filtered, n_multi, n_rev);
    $display("mechanisms: reads with N=%0d, reads without seeds=%0d, restarts=%0d, empty batches=%0d",
             n_nreads, n_short, n_restart, n_empty_batch);
    check(stall_total > 0, "channel stalls happened");
    check(n_fifo_full > 0, "a dataflow FIFO filled up");
    check(n_all_busy > 0, "all PEs busy at once");
    check(n_miss > 0, "seeds without index entry");
    check(n_filtered > 0, "seeds removed by max_occ");
    check(n_multi > 0, "seeds with several locations");
    check(n_rev > 0, "reverse-strand anchors");
    check(n_nreads > 0, "reads with N");
    check(n_short > 0, "reads without seeds");
    check(n_restart > 0 && n_empty_batch > 0, "restart and empty batch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
