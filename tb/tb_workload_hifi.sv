// tb_workload_hifi: the three HiFi presets run end to end on the whole
// kernel (8 PEs, K = 19, W = 19, set by parameter).
//
// Each preset differs only in max_occ (1, 2, 5) and in the batch size, so one
// testbench runs all three in turn: for each, the software model builds the
// index of a synthetic reference with planted repeats of 6, 3, 2 copies
// (so that each max_occ value removes a different set of minimizers), loads
// it into every PE's map and key memories, and gives each PE its own batch
// of HiFi-like reads: 2,000 to 4,000 bases with 0.1% substitutions and 0.05% insertions and deletions each, drawn from either strand. Batch sizes are
// the preset's batch size (one batch per PE) divided by 8000 (16000, 16000, 16000
// bases per PE).
// The three presets draw on the same pool of reads per PE (each batch is a
// prefix of it), so their run times can be compared. Every anchor-buffer
// word of every PE is compared with the model, and nb_words and empty_lists
// are checked. The memory models do not stall here (stalls are covered by
// tb_gateseeder_top), so the cycle counts reflect the work alone. The test
// checks that a smaller max_occ removes more seeds and that a larger max_occ
// never makes the kernel faster per base (more locations to fetch), and
// prints the anchors and cycles per preset.
module tb_workload_hifi;
  import gs_pkg::*;
  import gs_tb_pkg::*;

  localparam int M = 8, K = 19, W = 19, RD_DW = 256, BPW = RD_DW / 4;
  localparam logic [ADDR_W-1:0] MAP_BASE = 40'h10_0000_0000;
  localparam logic [ADDR_W-1:0] KEY_BASE = 40'h20_0000_0000;
  localparam int MAX_OCC [3] = '{1, 2, 5};
  localparam int BATCH [3]   = '{16000, 16000, 16000};
  localparam int COPIES [3]  = '{6, 3, 2};
  localparam int SEG_LEN = 300, BACKBONE = 40000;
  localparam int LEN_MIN = 2000, LEN_MAX = 4000;
  localparam int SUB = 10, INS = 5, DEL = 5;   // per 10,000 bases

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

  gateseeder_top #(.K(K), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  logic [PTR_W-1:0]  map_img [logic [ADDR_W-1:0]];
  logic [KEY_DW-1:0] key_img [logic [ADDR_W-1:0]];
  logic [RD_DW-1:0]  rd_img  [M][$];
  longint unsigned   exp_w   [M][$];
  int                exp_empty [M];
  event              ev_load_index, ev_load_batch, ev_check;
  int                acks = 0;

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
      u_map.mem.delete();
      u_key.mem.delete();
      foreach (map_img[a]) u_map.mem[a] = map_img[a];
      foreach (key_img[a]) u_key.mem[a] = key_img[a];
      acks++;
    end

    initial forever begin
      @(ev_load_batch);
      u_anc.mem.delete();
      u_rd.mem.delete();
      foreach (rd_img[i][wd]) u_rd.mem[rd_base[i] + ADDR_W'(wd)] = rd_img[i][wd];
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
      acks++;
    end
  end

  gs_index idx;
  byte unsigned refseq[$];
  int n_alias = 0;

  // Map entries h and h+1; an address already holding another value would
  // mean two hashes share a map address.
  function automatic void put_map(longint unsigned a);
    for (int d = 0; d < 2; d++) begin
      logic [ADDR_W-1:0] ad;
      int unsigned v;
      ad = MAP_BASE + ADDR_W'(a + longint'(d));
      v  = idx.map_at(a + longint'(d));
      if (map_img.exists(ad) && map_img[ad] != v) n_alias++;
      map_img[ad] = v;
    end
  endfunction

  // Backbone of random bases with the repeat segments inserted at random
  // places: segment s is copied COPIES[s] times.
  function automatic void make_ref();
    byte unsigned seg [3][$];
    int pos [$];
    int nins = 0, p = 0;
    refseq.delete();
    for (int s = 0; s < 3; s++) begin
      for (int j = 0; j < SEG_LEN; j++) seg[s].push_back($urandom % 4);
      for (int c = 0; c < COPIES[s]; c++) pos.push_back(s);
    end
    pos.shuffle();
    for (int i = 0; i < BACKBONE; i++) begin
      if (nins < pos.size() && i == (nins + 1) * (BACKBONE / (pos.size() + 1))) begin
        foreach (seg[pos[nins]][j]) refseq.push_back(seg[pos[nins]][j]);
        nins++;
      end
      refseq.push_back($urandom % 4);
    end
  endfunction

  // A read: a random stretch of the reference with substitutions, insertions
  // and deletions, reverse-complemented half of the time.
  function automatic void make_read(ref byte unsigned rd[$]);
    int len, st;
    byte unsigned tmp[$];
    len = LEN_MIN + $urandom % (LEN_MAX - LEN_MIN + 1);
    st  = $urandom % (refseq.size() - len);
    rd.delete();
    for (int i = st; i < st + len; i++) begin
      int r;
      r = $urandom % 10000;
      if (r < SUB) rd.push_back((refseq[i] + 1 + $urandom % 3) % 4);
      else if (r < SUB + INS) begin rd.push_back($urandom % 4); rd.push_back(refseq[i]); end
      else if (r >= SUB + INS + DEL) rd.push_back(refseq[i]);
    end
    if ($urandom % 2) begin revcomp(rd, tmp); rd = tmp; end
  endfunction

  int n_filtered, n_anchor_words, n_bases_max;
  byte unsigned pool [M][$];   // per PE: reads, each followed by a 5 (E)

  // Reads for the largest batch of each PE, drawn once.
  function automatic void make_pools();
    int most = 0;
    foreach (BATCH[p]) if (BATCH[p] > most) most = BATCH[p];
    for (int i = 0; i < M; i++) begin
      pool[i].delete();
      while (pool[i].size() < most) begin
        byte unsigned rd[$];
        make_read(rd);
        foreach (rd[b]) pool[i].push_back(rd[b]);
        pool[i].push_back(5);
      end
    end
  endfunction
  int filtered_hash [longint unsigned];

  function automatic void build_index(int max_occ);
    seed_s all[$];
    int cnt [longint unsigned];
    idx = new();
    idx.build(refseq, K, W, max_occ);
    map_img.delete();
    key_img.delete();
    filtered_hash.delete();
    minimizers(refseq, K, W, all);
    foreach (all[s]) cnt[all[s].hash] = cnt.exists(all[s].hash) ? cnt[all[s].hash] + 1 : 1;
    foreach (cnt[h]) if (cnt[h] > max_occ) filtered_hash[h] = 1;
    foreach (idx.sorted[s]) begin
      longint unsigned hh;
      hh = idx.sorted[s];
      put_map(hh);
      foreach (idx.hits[hh][j])
        key_img[KEY_BASE + ADDR_W'(idx.first[hh] + j)] =
          {31'd0, idx.hits[hh][j].str, idx.hits[hh][j].loc};
    end
  endfunction

  function automatic void build_batches(int batch);
    n_filtered = 0;
    n_anchor_words = 0;
    n_bases_max = 0;
    for (int i = 0; i < M; i++) begin
      byte unsigned codes[$];
      int nm = 0, nmu = 0, nrv = 0;
      rd_img[i].delete();
      exp_w[i].delete();
      rd_base[i]  = 40'h30_0000_0000 + ADDR_W'(i) * 40'h1_0000_0000;
      anc_base[i] = 40'h80_0000_0000 + ADDR_W'(i) * 40'h1_0000_0000;
      while (codes.size() < batch) begin
        byte unsigned rd[$];
        seed_s sd[$];
        while (pool[i][codes.size() + rd.size()] != 5)
          rd.push_back(pool[i][codes.size() + rd.size()]);
        minimizers(rd, K, W, sd);
        foreach (sd[s]) begin
          if (!idx.hits.exists(sd[s].hash)) put_map(sd[s].hash);
          if (filtered_hash.exists(sd[s].hash)) n_filtered++;
        end
        read_anchors(idx, rd, K, W, exp_w[i], nm, nmu, nrv);
        foreach (rd[b]) codes.push_back(rd[b]);
        codes.push_back(5);
      end
      exp_empty[i] = nm;
      n_anchor_words += exp_w[i].size();
      nb_bases[i] = codes.size();
      if (codes.size() > n_bases_max) n_bases_max = codes.size();
      for (int wd = 0; wd * BPW < codes.size(); wd++) begin
        logic [RD_DW-1:0] word = '0;
        for (int b = 0; b < BPW && wd * BPW + b < codes.size(); b++)
          word[4*b +: 4] = 4'(codes[wd * BPW + b]);
        rd_img[i].push_back(word);
      end
    end
  endfunction

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int filt [3], nb [3];
    longint t0, cyc [3];
    for (int i = 0; i < M; i++) begin
      rd_base[i] = '0; anc_base[i] = '0; nb_bases[i] = '0;
    end
    make_ref();
    make_pools();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 3; p++) begin
      build_index(MAX_OCC[p]);
      build_batches(BATCH[p]);
      filt[p] = n_filtered;
      acks = 0; ->ev_load_index; wait (acks == M);
      acks = 0; ->ev_load_batch; wait (acks == M);
      @(posedge clk) start <= 1;
      @(posedge clk) start <= 0;
      t0 = $time;
      @(posedge clk);
      wait (all_done);
      cyc[p] = ($time - t0) / 10;
      nb[p]  = n_bases_max;
      acks = 0; ->ev_check; wait (acks == M);
      $display("HIFI%0d (max_occ %0d): up to %0d bases per PE, %0d index entries, %0d anchor words, %0d filtered seeds, %0d cycles",
               p + 1, MAX_OCC[p], nb[p], idx.nkeys(), n_anchor_words, n_filtered, cyc[p]);
    end
    // cycles per base of the longest batch may not fall as max_occ grows
    for (int p = 1; p < 3; p++)
      check(cyc[p] * nb[p-1] >= cyc[p-1] * nb[p],
            $sformatf("preset %0d is not slower per base than preset %0d", p + 1, p));
    check(n_alias == 0, "no two hashes share a map address");
    check(filt[0] > filt[2], "a smaller max_occ removes more seeds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
