// tb_seed_extraction: self-checking test of seed_extraction at its default
// K = 15, W = 10.
//
// Builds read batches (random reads of 0..400 bases with runs of N, reads
// shorter than one window, each read ending in E), stores them in a read-
// channel memory model and compares every emitted seed and marker with the
// software minimizer scan of gs_tb_pkg. Batch 1 runs with random stalls on
// the memory and on seed_ready; batch 2 runs without stalls and checks the
// rate: one base per cycle, so start-to-done takes at most nb_bases plus a
// small fixed latency.
module tb_seed_extraction;
  import gs_pkg::*;
  import gs_tb_pkg::*;

  localparam int K = 15, W = 10, RD_DW = 256, BPW = RD_DW / 4;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] rd_base;
  logic [31:0]       nb_bases;
  logic              done, ar_valid, ar_ready, r_valid, r_ready;
  logic [ADDR_W-1:0] ar_addr;
  logic [RD_DW-1:0]  r_data;
  logic              seed_valid, seed_ready, seed_str, seed_eor, seed_last;
  logic [2*K-1:0]    seed_hash;
  logic [LOC_W-1:0]  seed_loc;

  int checks = 0, failures = 0;
  int stall_pct = 30;

  seed_extraction #(.K(K), .W(W), .RD_DW(RD_DW)) dut (.*);

  hbm_rd_model #(.DW(RD_DW), .AW(ADDR_W), .LATENCY(6), .STALL_PCT(25)) u_mem (
    .clk, .ar_valid, .ar_ready, .ar_addr, .r_valid, .r_ready, .r_data);

  always @(posedge clk) begin
    seed_ready    <= ($urandom % 100) >= stall_pct;
  end

  typedef struct { bit marker; bit eor; bit last; longint unsigned hash; int unsigned loc; bit str; } exp_t;
  exp_t exp_q[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // Build one batch at word address base; fill exp_q; return its length.
  function automatic int make_batch(logic [ADDR_W-1:0] base, int nreads);
    byte unsigned codes[$];
    for (int r = 0; r < nreads; r++) begin
      byte unsigned rd[$];
      seed_s sd[$];
      int len = (r % 5 == 4) ? ($urandom % 24) : ($urandom % 400);
      for (int i = 0; i < len; i++) begin
        byte unsigned c = byte'($urandom % 4);
        if (($urandom % 100) < 2) c = 4;
        rd.push_back(c);
      end
      if (r % 7 == 3) for (int i = 0; i < 40 && i < len; i++) rd[i] = 4;
      minimizers(rd, K, W, sd);
      foreach (sd[i]) exp_q.push_back('{0, 0, 0, sd[i].hash, sd[i].loc, sd[i].str});
      exp_q.push_back('{1, 1, 0, 0, 0, 0});
      foreach (rd[i]) codes.push_back(rd[i]);
      codes.push_back(5);
    end
    exp_q.push_back('{1, 0, 1, 0, 0, 0});
    for (int wd = 0; wd * BPW < codes.size(); wd++) begin
      logic [RD_DW-1:0] word = '0;
      for (int b = 0; b < BPW && wd * BPW + b < codes.size(); b++)
        word[4*b +: 4] = 4'(codes[wd * BPW + b]);
      u_mem.mem[base + ADDR_W'(wd)] = word;
    end
    return codes.size();
  endfunction

  int nseeds = 0;
  always @(posedge clk) begin
    if (rst_n && seed_valid && seed_ready) begin
      if (exp_q.size() == 0) check(0, "unexpected seed");
      else begin
        exp_t e;
        e = exp_q.pop_front();
        if (e.marker) begin
          check(seed_eor == e.eor && seed_last == e.last, "marker");
        end else begin
          nseeds++;
          check(!seed_eor && !seed_last && seed_hash == 30'(e.hash) &&
                seed_loc == e.loc && seed_str == e.str,
                $sformatf("seed exp h=%0h loc=%0d str=%0d got h=%0h loc=%0d str=%0d",
                          e.hash, e.loc, e.str, seed_hash, seed_loc, seed_str));
        end
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    longint t0;
    rd_base = '0; nb_bases = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // batch 1: stalls everywhere
    n = make_batch(40'h100, 60);
    rd_base = 40'h100; nb_bases = n;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    @(posedge clk);
    wait (done);
    @(posedge clk);
    check(exp_q.size() == 0, "batch 1 fully emitted");
    // batch 2: no stalls, rate check
    u_mem.stall_pct = 0; stall_pct = 0;
    repeat (4) @(posedge clk);
    n = make_batch(40'h4000, 40);
    rd_base = 40'h4000; nb_bases = n;
    @(posedge clk) start <= 1;
    t0 = $time;
    @(posedge clk) start <= 0;
    @(posedge clk);
    wait (done);
    check(exp_q.size() == 0, "batch 2 fully emitted");
    check(($time - t0) / 10 <= n + 30,
          $sformatf("rate: %0d bases took %0d cycles", n, ($time - t0) / 10));
    check(nseeds > 300, "enough seeds seen");
    $display("seeds=%0d bases(batch2)=%0d cycles=%0d", nseeds, n, ($time - t0) / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
