// tb_location_adjust: self-checking test of location_adjust.
//
// Random location records (reference and read locations, strands, with the
// reference sometimes below the read location so that delta is negative),
// end-of-read markers and a final end-of-batch marker are fed in. Each must
// appear as one word at consecutive addresses of the anchor buffer, with
// delta = L_ref - L_read, strand = ref XOR read and the read location, or an
// end-of-read word. done must rise after the end-of-batch marker with
// nb_words equal to the number of words. Phase 1 stalls the write channel
// and the input randomly; phase 2 runs unstalled and checks one word per
// cycle.
module tb_location_adjust;
  import gs_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] anc_base;
  logic in_valid, in_ready, in_ref_str, in_rd_str, in_eor, in_last;
  logic [LOC_W-1:0] in_ref_loc, in_rd_loc;
  logic w_valid, w_ready, done;
  logic [ADDR_W-1:0] w_addr;
  logic [ANCHOR_DW-1:0] w_data;
  logic [31:0] nb_words;

  int checks = 0, failures = 0, in_gap = 30;

  location_adjust dut (.*);
  hbm_wr_model #(.DW(ANCHOR_DW), .AW(ADDR_W), .STALL_PCT(30)) u_mem (
    .clk, .w_valid, .w_ready, .w_addr, .w_data);

  typedef struct { bit eor; bit last; int unsigned ref_loc; bit ref_str; int unsigned rd_loc; bit rd_str; } rec_t;
  rec_t in_q[$];
  longint unsigned exp_w[$];
  bit present;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    present  = (in_q.size() != 0) && (($urandom % 100) >= in_gap);
    in_valid = present;
    if (in_q.size() != 0) begin
      in_ref_loc = in_q[0].ref_loc; in_ref_str = in_q[0].ref_str;
      in_rd_loc = in_q[0].rd_loc; in_rd_str = in_q[0].rd_str;
      in_eor = in_q[0].eor; in_last = in_q[0].last;
    end
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready) void'(in_q.pop_front());

  function automatic void gen(int n);
    for (int i = 0; i < n; i++) begin
      rec_t r;
      longint unsigned w;
      r.rd_loc = $urandom % (1 << 20);
      r.ref_loc = (i % 3 == 0) ? $urandom % (1 << 20) : $urandom;
      r.ref_str = $urandom % 2; r.rd_str = $urandom % 2;
      r.eor = (i % 9 == 8); r.last = 0;
      in_q.push_back(r);
      if (r.eor) w = 64'h8000_0000_0000_0000;
      else begin
        logic [31:0] d = r.ref_loc - r.rd_loc;
        w = {1'b0, r.ref_str ^ r.rd_str, r.rd_loc[29:0], d};
      end
      exp_w.push_back(w);
    end
    in_q.push_back('{0, 1, 0, 0, 0, 0});
  endfunction

  task automatic run(logic [ADDR_W-1:0] base, int n, bit timed);
    longint t0;
    anc_base = base;
    exp_w.delete();
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    gen(n);
    t0 = $time;
    @(posedge clk);
    wait (done);
    if (timed) check(($time - t0) / 10 <= n + 5,
                     $sformatf("rate: %0d words in %0d cycles", n, ($time - t0) / 10));
    check(nb_words == n, $sformatf("nb_words %0d vs %0d", nb_words, n));
    foreach (exp_w[i])
      check(u_mem.mem.exists(base + ADDR_W'(i)) && u_mem.mem[base + ADDR_W'(i)] == exp_w[i],
            $sformatf("word %0d: %h vs %h", i, u_mem.mem[base + ADDR_W'(i)], exp_w[i]));
    check(!u_mem.mem.exists(base + ADDR_W'(n)), "no word past the end");
    $display("run n=%0d cycles=%0d stalls=%0d", n, ($time - t0) / 10, u_mem.stall_cycles);
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    anc_base = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(40'h300_0000, 700, 0);
    check(u_mem.stall_cycles > 50, "write stalls seen");
    u_mem.stall_pct = 0; in_gap = 0;
    repeat (3) @(posedge clk);
    run(40'h500_0000, 500, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
