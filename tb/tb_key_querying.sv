// tb_key_querying: self-checking test of key_querying.
//
// Random pointer records (lists of 0..6 entries, some reaching into the same
// key-array region, plus end-of-read markers) are fed to the module; a memory
// model holds random key-array entries. For each record the module must emit,
// in order, one record per key entry with the entry's location and strand and
// the seed's read location and strand; an empty list must emit nothing and be
// counted in empty_lists; markers must pass in place. Phase 1 adds random
// stalls; phase 2 runs without stalls and checks one location per cycle:
// L locations from records with non-empty lists take at most L plus a fixed
// latency plus one cycle per empty list or marker.
module tb_key_querying;
  import gs_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] key_base = 40'h20_0000_0000;
  logic in_valid, in_ready, in_str, in_eor, in_last;
  logic [PTR_W-1:0] in_start, in_end;
  logic [LOC_W-1:0] in_loc;
  logic ar_valid, ar_ready, r_valid, r_ready;
  logic [ADDR_W-1:0] ar_addr;
  logic [KEY_DW-1:0] r_data;
  logic out_valid, out_ready, out_ref_str, out_rd_str, out_eor, out_last;
  logic [LOC_W-1:0] out_ref_loc, out_rd_loc;
  logic [31:0] empty_lists;

  int checks = 0, failures = 0, out_stall = 30, nempty = 0;

  key_querying dut (.*);
  hbm_rd_model #(.DW(KEY_DW), .AW(ADDR_W), .LATENCY(9), .STALL_PCT(25)) u_mem (
    .clk, .ar_valid, .ar_ready, .ar_addr, .r_valid, .r_ready, .r_data);

  typedef struct { bit eor; bit last; bit str; int unsigned loc; int unsigned s; int unsigned e; } rec_t;
  typedef struct { bit eor; bit last; int unsigned ref_loc; bit ref_str; int unsigned rd_loc; bit rd_str; } out_t;
  rec_t in_q[$];
  out_t exp_q[$];

  always @(posedge clk) out_ready <= ($urandom % 100) >= out_stall;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    in_valid = in_q.size() != 0;
    if (in_q.size() != 0) begin
      in_start = in_q[0].s; in_end = in_q[0].e; in_loc = in_q[0].loc;
      in_str = in_q[0].str; in_eor = in_q[0].eor; in_last = in_q[0].last;
    end
  end

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) void'(in_q.pop_front());
    if (rst_n && out_valid && out_ready) begin
      out_t e;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        if (e.eor || e.last) check(out_eor == e.eor && out_last == e.last, "marker");
        else check(!out_eor && !out_last && out_ref_loc == e.ref_loc &&
                   out_ref_str == e.ref_str && out_rd_loc == e.rd_loc &&
                   out_rd_str == e.rd_str,
                   $sformatf("loc exp ref=%0d rd=%0d got ref=%0d rd=%0d",
                             e.ref_loc, e.rd_loc, out_ref_loc, out_rd_loc));
      end
    end
  end

  // Key array: 4096 random entries.
  function automatic void fill();
    for (int a = 0; a < 4096; a++) u_mem.mem[key_base + ADDR_W'(a)] = {$urandom, $urandom};
  endfunction

  // n records; returns the number of locations
  function automatic int gen(int n, bit with_markers);
    int nl = 0;
    for (int i = 0; i < n; i++) begin
      rec_t r;
      r.s = $urandom % 4000; r.e = r.s + (($urandom % 4 == 0) ? 0 : 1 + $urandom % 6);
      r.loc = $urandom; r.str = $urandom % 2;
      r.eor = with_markers && (i % 11 == 10); r.last = 0;
      in_q.push_back(r);
      if (r.eor) exp_q.push_back('{1, 0, 0, 0, 0, 0});
      else begin
        if (r.e == r.s) nempty++;
        for (int unsigned a = r.s; a < r.e; a++) begin
          key_entry_t k;
          out_t o;
          k = key_entry_t'(u_mem.peek(key_base + ADDR_W'(a)));
          o.eor = 0; o.last = 0; o.ref_loc = k.loc; o.ref_str = k.str;
          o.rd_loc = r.loc; o.rd_str = r.str;
          exp_q.push_back(o);
          nl++;
        end
      end
    end
    return nl;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nl, nrec;
    longint t0;
    fill();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    void'(gen(500, 1));
    in_q.push_back('{0, 1, 0, 0, 0, 0});
    exp_q.push_back('{0, 1, 0, 0, 0, 0});
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    check(empty_lists == nempty, $sformatf("empty_lists %0d vs %0d", empty_lists, nempty));
    // phase 2: no stalls, rate
    u_mem.stall_pct = 0; out_stall = 0;
    repeat (20) @(posedge clk);
    nempty = 0;
    nrec = 300;
    @(negedge clk);
    nl = gen(nrec, 0);
    t0 = $time;
    wait (exp_q.size() == 0);
    check(($time - t0) / 10 <= nl + nempty + 20,
          $sformatf("rate: %0d locations in %0d cycles", nl, ($time - t0) / 10));
    $display("phase2: %0d locations, %0d empty lists, %0d cycles", nl, nempty, ($time - t0) / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
