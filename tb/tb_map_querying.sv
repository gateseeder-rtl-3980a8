// tb_map_querying: self-checking test of map_querying at its default K = 15.
//
// Random seeds and end-of-read markers are fed to the module; a memory model
// holds random map-array words at the addresses the seeds touch. Each output
// record must carry map[h] as ptr_start, map[h+1] as ptr_end and the seed's
// location and strand, in input order; markers must pass through in place.
// Phase 1 adds random stalls on the memory and on out_ready. Phase 2 runs
// without stalls and checks the initiation interval of 2: N seeds take
// between 2N and 2N plus a fixed latency cycles.
module tb_map_querying;
  import gs_pkg::*;
  localparam int K = 15;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] map_base = 40'h10_0000_0000;
  logic seed_valid, seed_ready, seed_str, seed_eor, seed_last;
  logic [2*K-1:0] seed_hash;
  logic [LOC_W-1:0] seed_loc;
  logic ar_valid, ar_ready, r_valid, r_ready;
  logic [ADDR_W-1:0] ar_addr;
  logic [PTR_W-1:0] r_data;
  logic out_valid, out_ready, out_str, out_eor, out_last;
  logic [PTR_W-1:0] out_start, out_end;
  logic [LOC_W-1:0] out_loc;

  int checks = 0, failures = 0, out_stall = 30;

  map_querying #(.K(K)) dut (.*);
  hbm_rd_model #(.DW(PTR_W), .AW(ADDR_W), .LATENCY(10), .STALL_PCT(25)) u_mem (
    .clk, .ar_valid, .ar_ready, .ar_addr, .r_valid, .r_ready, .r_data);

  typedef struct { bit eor; bit last; bit str; int unsigned loc; longint unsigned h; } rec_t;
  rec_t in_q[$], exp_q[$];

  always @(posedge clk) out_ready <= ($urandom % 100) >= out_stall;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // driver: present in_q entries in order (updated between clock edges)
  always @(negedge clk) begin
    seed_valid = in_q.size() != 0;
    seed_hash  = (in_q.size() != 0) ? (2*K)'(in_q[0].h) : '0;
    seed_loc   = (in_q.size() != 0) ? in_q[0].loc : '0;
    seed_str   = (in_q.size() != 0) ? in_q[0].str : 1'b0;
    seed_eor   = (in_q.size() != 0) ? in_q[0].eor : 1'b0;
    seed_last  = (in_q.size() != 0) ? in_q[0].last : 1'b0;
  end

  int nout = 0;
  always @(posedge clk) begin
    if (rst_n && seed_valid && seed_ready) void'(in_q.pop_front());
    if (rst_n && out_valid && out_ready) begin
      rec_t e;
      nout++;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        if (e.eor || e.last)
          check(out_eor == e.eor && out_last == e.last, "marker");
        else
          check(!out_eor && !out_last && out_loc == e.loc && out_str == e.str &&
                out_start == u_mem.peek(map_base + ADDR_W'(e.h)) &&
                out_end == u_mem.peek(map_base + ADDR_W'(e.h) + 1),
                $sformatf("seed h=%0h: got %0d..%0d", e.h, out_start, out_end));
      end
    end
  end

  function automatic void gen(int n);
    for (int i = 0; i < n; i++) begin
      rec_t r;
      r.h = longint'($urandom) & ((64'd1 << (2*K)) - 1);
      if (i % 50 == 7) r.h = (64'd1 << (2*K)) - 1;   // largest hash
      r.loc = $urandom % 100000; r.str = $urandom % 2;
      r.eor = (n > 1) && (i % 13 == 12) && (i != n - 1); r.last = (i == n - 1);
      if (!r.eor && !r.last) begin
        u_mem.mem[map_base + ADDR_W'(r.h)]     = $urandom;
        u_mem.mem[map_base + ADDR_W'(r.h) + 1] = $urandom;
      end
      in_q.push_back(r); exp_q.push_back(r);
    end
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n2;
    longint t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    gen(600);
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    // phase 2: no stalls, interval check
    u_mem.stall_pct = 0; out_stall = 0;
    repeat (5) @(posedge clk);
    n2 = 400;
    for (int i = 0; i < n2; i++) begin
      rec_t r;
      r.h = longint'($urandom) & ((64'd1 << (2*K)) - 1);
      r.loc = i; r.str = 0; r.eor = 0; r.last = 0;
      in_q.push_back(r); exp_q.push_back(r);
    end
    @(posedge clk);
    t0 = $time;
    wait (exp_q.size() == 0);
    check(($time - t0) / 10 >= 2 * n2 && ($time - t0) / 10 <= 2 * n2 + 20,
          $sformatf("interval: %0d seeds in %0d cycles", n2, ($time - t0) / 10));
    $display("outputs=%0d phase2 cycles=%0d for %0d seeds", nout, ($time - t0) / 10, n2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
