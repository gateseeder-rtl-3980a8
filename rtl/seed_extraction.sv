// seed_extraction: minimizer seeds of a read batch, one window per cycle.
//
// A read_fetch front end streams the batch's base codes out of the PE's read
// memory section. Each accepted base is shifted into a register holding the
// last W+K-1 bases of the current read, which covers W overlapping k-mers:
// one sliding window. W kmer_hash_unit copies hash all W k-mers of the window
// in parallel (the paper's replication of the hash logic w times), a
// comparator tree picks the valid k-mer with the smallest hash (the leftmost
// one on a tie), and the result is emitted as a seed unless it is the same
// k-mer the previous window already emitted. So one window, and at most one
// seed, is processed per cycle.
//
// Pipeline (all stages move together while the output register is free or
// being read): S1 window register, S2 hash registers, S3 minimum register,
// then the output register; the latency from base to seed is 4 cycles.
// An E code ends the read: the window is emptied, read positions restart at
// 0 and one end-of-read marker (seed_eor) is sent downstream in order. After
// the batch, one marker with seed_last set is sent and done is raised.
//
// Seed fields: seed_hash (the 2K-bit hash, used as the map-array index),
// seed_loc (start of the k-mer in its read, 0-based), seed_str (1 when the
// reverse complement is the canonical k-mer).
// From the paper: the minimizer algorithm, one minimizer per cycle, w hash
// units in parallel, a pipelined design. This design's choices: the hash, the
// canonical k-mer and strand convention, the tie rule, the start position as
// seed location, and that a read shorter than W+K-1 bases gives no seed.
module seed_extraction
  import gs_pkg::*;
#(
  parameter int unsigned K     = 15,
  parameter int unsigned W     = 10,
  parameter int unsigned RD_DW = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] rd_base,
  input  logic [31:0]       nb_bases,
  output logic              done,
  // read channel
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [RD_DW-1:0]  r_data,
  // seed stream
  output logic              seed_valid,
  input  logic              seed_ready,
  output logic [2*K-1:0]    seed_hash,
  output logic [LOC_W-1:0]  seed_loc,
  output logic              seed_str,
  output logic              seed_eor,
  output logic              seed_last
);
  localparam int unsigned SPAN = W + K - 1;
  localparam int unsigned TW   = (W > 1) ? $clog2(W) : 1;

  // ---------------------------------------------------------------- input
  logic  b_valid, b_ready, b_last, fetch_done;
  base_e b_base;

  read_fetch #(.RD_DW(RD_DW)) u_fetch (
    .clk, .rst_n, .start, .rd_base, .nb_bases, .done(fetch_done),
    .ar_valid, .ar_ready, .ar_addr, .r_valid, .r_ready, .r_data,
    .out_valid(b_valid), .out_ready(b_ready), .out_base(b_base),
    .out_last(b_last)
  );

  logic adv;   // the whole pipeline moves
  assign adv     = !seed_valid || seed_ready;
  assign b_ready = adv;

  // ---------------------------------------------------------------- S1
  base_e       win [SPAN];     // win[SPAN-1] is the newest base
  logic [31:0] rd_cnt;         // bases of the current read seen so far
  logic        s1_win, s1_eor, s1_last;
  logic [31:0] s1_pos;         // read position of the window's first k-mer

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(SPAN); i++) win[i] <= BASE_N;
      rd_cnt  <= '0;
      s1_win  <= 1'b0;
      s1_eor  <= 1'b0;
      s1_last <= 1'b0;
      s1_pos  <= '0;
    end else if (start) begin
      rd_cnt  <= '0;
      s1_win  <= 1'b0;
      s1_eor  <= 1'b0;
      s1_last <= 1'b0;
    end else if (adv) begin
      s1_win  <= 1'b0;
      s1_eor  <= 1'b0;
      s1_last <= 1'b0;
      if (b_valid) begin
        if (b_last) begin
          s1_last <= 1'b1;
          rd_cnt  <= '0;
        end else if (b_base == BASE_E) begin
          s1_eor  <= 1'b1;
          rd_cnt  <= '0;
        end else begin
          for (int i = 0; i < int'(SPAN) - 1; i++) win[i] <= win[i+1];
          win[SPAN-1] <= b_base;
          rd_cnt      <= rd_cnt + 1;
          s1_win      <= (rd_cnt + 1 >= SPAN);
          s1_pos      <= rd_cnt + 1 - SPAN;
        end
      end
    end
  end

  // ---------------------------------------------------------------- S2
  logic [2*K-1:0] h_hash [W];
  logic           h_str  [W];
  logic           h_val  [W];

  for (genvar t = 0; t < int'(W); t++) begin : g_hash
    base_e kmer [K];
    for (genvar j = 0; j < int'(K); j++) begin : g_base
      assign kmer[j] = win[t+j];
    end
    kmer_hash_unit #(.K(K)) u_hash (
      .kmer(kmer), .hash(h_hash[t]), .str(h_str[t]), .valid(h_val[t])
    );
  end

  logic [2*K-1:0] s2_hash [W];
  logic           s2_str  [W];
  logic           s2_kv   [W];
  logic           s2_win, s2_eor, s2_last;
  logic [31:0]    s2_pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < int'(W); t++) begin
        s2_hash[t] <= '0;
        s2_str[t]  <= 1'b0;
        s2_kv[t]   <= 1'b0;
      end
      s2_win  <= 1'b0;
      s2_eor  <= 1'b0;
      s2_last <= 1'b0;
      s2_pos  <= '0;
    end else if (start) begin
      s2_win  <= 1'b0;
      s2_eor  <= 1'b0;
      s2_last <= 1'b0;
    end else if (adv) begin
      for (int t = 0; t < int'(W); t++) begin
        s2_hash[t] <= h_hash[t];
        s2_str[t]  <= h_str[t];
        s2_kv[t]   <= h_val[t] && s1_win;
      end
      s2_win  <= s1_win;
      s2_eor  <= s1_eor;
      s2_last <= s1_last;
      s2_pos  <= s1_pos;
    end
  end

  // ---------------------------------------------------------------- S3
  // Smallest valid hash of the window; the leftmost k-mer wins a tie.
  logic [2*K-1:0] m_hash;
  logic [TW-1:0]  m_idx;
  logic           m_any;

  always_comb begin
    m_hash = '1;
    m_idx  = '0;
    m_any  = 1'b0;
    for (int t = 0; t < int'(W); t++) begin
      if (s2_kv[t] && (!m_any || s2_hash[t] < m_hash)) begin
        m_hash = s2_hash[t];
        m_idx  = TW'(t);
        m_any  = 1'b1;
      end
    end
  end

  logic [2*K-1:0]   s3_hash;
  logic [LOC_W-1:0] s3_loc;
  logic             s3_str, s3_any, s3_eor, s3_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_hash <= '0;
      s3_loc  <= '0;
      s3_str  <= 1'b0;
      s3_any  <= 1'b0;
      s3_eor  <= 1'b0;
      s3_last <= 1'b0;
    end else if (start) begin
      s3_any  <= 1'b0;
      s3_eor  <= 1'b0;
      s3_last <= 1'b0;
    end else if (adv) begin
      s3_hash <= m_hash;
      s3_loc  <= s2_pos + LOC_W'(m_idx);
      s3_str  <= s2_str[m_idx];
      s3_any  <= s2_win && m_any;
      s3_eor  <= s2_eor;
      s3_last <= s2_last;
    end
  end

  // ---------------------------------------------------------------- output
  logic             prev_valid;   // a seed of this read was already emitted
  logic [LOC_W-1:0] prev_loc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seed_valid <= 1'b0;
      seed_hash  <= '0;
      seed_loc   <= '0;
      seed_str   <= 1'b0;
      seed_eor   <= 1'b0;
      seed_last  <= 1'b0;
      prev_valid <= 1'b0;
      prev_loc   <= '0;
      done       <= 1'b0;
    end else if (start) begin
      seed_valid <= 1'b0;
      prev_valid <= 1'b0;
      done       <= 1'b0;
    end else begin
      if (seed_valid && seed_ready && seed_last) done <= 1'b1;
      if (adv) begin
        seed_valid <= 1'b0;
        seed_eor   <= 1'b0;
        seed_last  <= 1'b0;
        if (s3_eor || s3_last) begin
          seed_valid <= 1'b1;
          seed_eor   <= s3_eor;
          seed_last  <= s3_last;
          prev_valid <= 1'b0;
        end else if (s3_any && !(prev_valid && prev_loc == s3_loc)) begin
          seed_valid <= 1'b1;
          seed_hash  <= s3_hash;
          seed_loc   <= s3_loc;
          seed_str   <= s3_str;
          prev_valid <= 1'b1;
          prev_loc   <= s3_loc;
        end
      end
    end
  end

endmodule
