// taint_cache: tag and taint arrays of the last-level cache, extended with
// one taint bit per 64-bit word (8 bits per 64-byte line).
//
// The taint bits let a register that was spilled to non-transient memory
// (the stack) come back with its own taint instead of the page's. A line is
// allocated on every access that misses; its eight taint bits start as the
// NT bit of the page it belongs to. A store writes the taint of the stored
// register into the bit of the word it hits when the page is non-transient,
// and clears it for a normal page. A load takes the taint bit of its word
// when the line is present; on a miss it takes the page's NT bit, so an
// evicted line can only make data look more secret, never less.
//
// Organisation: SETS sets of WAYS ways, true LRU kept as a per-way age
// (0 = most recent). After reset the arrays are cleared one set per cycle;
// `ready` is low for those SETS cycles. Each set is kept as one word per
// array so that a set is read and rewritten whole, one access per cycle.
//
// Interface and timing: an access (acc_valid with acc_ready high) is looked
// up in the same cycle: acc_hit and ld_taint are combinational. The line,
// taint bits and LRU ages are updated at the clock edge. flush_valid
// invalidates the line holding flush_paddr (the write-back of data is the
// job of the unchanged cache data path, which is not part of this block).
//
// From the paper: 8-way, LRU, inclusive last level, 8 taint bits per line,
// cache bit taking precedence over the TLB bit. Chosen here: 1024 sets
// (the paper gives no capacity), allocate on both loads and stores, and the
// fill value of the taint bits.
module taint_cache
  import contxt_pkg::*;
#(
  parameter int unsigned SETS = 1024,
  parameter int unsigned WAYS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               ready,
  // one access per cycle
  input  logic               acc_valid,
  input  logic               acc_write,     // 1: store, 0: load
  input  logic [PA_BITS-1:0] acc_paddr,
  input  logic               acc_page_nt,   // NT bit of the page, from the TLB
  input  logic               acc_st_taint,  // taint of the stored register
  output logic               acc_hit,
  output logic               ld_taint,      // taint the loaded value carries
  // invalidate one line
  input  logic               flush_valid,
  input  logic [PA_BITS-1:0] flush_paddr,
  // eviction report
  output logic               evict_valid
);
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned WORD_W = $clog2(WORDS_PER_LN);
  localparam int unsigned TAG_W  = PA_BITS - LINE_OFS_W - SET_W;

  typedef logic [WAYS-1:0][TAG_W-1:0]        tag_set_t;
  typedef logic [WAYS-1:0][WORDS_PER_LN-1:0] tnt_set_t;
  typedef logic [WAYS-1:0][WAY_W-1:0]        age_set_t;
  typedef logic [WAYS-1:0]                   vld_set_t;

  tag_set_t tag_mem [SETS];
  tnt_set_t tnt_mem [SETS];
  age_set_t age_mem [SETS];
  vld_set_t vld_mem [SETS];

  // ---------------------------------------------------------------- init
  logic             init_busy;
  logic [SET_W-1:0] init_set;

  assign ready = !init_busy;

  // ---------------------------------------------------------------- lookup
  logic [SET_W-1:0]  a_set;
  logic [TAG_W-1:0]  a_tag;
  logic [WORD_W-1:0] a_word;
  assign a_set  = acc_paddr[LINE_OFS_W +: SET_W];
  assign a_tag  = acc_paddr[PA_BITS-1 -: TAG_W];
  assign a_word = acc_paddr[3 +: WORD_W];

  tag_set_t r_tag;
  tnt_set_t r_tnt;
  age_set_t r_age;
  vld_set_t r_vld;
  assign r_tag = tag_mem[a_set];
  assign r_tnt = tnt_mem[a_set];
  assign r_age = age_mem[a_set];
  assign r_vld = vld_mem[a_set];

  logic             hit;
  logic [WAY_W-1:0] hit_way;
  logic             have_free;
  logic [WAY_W-1:0] free_way;
  logic [WAY_W-1:0] lru_way;

  always_comb begin
    hit       = 1'b0;
    hit_way   = '0;
    have_free = 1'b0;
    free_way  = '0;
    lru_way   = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (r_vld[w] && r_tag[w] == a_tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
      if (r_age[w] == WAY_W'(WAYS - 1)) lru_way = WAY_W'(w);
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!r_vld[w]) begin
        have_free = 1'b1;
        free_way  = WAY_W'(w);
      end
    end
  end

  logic [WAY_W-1:0] use_way;
  assign use_way = hit ? hit_way : (have_free ? free_way : lru_way);

  assign acc_hit     = acc_valid && ready && hit;
  assign ld_taint    = hit ? r_tnt[hit_way][a_word] : acc_page_nt;
  assign evict_valid = acc_valid && ready && !hit && !have_free;

  // next contents of the accessed set
  tag_set_t n_tag;
  tnt_set_t n_tnt;
  age_set_t n_age;
  vld_set_t n_vld;

  always_comb begin
    n_tag = r_tag;
    n_tnt = r_tnt;
    n_vld = r_vld;
    n_age = r_age;
    if (!hit) begin
      n_tag[use_way] = a_tag;
      n_vld[use_way] = 1'b1;
      n_tnt[use_way] = {WORDS_PER_LN{acc_page_nt}};
    end
    if (acc_write)
      n_tnt[use_way][a_word] = acc_page_nt & acc_st_taint;
    for (int unsigned w = 0; w < WAYS; w++)
      if (r_age[w] < r_age[use_way]) n_age[w] = r_age[w] + 1'b1;
    n_age[use_way] = '0;
    // a flush of a line of the same set in the same cycle
    if (flush_valid && flush_paddr[LINE_OFS_W +: SET_W] == a_set)
      for (int unsigned w = 0; w < WAYS; w++)
        if (n_tag[w] == flush_paddr[PA_BITS-1 -: TAG_W]) n_vld[w] = 1'b0;
  end

  // flush lookup
  logic [SET_W-1:0] f_set;
  logic [TAG_W-1:0] f_tag;
  vld_set_t         f_vld;
  tag_set_t         f_tags;
  assign f_set  = flush_paddr[LINE_OFS_W +: SET_W];
  assign f_tag  = flush_paddr[PA_BITS-1 -: TAG_W];
  assign f_tags = tag_mem[f_set];
  always_comb begin
    f_vld = vld_mem[f_set];
    for (int unsigned w = 0; w < WAYS; w++)
      if (f_tags[w] == f_tag) f_vld[w] = 1'b0;
  end

  age_set_t init_age;
  always_comb
    for (int unsigned w = 0; w < WAYS; w++) init_age[w] = WAY_W'(w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_set  <= '0;
    end else if (init_busy) begin
      init_set <= init_set + 1'b1;
      if (init_set == SET_W'(SETS - 1)) init_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy) begin
      vld_mem[init_set] <= '0;
      age_mem[init_set] <= init_age;
      tnt_mem[init_set] <= '0;
      tag_mem[init_set] <= '0;
    end else begin
      if (acc_valid) begin
        tag_mem[a_set] <= n_tag;
        tnt_mem[a_set] <= n_tnt;
        age_mem[a_set] <= n_age;
        vld_mem[a_set] <= n_vld;
      end
      if (flush_valid && !(acc_valid && f_set == a_set))
        vld_mem[f_set] <= f_vld;
    end
  end

  a_no_access_during_init: assert property (@(posedge clk) disable iff (!rst_n) init_busy |-> !acc_valid);

endmodule
