// vc_cache_level: the VoxelCache part of one cache level (L1D or L2).
//
// Every line of the level carries a one-bit mode flag in its cache state.
// reserve_cache_lines(m) marks the first m ways of every set as reserved for
// key/pointer lines and invalidates them; unreserve_lines clears the flag and
// invalidates them again. Both walk the sets one per cycle (`cfg_busy` high
// meanwhile). A reserve must also evict the ordinary data held in the ways
// it takes; that data lives in the host cache, so at each step of the sweep
// flush_set / flush_ways name the ways of that set that change from
// ordinary to reserved, and the host cache writes them back and invalidates
// them in that cycle (the one-cycle flush window is this design's choice).
// A reserved line holds PAIRS key/pointer pairs, a tag, the per-slot valid
// bits and within-line LRU ages (see vc_line_logic).
//
// The set and tag of a key come from its pseudoaddress: set = pa % SETS,
// tag = pa / SETS. A probe (rd_pa) searches the valid reserved lines of the
// set for the tag, combinationally: an entire-line hit returns the line, an
// entire-line miss returns rd_hit = 0. A line write (wr_en) stores a whole
// line: over the line with the same tag if there is one, else into an
// invalid reserved way, else over the least recently used reserved way
// (entire-line LRU). Every write makes the line most recently used.
//
// Ordinary virtual-address accesses stay in the unreserved ways. The data
// path for them is the processor's own cache; this block only supplies the
// restriction: nm_victim is the least recently used way whose mode flag is
// clear, and nm_touch records a normal-mode access in the same LRU order.
//
// Storage for reserved lines exists for the first MAX_RSV ways only; a
// reservation larger than MAX_RSV is clamped to it. The paper reserves 1 of
// 4 ways in L1D and 2 of 8 in L2 and these are the defaults; in a real cache
// the reserved lines reuse the existing data array.
//
// Timing: probe is combinational, writes and touches take effect at the next
// clock edge. If a line write and nm_touch arrive in the same cycle the write
// wins and the touch is dropped (one LRU update per set per cycle; this
// design's choice). Reset (rst_n low, synchronous) clears all mode and valid
// bits.
module vc_cache_level
  import vc_pkg::*;
#(
  parameter int unsigned SETS    = 128,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned MAX_RSV = 1,
  parameter int unsigned PAIRS   = 3,
  parameter int unsigned PA_W    = 10,
  parameter int unsigned SET_W   = (SETS > 1) ? $clog2(SETS) : 1,
  parameter int unsigned WAY_W   = (WAYS > 1) ? $clog2(WAYS) : 1,
  parameter int unsigned TAG_W   = (PA_W > SET_W) ? PA_W - SET_W : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration: reserve_cache_lines / unreserve_lines
  input  logic                    cfg_reserve,
  input  logic                    cfg_unreserve,
  input  logic [WAY_W:0]          cfg_ways,
  output logic                    cfg_busy,
  output logic [WAY_W:0]          rsv_ways,
  output logic                    flush_valid, // sweep asks the host cache to
  output logic [SET_W-1:0]        flush_set,   // write back and drop the ordinary
  output logic [WAYS-1:0]         flush_ways,  // lines of these ways of this set
  // probe
  input  logic [PA_W-1:0]         rd_pa,
  output logic                    rd_hit,
  output pair_t       [PAIRS-1:0] rd_pairs,
  output slot_state_t [PAIRS-1:0] rd_st,
  // whole-line write
  input  logic                    wr_en,
  input  logic [PA_W-1:0]         wr_pa,
  input  pair_t       [PAIRS-1:0] wr_pairs,
  input  slot_state_t [PAIRS-1:0] wr_st,
  output logic                    wr_evict,    // a valid line of another tag is replaced
  // normal-mode way restriction
  input  logic [SET_W-1:0]        nm_set,
  output logic [WAY_W-1:0]        nm_victim,
  output logic                    nm_victim_ok,
  input  logic                    nm_touch,
  input  logic [WAY_W-1:0]        nm_touch_way
);

  typedef logic [WAY_W-1:0] age_t;
  typedef age_t [WAYS-1:0]  set_age_t;

  // reset order of the line LRU: way w has age w
  function automatic set_age_t age_init();
    set_age_t a;
    for (int w = 0; w < WAYS; w++) a[w] = WAY_W'(w);
    return a;
  endfunction
  localparam set_age_t AGE_INIT = age_init();

  logic     [WAYS-1:0]            mode_q  [SETS];
  set_age_t                       age_q   [SETS];
  logic     [MAX_RSV-1:0]         valid_q [SETS];
  logic [TAG_W-1:0]               tag_q   [SETS][MAX_RSV];
  pair_t       [PAIRS-1:0]        data_q  [SETS][MAX_RSV];
  slot_state_t [PAIRS-1:0]        st_q    [SETS][MAX_RSV];

  // configuration sweep
  logic             sweeping_q;
  logic [SET_W-1:0] sweep_set_q;
  logic [WAY_W:0]   sweep_m_q;

  assign cfg_busy = sweeping_q;

  // Ways that the current sweep step turns from ordinary into reserved:
  // their ordinary data belongs to the host cache, which must evict it.
  always_comb begin
    flush_valid = sweeping_q;
    flush_set   = sweep_set_q;
    for (int w = 0; w < WAYS; w++)
      flush_ways[w] = sweeping_q && !mode_q[sweep_set_q][w] && (w < int'(sweep_m_q));
  end

  function automatic logic [SET_W-1:0] set_of(logic [PA_W-1:0] pa);
    return SET_W'(pa % SETS);
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [PA_W-1:0] pa);
    return TAG_W'(pa / SETS);
  endfunction

  // ---------------- probe ----------------
  logic [SET_W-1:0] rd_set;
  int unsigned      rd_way;
  always_comb begin
    rd_set   = set_of(rd_pa);
    rd_hit   = 1'b0;
    rd_way   = 0;
    for (int w = 0; w < MAX_RSV; w++) begin
      if (mode_q[rd_set][w] && valid_q[rd_set][w] && tag_q[rd_set][w] == tag_of(rd_pa) && !rd_hit) begin
        rd_hit = 1'b1;
        rd_way = w;
      end
    end
    rd_pairs = data_q[rd_set][rd_way];
    rd_st    = st_q[rd_set][rd_way];
  end

  // ---------------- write-way choice ----------------
  logic [SET_W-1:0] wr_set;
  int unsigned      wr_way;
  logic             wr_found, wr_free;
  always_comb begin
    wr_set   = set_of(wr_pa);
    wr_found = 1'b0;
    wr_free  = 1'b0;
    wr_way   = 0;
    for (int w = 0; w < MAX_RSV; w++) begin
      if (mode_q[wr_set][w] && valid_q[wr_set][w] && tag_q[wr_set][w] == tag_of(wr_pa) && !wr_found) begin
        wr_found = 1'b1;
        wr_way   = w;
      end
    end
    if (!wr_found) begin
      for (int w = MAX_RSV - 1; w >= 0; w--) begin
        if (mode_q[wr_set][w] && !valid_q[wr_set][w]) begin
          wr_free = 1'b1;
          wr_way  = w;
        end
      end
    end
    if (!wr_found && !wr_free) begin
      // least recently used reserved line
      for (int w = 0; w < MAX_RSV; w++) begin
        if (mode_q[wr_set][w] && age_q[wr_set][w] >= age_q[wr_set][wr_way]) wr_way = w;
      end
    end
    wr_evict = wr_en && !wr_found && !wr_free && (rsv_ways != 0);
  end

  // ---------------- normal-mode victim ----------------
  always_comb begin
    nm_victim    = '0;
    nm_victim_ok = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (!mode_q[nm_set][w] && (!nm_victim_ok || age_q[nm_set][w] > age_q[nm_set][nm_victim])) begin
        nm_victim    = WAY_W'(w);
        nm_victim_ok = 1'b1;
      end
    end
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sweeping_q  <= 1'b0;
      sweep_set_q <= '0;
      sweep_m_q   <= '0;
      rsv_ways    <= '0;
      for (int s = 0; s < SETS; s++) begin
        mode_q[s]  <= '0;
        age_q[s]   <= AGE_INIT;
        valid_q[s] <= '0;
      end
    end else if (sweeping_q) begin
      for (int w = 0; w < WAYS; w++) mode_q[sweep_set_q][w] <= (w < int'(sweep_m_q));
      valid_q[sweep_set_q] <= '0;
      if (int'(sweep_set_q) == SETS - 1) sweeping_q <= 1'b0;
      sweep_set_q <= sweep_set_q + 1'b1;
    end else if (cfg_reserve || cfg_unreserve) begin
      sweeping_q  <= 1'b1;
      sweep_set_q <= '0;
      sweep_m_q   <= cfg_unreserve ? '0 :
                     (int'(cfg_ways) > MAX_RSV) ? (WAY_W+1)'(MAX_RSV) : cfg_ways;
      rsv_ways    <= cfg_unreserve ? '0 :
                     (int'(cfg_ways) > MAX_RSV) ? (WAY_W+1)'(MAX_RSV) : cfg_ways;
    end else begin
      if (wr_en && mode_q[wr_set][wr_way]) begin
        valid_q[wr_set][wr_way] <= 1'b1;
        tag_q[wr_set][wr_way]   <= tag_of(wr_pa);
        data_q[wr_set][wr_way]  <= wr_pairs;
        st_q[wr_set][wr_way]    <= wr_st;
        for (int w = 0; w < WAYS; w++) begin
          if (age_q[wr_set][w] < age_q[wr_set][wr_way]) age_q[wr_set][w] <= age_q[wr_set][w] + 1'b1;
        end
        age_q[wr_set][wr_way] <= '0;
      end else if (nm_touch && !mode_q[nm_set][nm_touch_way]) begin
        for (int w = 0; w < WAYS; w++) begin
          if (age_q[nm_set][w] < age_q[nm_set][nm_touch_way]) age_q[nm_set][w] <= age_q[nm_set][w] + 1'b1;
        end
        age_q[nm_set][nm_touch_way] <= '0;
      end
    end
  end

  // a line write and a normal-mode touch are not issued while a sweep runs
  property p_no_access_in_sweep;
    @(posedge clk) disable iff (!rst_n) sweeping_q |-> !wr_en;
  endproperty
  a_no_access_in_sweep: assert property (p_no_access_in_sweep);

endmodule
