// voxelcache_top: the VoxelCache memory pipeline of one core.
//
// Instructions enter vc_isa_unit, which computes the pseudoaddress of
// VoxelCache keys and queues every memory request in vc_lsq with its
// addressing-mode flag. VoxelCache entries are issued to vc_controller,
// which looks keys up in, and writes key/pointer lines to, the reserved ways
// of the L1D and L2 levels (two vc_cache_level instances). Virtual-address
// entries leave through the va_* port to the processor's ordinary cache,
// which is not part of this design; that cache asks each level, through the
// l1_nm_* / l2_nm_* ports, which unreserved way to replace, so ordinary data
// never evicts a reserved line. During a reserve sweep the l1_flush_* /
// l2_flush_* outputs tell that cache which of its ordinary lines to write
// back and invalidate, because their ways are being taken.
//
// Default parameters are the paper's CPU configuration: 32 KiB 4-way L1D
// (128 sets, 1 way reserved, 1-cycle access), 256 KiB 8-way L2 (512 sets,
// 2 ways reserved, 4-cycle access), 64-byte lines holding 3 pairs, a 32-entry
// load-store queue. NR, the number of reserved lines of the outermost level,
// is 512 * 2 = 1024. HAS_L2 = 0 with PAIRS = 6, L1_SETS = 256 gives the GPU
// configuration: a 128 KiB 4-way L1D with 128-byte lines, 1 way reserved,
// misses never forwarded to L2.
//
// Reserved ways are not set at reset: software issues reserve_cache_lines
// for each level first (the reset state has no reserved lines, so every
// VoxelCache lookup misses). Responses of lookups and inserts come back on
// resp_* with the instruction's id; resp.found is the lookup's `state`.
module voxelcache_top
  import vc_pkg::*;
#(
  parameter bit          HAS_L2     = 1'b1,
  parameter int unsigned PAIRS      = 3,
  parameter int unsigned L1_SETS    = 128,
  parameter int unsigned L1_WAYS    = 4,
  parameter int unsigned L1_MAX_RSV = 1,
  parameter int unsigned L1_LAT     = 1,
  parameter int unsigned L2_SETS    = 512,
  parameter int unsigned L2_WAYS    = 8,
  parameter int unsigned L2_MAX_RSV = 2,
  parameter int unsigned L2_LAT     = 4,
  parameter int unsigned LSQ_DEPTH  = 32,
  parameter int unsigned NR         = HAS_L2 ? L2_SETS * L2_MAX_RSV : L1_SETS * L1_MAX_RSV,
  parameter int unsigned PA_W       = (NR > 1) ? $clog2(NR) : 1,
  parameter int unsigned L1_SET_W   = (L1_SETS > 1) ? $clog2(L1_SETS) : 1,
  parameter int unsigned L1_WAY_W   = (L1_WAYS > 1) ? $clog2(L1_WAYS) : 1,
  parameter int unsigned L2_SET_W   = (L2_SETS > 1) ? $clog2(L2_SETS) : 1,
  parameter int unsigned L2_WAY_W   = (L2_WAYS > 1) ? $clog2(L2_WAYS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // instruction issue from the core
  input  logic                instr_valid,
  output logic                instr_ready,
  input  vc_instr_t           instr,
  output logic                bad_instr,
  // VoxelCache results (lookup value / status) back to the core
  output logic                resp_valid,
  output vc_resp_t            resp,
  // ordinary virtual-address requests to the processor's cache
  output logic                va_valid,
  input  logic                va_ready,
  output va_req_t             va_req,
  // way restriction for the ordinary cache's replacement
  input  logic [L1_SET_W-1:0] l1_nm_set,
  output logic [L1_WAY_W-1:0] l1_nm_victim,
  output logic                l1_nm_victim_ok,
  input  logic                l1_nm_touch,
  input  logic [L1_WAY_W-1:0] l1_nm_touch_way,
  input  logic [L2_SET_W-1:0] l2_nm_set,
  output logic [L2_WAY_W-1:0] l2_nm_victim,
  output logic                l2_nm_victim_ok,
  input  logic                l2_nm_touch,
  input  logic [L2_WAY_W-1:0] l2_nm_touch_way,
  // status and event pulses
  output logic                cfg_busy,
  output logic [L1_WAY_W:0]   l1_rsv_ways,
  output logic [L2_WAY_W:0]   l2_rsv_ways,
  // reserve sweeps: ordinary lines the host cache must write back and drop
  output logic                l1_flush_valid,
  output logic [L1_SET_W-1:0] l1_flush_set,
  output logic [L1_WAYS-1:0]  l1_flush_ways,
  output logic                l2_flush_valid,
  output logic [L2_SET_W-1:0] l2_flush_set,
  output logic [L2_WAYS-1:0]  l2_flush_ways,
  output logic                ev_l1_line_miss,
  output logic                ev_l2_line_miss,
  output logic                ev_l2_writeback,
  output logic                ev_item_evict,
  output logic                ev_l1_line_evict,
  output logic                ev_l2_line_evict
);

  localparam int unsigned CFG_W = (L1_WAY_W > L2_WAY_W) ? L1_WAY_W : L2_WAY_W;

  // ISA unit <-> LSQ
  logic        lsq_push, lsq_ready, lsq_empty;
  lsq_entry_t  lsq_entry;
  logic        l1_reserve, l2_reserve, unreserve;
  logic [CFG_W:0] cfg_ways;
  logic        l1_busy, l2_busy, ctrl_idle;

  // LSQ <-> controller
  logic        vox_valid, vox_ready;
  vc_req_t     vox_req;
  logic [$clog2(LSQ_DEPTH):0] lsq_count;

  // controller <-> levels
  logic [PA_W-1:0]         l1_rd_pa, l1_wr_pa, l2_rd_pa, l2_wr_pa;
  logic                    l1_rd_hit, l2_rd_hit, l1_wr_en, l2_wr_en;
  pair_t       [PAIRS-1:0] l1_rd_pairs, l1_wr_pairs, l2_rd_pairs, l2_wr_pairs;
  slot_state_t [PAIRS-1:0] l1_rd_st, l1_wr_st, l2_rd_st, l2_wr_st;
  logic                    l1_evict, l2_evict;

  assign cfg_busy = l1_busy || l2_busy;

  vc_isa_unit #(.NR(NR), .WAY_W(CFG_W)) u_isa (
    .instr_valid(instr_valid),
    .instr_ready(instr_ready),
    .instr      (instr),
    .lsq_push   (lsq_push),
    .lsq_ready  (lsq_ready),
    .lsq_entry  (lsq_entry),
    .lsq_empty  (lsq_empty),
    .ctrl_idle  (ctrl_idle),
    .cfg_busy   (cfg_busy),
    .l1_reserve (l1_reserve),
    .l2_reserve (l2_reserve),
    .unreserve  (unreserve),
    .cfg_ways   (cfg_ways),
    .bad_instr  (bad_instr)
  );

  vc_lsq #(.DEPTH(LSQ_DEPTH)) u_lsq (
    .clk       (clk),
    .rst_n     (rst_n),
    .push_valid(lsq_push),
    .push_ready(lsq_ready),
    .push_entry(lsq_entry),
    .vox_valid (vox_valid),
    .vox_ready (vox_ready),
    .vox_req   (vox_req),
    .va_valid  (va_valid),
    .va_ready  (va_ready),
    .va_req    (va_req),
    .empty     (lsq_empty),
    .count     (lsq_count)
  );

  logic ctrl_ready;
  assign vox_ready = ctrl_ready && !cfg_busy;
  assign ctrl_idle = ctrl_ready;

  vc_controller #(
    .HAS_L2(HAS_L2), .PAIRS(PAIRS), .PA_W(PA_W), .L1_LAT(L1_LAT), .L2_LAT(L2_LAT)
  ) u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .req_valid      (vox_valid && !cfg_busy),
    .req_ready      (ctrl_ready),
    .req            (vox_req),
    .resp_valid     (resp_valid),
    .resp           (resp),
    .l1_rd_pa       (l1_rd_pa),
    .l1_rd_hit      (l1_rd_hit),
    .l1_rd_pairs    (l1_rd_pairs),
    .l1_rd_st       (l1_rd_st),
    .l1_wr_en       (l1_wr_en),
    .l1_wr_pa       (l1_wr_pa),
    .l1_wr_pairs    (l1_wr_pairs),
    .l1_wr_st       (l1_wr_st),
    .l2_rd_pa       (l2_rd_pa),
    .l2_rd_hit      (l2_rd_hit),
    .l2_rd_pairs    (l2_rd_pairs),
    .l2_rd_st       (l2_rd_st),
    .l2_wr_en       (l2_wr_en),
    .l2_wr_pa       (l2_wr_pa),
    .l2_wr_pairs    (l2_wr_pairs),
    .l2_wr_st       (l2_wr_st),
    .ev_l1_line_miss(ev_l1_line_miss),
    .ev_l2_line_miss(ev_l2_line_miss),
    .ev_l2_writeback(ev_l2_writeback),
    .ev_item_evict  (ev_item_evict)
  );

  vc_cache_level #(
    .SETS(L1_SETS), .WAYS(L1_WAYS), .MAX_RSV(L1_MAX_RSV), .PAIRS(PAIRS), .PA_W(PA_W)
  ) u_l1 (
    .clk          (clk),
    .rst_n        (rst_n),
    .cfg_reserve  (l1_reserve),
    .cfg_unreserve(unreserve),
    .cfg_ways     ((L1_WAY_W+1)'(cfg_ways)),
    .cfg_busy     (l1_busy),
    .rsv_ways     (l1_rsv_ways),
    .flush_valid  (l1_flush_valid),
    .flush_set    (l1_flush_set),
    .flush_ways   (l1_flush_ways),
    .rd_pa        (l1_rd_pa),
    .rd_hit       (l1_rd_hit),
    .rd_pairs     (l1_rd_pairs),
    .rd_st        (l1_rd_st),
    .wr_en        (l1_wr_en),
    .wr_pa        (l1_wr_pa),
    .wr_pairs     (l1_wr_pairs),
    .wr_st        (l1_wr_st),
    .wr_evict     (l1_evict),
    .nm_set       (l1_nm_set),
    .nm_victim    (l1_nm_victim),
    .nm_victim_ok (l1_nm_victim_ok),
    .nm_touch     (l1_nm_touch),
    .nm_touch_way (l1_nm_touch_way)
  );
  assign ev_l1_line_evict = l1_evict;

  if (HAS_L2) begin : g_l2
    vc_cache_level #(
      .SETS(L2_SETS), .WAYS(L2_WAYS), .MAX_RSV(L2_MAX_RSV), .PAIRS(PAIRS), .PA_W(PA_W)
    ) u_l2 (
      .clk          (clk),
      .rst_n        (rst_n),
      .cfg_reserve  (l2_reserve),
      .cfg_unreserve(unreserve),
      .cfg_ways     ((L2_WAY_W+1)'(cfg_ways)),
      .cfg_busy     (l2_busy),
      .rsv_ways     (l2_rsv_ways),
      .flush_valid  (l2_flush_valid),
      .flush_set    (l2_flush_set),
      .flush_ways   (l2_flush_ways),
      .rd_pa        (l2_rd_pa),
      .rd_hit       (l2_rd_hit),
      .rd_pairs     (l2_rd_pairs),
      .rd_st        (l2_rd_st),
      .wr_en        (l2_wr_en),
      .wr_pa        (l2_wr_pa),
      .wr_pairs     (l2_wr_pairs),
      .wr_st        (l2_wr_st),
      .wr_evict     (l2_evict),
      .nm_set       (l2_nm_set),
      .nm_victim    (l2_nm_victim),
      .nm_victim_ok (l2_nm_victim_ok),
      .nm_touch     (l2_nm_touch),
      .nm_touch_way (l2_nm_touch_way)
    );
  end else begin : g_no_l2
    // GPU configuration: no reserved section outside L1D
    assign l2_busy         = 1'b0;
    assign l2_rsv_ways     = '0;
    assign l2_flush_valid  = 1'b0;
    assign l2_flush_set    = '0;
    assign l2_flush_ways   = '0;
    assign l2_rd_hit       = 1'b0;
    assign l2_rd_pairs     = '0;
    assign l2_rd_st        = '0;
    assign l2_evict        = 1'b0;
    assign l2_nm_victim    = '0;
    assign l2_nm_victim_ok = 1'b0;
  end
  assign ev_l2_line_evict = l2_evict;

endmodule
