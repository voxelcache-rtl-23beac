// tb_voxelcache_top: end-to-end run of the whole pipeline at its default
// (CPU) parameters.
//
// Software side, modelled here: the block-pointer wrapper of the mapping
// application (lookup in VoxelCache; on a miss, look the key up in the
// software voxel hash table, modelled as an associative array, then insert
// the pair). The key stream is a TSDF-style map update: each frame casts
// rays from a slowly moving sensor through the voxel-block grid, so blocks
// repeat within a frame and between frames.
//
// Checked: every pointer VoxelCache returns equals the hash table's; the
// latency of the first lookups (L1D: 2 cycles from issue, L2: 6); that
// ordinary loads/stores come out of the va port in order; that the normal-
// mode victim is never a reserved way; that a full load-store queue stalls
// issue; that remove and unreserve make keys disappear. Each mechanism is
// counted and must occur at least once: L1D hit, L2 hit with write-back,
// L1D line miss, L2 line miss, within-line eviction, L1D line eviction,
// queue-full stall, reserve and unreserve sweeps, and the flush requests a
// reserve sweep sends to the host cache for the ordinary ways it takes.
// (With NR equal to the number of L2 reserved lines, each L2 line has a fixed place, so L2 line
// evictions cannot occur at the default sizes; they are counted, not
// required.)
module tb_voxelcache_top;
  import vc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cycle = 0;

  logic instr_valid = 0, instr_ready, bad_instr, resp_valid, va_valid, va_ready = 1;
  vc_instr_t instr;
  vc_resp_t resp;
  va_req_t va_req;
  logic [6:0] l1_nm_set = 0; logic [1:0] l1_nm_victim; logic l1_nm_victim_ok;
  logic [8:0] l2_nm_set = 0; logic [2:0] l2_nm_victim; logic l2_nm_victim_ok;
  logic cfg_busy;
  logic [2:0] l1_rsv_ways; logic [3:0] l2_rsv_ways;
  logic l1_flush_valid, l2_flush_valid;
  logic [6:0] l1_flush_set; logic [8:0] l2_flush_set;
  logic [3:0] l1_flush_ways; logic [7:0] l2_flush_ways;
  logic ev_l1_line_miss, ev_l2_line_miss, ev_l2_writeback, ev_item_evict, ev_l1_line_evict, ev_l2_line_evict;

  voxelcache_top dut (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr, .bad_instr, .resp_valid, .resp,
    .va_valid, .va_ready, .va_req,
    .l1_nm_set, .l1_nm_victim, .l1_nm_victim_ok, .l1_nm_touch(1'b0), .l1_nm_touch_way(2'd0),
    .l2_nm_set, .l2_nm_victim, .l2_nm_victim_ok, .l2_nm_touch(1'b0), .l2_nm_touch_way(3'd0),
    .cfg_busy, .l1_rsv_ways, .l2_rsv_ways,
    .l1_flush_valid, .l1_flush_set, .l1_flush_ways, .l2_flush_valid, .l2_flush_set, .l2_flush_ways,
    .ev_l1_line_miss, .ev_l2_line_miss, .ev_l2_writeback, .ev_item_evict, .ev_l1_line_evict,
    .ev_l2_line_evict);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_l1_miss = 0, n_l2_miss = 0, n_wb = 0, n_item_ev = 0, n_l1_ev = 0, n_l2_ev = 0;
  int n_l1_hit = 0, n_stall = 0, n_sweeps = 0, n_found = 0, n_lookup = 0, n_va = 0;
  always @(posedge clk) if (rst_n) begin
    n_l1_miss += int'(ev_l1_line_miss); n_l2_miss += int'(ev_l2_line_miss);
    n_wb += int'(ev_l2_writeback); n_item_ev += int'(ev_item_evict);
    n_l1_ev += int'(ev_l1_line_evict); n_l2_ev += int'(ev_l2_line_evict);
  end

  // reserve sweeps: each step must name exactly the ordinary ways it takes
  // (1 way of L1D, 2 of L2; unreserve sweeps name none), in set order
  int n_l1_flush = 0, n_l2_flush = 0, l1_flush_exp = 0, l2_flush_exp = 0;
  always @(posedge clk) if (rst_n) begin
    if (l1_flush_valid) begin
      if (l1_flush_ways != 0) begin
        n_l1_flush++;
        chk(l1_flush_ways == 4'b0001 && int'(l1_flush_set) == l1_flush_exp % 128, "L1D flush step");
        l1_flush_exp++;
      end
    end else chk(l1_flush_ways == 0, "no L1D flush outside a sweep");
    if (l2_flush_valid) begin
      if (l2_flush_ways != 0) begin
        n_l2_flush++;
        chk(l2_flush_ways == 8'b0000_0011 && int'(l2_flush_set) == l2_flush_exp % 512, "L2 flush step");
        l2_flush_exp++;
      end
    end else chk(l2_flush_ways == 0, "no L2 flush outside a sweep");
  end

  // ordinary loads/stores leave in order
  logic [63:0] va_exp[$];
  always @(posedge clk) if (rst_n && va_valid && va_ready) begin
    logic [63:0] a;
    a = va_exp.pop_front();
    chk(va_req.vaddr == a, "virtual-address request order");
    n_va++;
  end

  // responses, by id
  vc_resp_t got [256];
  bit       got_v [256];
  longint   got_t [256];
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && resp_valid) begin
      got[resp.id]   <= resp;
      got_v[resp.id] <= 1'b1;
      got_t[resp.id] <= cycle;
    end
  end

  byte unsigned next_id = 0;

  task automatic issue(vc_instr_t i);
    @(negedge clk);
    instr = i; instr_valid = 1;
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 instr_valid = 0;
  endtask

  task automatic vox(vc_opcode_e opc, key_t k, ptr_t v, output vc_resp_t r, output int lat);
    vc_instr_t i;
    longint t0;
    i = '0; i.opc = opc; i.id = next_id; next_id++;
    i.rd1 = {k.ky, k.kx}; i.rd2 = {32'h0, k.kz}; i.r1 = v;
    got_v[i.id] = 0;
    issue(i);
    t0 = cycle;
    while (!got_v[i.id]) @(posedge clk);
    #1;
    r = got[i.id];
    lat = int'(got_t[i.id] - t0);
  endtask

  task automatic cfg(vc_opcode_e opc, int ways, int lvl);
    vc_instr_t i;
    int c = 0;
    i = '0; i.opc = opc; i.ways = 4'(ways); i.lvl = 2'(lvl);
    issue(i);
    @(posedge clk); #1;
    while (cfg_busy) begin @(posedge clk); #1 c++; end
    n_sweeps++;
    chk(c == 127 || c == 511, $sformatf("sweep length %0d", c));
  endtask

  // software voxel hash table
  ptr_t ht [key_t];
  int   n_alloc = 0;
  function automatic ptr_t ht_lookup(key_t k);
    if (!ht.exists(k)) begin
      n_alloc++;
      ht[k] = 64'h0000_1000_0000_0000 + 64'(n_alloc) * 64'd4096;
    end
    return ht[k];
  endfunction

  // GetBlkPtr of the application
  task automatic get_blk_ptr(key_t k);
    vc_resp_t r; int lat;
    ptr_t p;
    vox(OPC_LOOKUP, k, '0, r, lat);
    n_lookup++;
    if (r.found) begin
      n_found++;
      if (lat == 2) n_l1_hit++;
      chk(r.value == ht[k], "returned pointer matches hash table");
      chk(lat == 2 || lat == 6, $sformatf("hit latency %0d", lat));
    end else begin
      chk(r.value == INVALID_PTR, "miss returns invalid");
      p = ht_lookup(k);
      vox(OPC_INSERT, k, p, r, lat);
    end
  endtask

  function automatic key_t blk(int x, int y, int z);
    key_t k; k.kx = x; k.ky = y; k.kz = z; return k;
  endfunction

  initial begin
    vc_resp_t r; int lat;
    key_t k;
    instr = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // nothing reserved yet: every lookup misses
    vox(OPC_LOOKUP, blk(1, 2, 3), '0, r, lat);
    chk(!r.found && lat == 6, $sformatf("lookup before reservation (lat %0d)", lat));

    // reserve 1 of 4 ways in L1D and 2 of 8 in L2
    cfg(OPC_RESERVE, 1, 1);
    cfg(OPC_RESERVE, 2, 2);
    chk(l1_rsv_ways == 1 && l2_rsv_ways == 2, "reserved ways");
    for (int s = 0; s < 128; s += 9) begin
      @(negedge clk); l1_nm_set = 7'(s); l2_nm_set = 9'(s * 4); #1;
      chk(l1_nm_victim_ok && l1_nm_victim != 0, "L1D normal victim avoids reserved way");
      chk(l2_nm_victim_ok && l2_nm_victim >= 2, "L2 normal victim avoids reserved ways");
    end

    // latency: insert, then L1D hit (2), evict from L1D, L2 hit (6)
    vox(OPC_INSERT, blk(5, 5, 5), 64'hABC0, r, lat);
    vox(OPC_LOOKUP, blk(5, 5, 5), '0, r, lat);
    chk(r.found && r.value == 64'hABC0 && lat == 2, $sformatf("L1D hit latency %0d", lat));

    // map updates: F frames, R rays per frame, S block steps per ray
    for (int f = 0; f < 12; f++) begin
      int ox, oy;
      ox = f / 3; oy = f / 4;
      for (int ray = 0; ray < 48; ray++) begin
        int dx, dy, dz;
        // a fixed fan of rays, like the pixels of a depth camera
        dx = 8 + (ray % 4);
        dy = (ray / 4) - 6;
        dz = (ray % 3) - 1;
        for (int s = 1; s <= 10; s++) begin
          k = blk(ox + (dx * s) / 8, oy + (dy * s) / 8, (dz * s) / 8);
          get_blk_ptr(k);
        end
        // interleave ordinary loads
        if (ray % 8 == 0) begin
          vc_instr_t i;
          i = '0; i.opc = OPC_LOAD; i.rd1 = {$urandom, $urandom}; i.id = 8'hFF;
          va_exp.push_back(i.rd1);
          issue(i);
        end
      end
    end

    // queue-full stall: block the va port, issue 40 loads
    @(negedge clk); va_ready = 0;
    for (int n = 0; n < 40; n++) begin
      vc_instr_t i;
      i = '0; i.opc = OPC_STORE; i.rd1 = 64'(n) * 8; i.r1 = 64'(n);
      va_exp.push_back(i.rd1);
      @(negedge clk); instr = i; instr_valid = 1; #1;
      while (!instr_ready) begin n_stall++; @(negedge clk); #1; if (n_stall == 20) va_ready = 1; end
      @(posedge clk); #1 instr_valid = 0;
    end
    @(negedge clk); va_ready = 1;
    repeat (50) @(posedge clk);
    chk(va_exp.size() == 0, "all ordinary requests issued");

    // remove: the key is gone afterwards
    k = blk(0, 0, 0);
    void'(ht_lookup(k));
    vox(OPC_INSERT, k, ht[k], r, lat);
    vox(OPC_REMOVE, k, '0, r, lat);
    vox(OPC_LOOKUP, k, '0, r, lat);
    chk(!r.found && r.value == INVALID_PTR, "removed key not found");

    // unreserve: everything gone; reserve again and reuse
    cfg(OPC_UNRESERVE, 0, 0);
    chk(l1_rsv_ways == 0 && l2_rsv_ways == 0, "unreserved");
    vox(OPC_LOOKUP, blk(5, 5, 5), '0, r, lat);
    chk(!r.found, "lookup after unreserve misses");
    cfg(OPC_RESERVE, 1, 1);
    cfg(OPC_RESERVE, 2, 2);
    get_blk_ptr(blk(5, 5, 5));
    get_blk_ptr(blk(5, 5, 5));

    $display("lookups=%0d found=%0d l1_hits=%0d l2_writebacks=%0d l1_line_miss=%0d l2_line_miss=%0d",
             n_lookup, n_found, n_l1_hit, n_wb, n_l1_miss, n_l2_miss);
    $display("item_evict=%0d l1_line_evict=%0d l2_line_evict=%0d lsq_stall_cycles=%0d sweeps=%0d va=%0d blocks=%0d",
             n_item_ev, n_l1_ev, n_l2_ev, n_stall, n_sweeps, n_va, n_alloc);
    chk(n_l1_hit > 0, "mechanism: L1D hit");
    chk(n_wb > 0, "mechanism: L2 hit written back to L1D");
    chk(n_l1_miss > 0, "mechanism: L1D entire-line miss");
    chk(n_l2_miss > 0, "mechanism: L2 entire-line miss");
    chk(n_item_ev > 0, "mechanism: within-line eviction");
    chk(n_l1_ev > 0, "mechanism: L1D line eviction");
    chk(n_stall > 0, "mechanism: load-store queue full");
    chk(n_sweeps == 5, "mechanism: reserve/unreserve sweeps");
    chk(n_va > 0, "mechanism: virtual-address mode");
    $display("l1_flush_steps=%0d l2_flush_steps=%0d", n_l1_flush, n_l2_flush);
    chk(n_l1_flush == 2 * 128, "mechanism: L1D ordinary ways flushed by reserve");
    chk(n_l2_flush == 2 * 512, "mechanism: L2 ordinary ways flushed by reserve");
    chk(n_found * 2 > n_lookup, "more than half of the lookups hit");
    chk(!bad_instr, "no bad instruction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
