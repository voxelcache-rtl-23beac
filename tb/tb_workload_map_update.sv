// tb_workload_map_update: a mapping workload run on the whole pipeline at its
// default (CPU) parameters, at three voxel sizes: 5, 10 and 15 cm.
//
// Workload model: a depth sensor moves along a corridor. Each frame casts a
// fan of rays up to 4 m. A TSDF update visits every voxel along every ray,
// and each voxel visit resolves the voxel's block pointer through the
// application wrapper: VoxelCache lookup, and on a miss the software hash
// table (an associative array here) followed by a VoxelCache insert. An
// ESDF-style pass then visits a 3x3x3 voxel neighbourhood around each ray's
// end point. Blocks are 8x8x8 voxels. The sensor path, ray fan, range and
// block size are this testbench's own choices; they only stand in for the
// real datasets. The three voxel sizes change only how many blocks a frame
// touches, so they share this one testbench.
//
// Each voxel size starts from an empty reservation: unreserve, then reserve
// 1 L1D way and 2 L2 ways. Checked: every pointer VoxelCache returns equals
// the software table's, and every miss returns the invalid value. Reported
// per voxel size: lookups, hit rate, L1D share of the hits, and the most
// distinct blocks one frame touched, against the 384 pairs L1D and the 3072
// pairs L2 can hold. The hit rate must be above one half for each size, and
// the number of distinct blocks per frame must fit the L2 reserved section.
module tb_workload_map_update;
  import vc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cycle = 0;

  logic instr_valid = 0, instr_ready, bad_instr, resp_valid, va_valid;
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
    .va_valid, .va_ready(1'b1), .va_req,
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
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_wb = 0, n_item_ev = 0, n_l1_ev = 0;
  always @(posedge clk) if (rst_n) begin
    n_wb += int'(ev_l2_writeback); n_item_ev += int'(ev_item_evict); n_l1_ev += int'(ev_l1_line_evict);
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
    i = '0; i.opc = opc; i.ways = 4'(ways); i.lvl = 2'(lvl);
    issue(i);
    @(posedge clk); #1;
    while (cfg_busy) begin @(posedge clk); #1; end
  endtask

  // software voxel hash table and per-frame distinct-block set
  ptr_t ht [key_t];
  bit   frame_blocks [key_t];
  int   n_alloc = 0, n_lookup = 0, n_found = 0, n_l1_hit = 0;

  task automatic get_blk_ptr(key_t k);
    vc_resp_t r; int lat;
    vox(OPC_LOOKUP, k, '0, r, lat);
    n_lookup++;
    frame_blocks[k] = 1'b1;
    if (r.found) begin
      n_found++;
      if (lat == 2) n_l1_hit++;
      chk(ht.exists(k) && r.value == ht[k], "returned pointer matches hash table");
    end else begin
      chk(r.value == INVALID_PTR, "miss returns invalid");
      if (!ht.exists(k)) begin
        n_alloc++;
        ht[k] = 64'h0000_2000_0000_0000 + 64'(n_alloc) * 64'd4096;
      end
      vox(OPC_INSERT, k, ht[k], r, lat);
    end
  endtask

  localparam int BLOCK_VOXELS = 8;
  localparam int FRAMES = 6, RAYS = 24;
  localparam real RANGE_M = 4.0;

  // block key of a point (metres) for voxel size v (metres)
  function automatic key_t blk_of(real x, real y, real z, real v);
    key_t k;
    real b;
    b = v * BLOCK_VOXELS;
    k.kx = $rtoi($floor(x / b)); k.ky = $rtoi($floor(y / b)); k.kz = $rtoi($floor(z / b));
    return k;
  endfunction

  task automatic run_resolution(int v_cm);
    real v, ox, oy, oz, dx, dy, dz, n, t, ex, ey, ez;
    int max_frame_blocks = 0, l0, f0, h0;
    v = real'(v_cm) / 100.0;
    ht.delete();
    cfg(OPC_UNRESERVE, 0, 0);
    cfg(OPC_RESERVE, 1, 1);
    cfg(OPC_RESERVE, 2, 2);
    l0 = n_lookup; f0 = n_found; h0 = n_l1_hit;
    for (int f = 0; f < FRAMES; f++) begin
      frame_blocks.delete();
      ox = 0.25 * f; oy = 0.1 * f; oz = 1.2;
      for (int ray = 0; ray < RAYS; ray++) begin
        dx = 1.0; dy = (real'(ray % 6) - 2.5) * 0.25; dz = (real'(ray / 6) - 1.5) * 0.2;
        n = $sqrt(dx * dx + dy * dy + dz * dz);
        dx = dx / n; dy = dy / n; dz = dz / n;
        // TSDF: every voxel along the ray
        t = 0.0;
        while (t < RANGE_M) begin
          get_blk_ptr(blk_of(ox + t * dx, oy + t * dy, oz + t * dz, v));
          t = t + v;
        end
        // ESDF: 3x3x3 voxel neighbourhood of the end point
        ex = ox + RANGE_M * dx; ey = oy + RANGE_M * dy; ez = oz + RANGE_M * dz;
        for (int i = -1; i <= 1; i++)
          for (int j = -1; j <= 1; j++)
            for (int l = -1; l <= 1; l++)
              get_blk_ptr(blk_of(ex + i * v, ey + j * v, ez + l * v, v));
      end
      if (frame_blocks.num() > max_frame_blocks) max_frame_blocks = frame_blocks.num();
    end
    $display("voxel %0d cm: lookups=%0d hit_rate=%0.3f l1_share_of_hits=%0.3f max_blocks_per_frame=%0d (L1D holds 384 pairs, L2 3072) blocks=%0d",
             v_cm, n_lookup - l0, real'(n_found - f0) / real'(n_lookup - l0),
             real'(n_l1_hit - h0) / real'(n_found - f0 + 1), max_frame_blocks, ht.num());
    chk((n_found - f0) * 2 > (n_lookup - l0), $sformatf("%0d cm: hit rate above one half", v_cm));
    chk(max_frame_blocks <= 3072, $sformatf("%0d cm: frame working set fits L2", v_cm));
  endtask

  initial begin
    instr = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_resolution(5);
    run_resolution(10);
    run_resolution(15);
    $display("l2_writebacks=%0d item_evict=%0d l1_line_evict=%0d", n_wb, n_item_ev, n_l1_ev);
    chk(n_wb > 0, "L2 hits written back to L1D");
    chk(!bad_instr, "no bad instruction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
