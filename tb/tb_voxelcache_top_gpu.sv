// tb_voxelcache_top_gpu: the whole pipeline in the GPU configuration: L1D
// only (128 KiB, 4 ways, 128-byte lines, 256 sets, 1 way reserved), 6 pairs
// per line, misses never forwarded. Runs the same map-update key stream as
// the CPU test through the block-pointer wrapper and checks the pointers,
// that both hits and misses settle in 2 cycles from issue (L1D only), that
// no request ever reaches a second level, and that within-line replacement
// occurs.
module tb_voxelcache_top_gpu;
  import vc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cycle = 0;

  logic instr_valid = 0, instr_ready, bad_instr, resp_valid, va_valid;
  vc_instr_t instr;
  vc_resp_t resp;
  va_req_t va_req;
  logic [7:0] l1_nm_set = 0; logic [1:0] l1_nm_victim; logic l1_nm_victim_ok;
  logic [8:0] l2_nm_set = 0; logic [2:0] l2_nm_victim; logic l2_nm_victim_ok;
  logic cfg_busy;
  logic [2:0] l1_rsv_ways; logic [3:0] l2_rsv_ways;
  logic l1_flush_valid, l2_flush_valid;
  logic [7:0] l1_flush_set; logic [8:0] l2_flush_set;
  logic [3:0] l1_flush_ways; logic [7:0] l2_flush_ways;
  logic ev_l1_line_miss, ev_l2_line_miss, ev_l2_writeback, ev_item_evict, ev_l1_line_evict, ev_l2_line_evict;

  voxelcache_top #(.HAS_L2(1'b0), .PAIRS(6), .L1_SETS(256)) dut (
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_l1_miss = 0, n_l2 = 0, n_item_ev = 0, n_l1_ev = 0, n_found = 0, n_lookup = 0;
  vc_resp_t got [256];
  bit       got_v [256];
  longint   got_t [256];
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      n_l1_miss += int'(ev_l1_line_miss);
      n_l2      += int'(ev_l2_line_miss) + int'(ev_l2_writeback) + int'(ev_l2_line_evict);
      n_item_ev += int'(ev_item_evict);
      n_l1_ev   += int'(ev_l1_line_evict);
    end
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

  ptr_t ht [key_t];
  int   n_alloc = 0;

  task automatic get_blk_ptr(key_t k);
    vc_resp_t r; int lat;
    vox(OPC_LOOKUP, k, '0, r, lat);
    n_lookup++;
    chk(lat == 2, $sformatf("GPU lookup latency %0d", lat));
    if (r.found) begin
      n_found++;
      chk(r.value == ht[k], "returned pointer matches hash table");
    end else begin
      if (!ht.exists(k)) begin n_alloc++; ht[k] = 64'h2000_0000 + 64'(n_alloc) * 64'd512; end
      vox(OPC_INSERT, k, ht[k], r, lat);
      chk(lat == 2, "GPU insert latency");
    end
  endtask

  initial begin
    vc_instr_t i;
    key_t k;
    int c = 0;
    instr = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    i = '0; i.opc = OPC_RESERVE; i.ways = 4'd1; i.lvl = 2'd1;
    issue(i);
    @(posedge clk); #1;
    while (cfg_busy) begin @(posedge clk); #1 c++; end
    chk(c == 255 && l1_rsv_ways == 1, $sformatf("GPU reserve sweep %0d", c));
    for (int f = 0; f < 12; f++) begin
      for (int ray = 0; ray < 48; ray++) begin
        for (int s = 1; s <= 10; s++) begin
          k.kx = f / 3 + ((8 + ray % 4) * s) / 8;
          k.ky = f / 4 + (((ray / 4) - 6) * s) / 8;
          k.kz = (((ray % 3) - 1) * s) / 8;
          get_blk_ptr(k);
        end
      end
    end
    $display("lookups=%0d found=%0d l1_line_miss=%0d item_evict=%0d l1_line_evict=%0d blocks=%0d",
             n_lookup, n_found, n_l1_miss, n_item_ev, n_l1_ev, n_alloc);
    // NR equals the number of reserved L1D lines, so a line never has to
    // give way to another: whole-line evictions are counted, not required
    chk(n_found > 0 && n_l1_miss > 0 && n_item_ev > 0 && n_l1_ev == 0, "GPU mechanisms");
    chk(n_l2 == 0, "no second-level activity");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
