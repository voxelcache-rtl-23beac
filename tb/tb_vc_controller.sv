// tb_vc_controller: the controller with two small cache levels (CPU
// configuration: L1D 2 sets x 2 ways, 1 reserved; L2 4 sets x 2 ways, both
// reserved; 3 pairs per line; pseudoaddresses 0..7) and a second controller
// in the GPU configuration (L1D only, 6 pairs per line). The testbench picks
// each request's pseudoaddress itself.
// Directed part: latencies (1 cycle when settled in L1D, 1 + 4 when L2 is
// reached), L1D miss forwarded to L2, L2 hit written back to L1D, within-line
// LRU replacement, remove, overwrite, line eviction, and a within-line miss
// at L1D that returns invalid without going to L2. Random part: every lookup
// that reports a pointer must report the last value inserted for that key.
module tb_vc_controller;
  import vc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- CPU configuration ----------------
  localparam int PA_W = 3, PAIRS = 3;
  logic req_valid = 0, req_ready, resp_valid;
  vc_req_t req;
  vc_resp_t resp;
  logic [PA_W-1:0] l1_rd_pa, l1_wr_pa, l2_rd_pa, l2_wr_pa;
  logic l1_rd_hit, l2_rd_hit, l1_wr_en, l2_wr_en;
  pair_t [PAIRS-1:0] l1_rd_pairs, l1_wr_pairs, l2_rd_pairs, l2_wr_pairs;
  slot_state_t [PAIRS-1:0] l1_rd_st, l1_wr_st, l2_rd_st, l2_wr_st;
  logic ev_l1m, ev_l2m, ev_wb, ev_ie;
  logic l1_res = 0, l2_res = 0, l1_busy, l2_busy;
  logic [1:0] l1_rsv; logic [1:0] l2_rsv;
  logic l1_ev, l2_ev;
  logic l1_nmv, l2_nmv, l1_nmok, l2_nmok;

  vc_controller #(.HAS_L2(1), .PAIRS(PAIRS), .PA_W(PA_W), .L1_LAT(1), .L2_LAT(4)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp,
    .l1_rd_pa, .l1_rd_hit, .l1_rd_pairs, .l1_rd_st, .l1_wr_en, .l1_wr_pa, .l1_wr_pairs, .l1_wr_st,
    .l2_rd_pa, .l2_rd_hit, .l2_rd_pairs, .l2_rd_st, .l2_wr_en, .l2_wr_pa, .l2_wr_pairs, .l2_wr_st,
    .ev_l1_line_miss(ev_l1m), .ev_l2_line_miss(ev_l2m), .ev_l2_writeback(ev_wb), .ev_item_evict(ev_ie));

  vc_cache_level #(.SETS(2), .WAYS(2), .MAX_RSV(1), .PAIRS(PAIRS), .PA_W(PA_W)) l1 (
    .clk, .rst_n, .cfg_reserve(l1_res), .cfg_unreserve(1'b0), .cfg_ways(2'd1), .cfg_busy(l1_busy),
    .rsv_ways(l1_rsv), .rd_pa(l1_rd_pa), .rd_hit(l1_rd_hit), .rd_pairs(l1_rd_pairs), .rd_st(l1_rd_st),
    .wr_en(l1_wr_en), .wr_pa(l1_wr_pa), .wr_pairs(l1_wr_pairs), .wr_st(l1_wr_st), .wr_evict(l1_ev),
    .nm_set(1'b0), .nm_victim(l1_nmv), .nm_victim_ok(l1_nmok), .nm_touch(1'b0), .nm_touch_way(1'b0));

  vc_cache_level #(.SETS(4), .WAYS(2), .MAX_RSV(2), .PAIRS(PAIRS), .PA_W(PA_W)) l2 (
    .clk, .rst_n, .cfg_reserve(l2_res), .cfg_unreserve(1'b0), .cfg_ways(2'd2), .cfg_busy(l2_busy),
    .rsv_ways(l2_rsv), .rd_pa(l2_rd_pa), .rd_hit(l2_rd_hit), .rd_pairs(l2_rd_pairs), .rd_st(l2_rd_st),
    .wr_en(l2_wr_en), .wr_pa(l2_wr_pa), .wr_pairs(l2_wr_pairs), .wr_st(l2_wr_st), .wr_evict(l2_ev),
    .nm_set(2'd0), .nm_victim(l2_nmv), .nm_victim_ok(l2_nmok), .nm_touch(1'b0), .nm_touch_way(1'b0));

  int n_wb = 0, n_l1m = 0, n_l2m = 0, n_ie = 0;
  always @(posedge clk) if (rst_n) begin
    n_wb += int'(ev_wb); n_l1m += int'(ev_l1m); n_l2m += int'(ev_l2m); n_ie += int'(ev_ie);
  end

  function automatic key_t K(int i);
    key_t k; k.kx = i; k.ky = 3 * i + 1; k.kz = -i; return k;
  endfunction

  // issue one request; returns response and cycles from acceptance to resp_valid
  task automatic op(vc_op_e o, key_t k, int pa, ptr_t v, output vc_resp_t r, output int lat);
    @(negedge clk);
    req = '0; req.op = o; req.key = k; req.pa = 32'(pa); req.value = v; req.id = 8'(pa);
    req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1 req_valid = 0; lat = 0;
    while (!resp_valid) begin @(posedge clk); #1 lat++; end
    r = resp;
  endtask

  task automatic expect_lookup(key_t k, int pa, bit found, ptr_t v, int lat_exp, string what);
    vc_resp_t r; int lat;
    op(VC_LOOKUP, k, pa, '0, r, lat);
    chk(r.found == found, $sformatf("%s: found %0b exp %0b", what, r.found, found));
    if (found) chk(r.value == v, $sformatf("%s: value", what));
    else       chk(r.value == INVALID_PTR, $sformatf("%s: invalid value", what));
    chk(lat == lat_exp, $sformatf("%s: latency %0d exp %0d", what, lat, lat_exp));
  endtask

  task automatic expect_insert(key_t k, int pa, ptr_t v, bit existed, int lat_exp, string what);
    vc_resp_t r; int lat;
    op(VC_INSERT, k, pa, v, r, lat);
    chk(r.found == existed, $sformatf("%s: status %0b exp %0b", what, r.found, existed));
    chk(lat == lat_exp, $sformatf("%s: latency %0d exp %0d", what, lat, lat_exp));
  endtask

  // ---------------- GPU configuration ----------------
  localparam int GPA_W = 2, GP = 6;
  logic g_valid = 0, g_ready, g_rvalid;
  vc_req_t g_req; vc_resp_t g_resp;
  logic [GPA_W-1:0] g_rd_pa, g_wr_pa, g_rd2, g_wr2;
  logic g_hit, g_wr, g_wr2en, g_ev, g_busy, g_e1, g_e2, g_e3, g_e4, g_nmok;
  pair_t [GP-1:0] g_rp, g_wp, g_wp2; slot_state_t [GP-1:0] g_rs, g_ws, g_ws2;
  logic [2:0] g_rsv; logic [1:0] g_nmv;
  logic g_res = 0;

  vc_controller #(.HAS_L2(0), .PAIRS(GP), .PA_W(GPA_W)) gdut (
    .clk, .rst_n, .req_valid(g_valid), .req_ready(g_ready), .req(g_req), .resp_valid(g_rvalid), .resp(g_resp),
    .l1_rd_pa(g_rd_pa), .l1_rd_hit(g_hit), .l1_rd_pairs(g_rp), .l1_rd_st(g_rs), .l1_wr_en(g_wr),
    .l1_wr_pa(g_wr_pa), .l1_wr_pairs(g_wp), .l1_wr_st(g_ws),
    .l2_rd_pa(g_rd2), .l2_rd_hit(1'b0), .l2_rd_pairs('0), .l2_rd_st('0), .l2_wr_en(g_wr2en),
    .l2_wr_pa(g_wr2), .l2_wr_pairs(g_wp2), .l2_wr_st(g_ws2),
    .ev_l1_line_miss(g_e1), .ev_l2_line_miss(g_e2), .ev_l2_writeback(g_e3), .ev_item_evict(g_e4));

  vc_cache_level #(.SETS(2), .WAYS(4), .MAX_RSV(1), .PAIRS(GP), .PA_W(GPA_W)) gl1 (
    .clk, .rst_n, .cfg_reserve(g_res), .cfg_unreserve(1'b0), .cfg_ways(3'd1), .cfg_busy(g_busy),
    .rsv_ways(g_rsv), .rd_pa(g_rd_pa), .rd_hit(g_hit), .rd_pairs(g_rp), .rd_st(g_rs),
    .wr_en(g_wr), .wr_pa(g_wr_pa), .wr_pairs(g_wp), .wr_st(g_ws), .wr_evict(g_ev),
    .nm_set(1'b0), .nm_victim(g_nmv), .nm_victim_ok(g_nmok), .nm_touch(1'b0), .nm_touch_way(2'd0));

  task automatic gop(vc_op_e o, key_t k, int pa, ptr_t v, output vc_resp_t r, output int lat);
    @(negedge clk);
    g_req = '0; g_req.op = o; g_req.key = k; g_req.pa = 32'(pa); g_req.value = v;
    g_valid = 1;
    while (!g_ready) @(negedge clk);
    @(posedge clk); #1 g_valid = 0; lat = 0;
    while (!g_rvalid) begin @(posedge clk); #1 lat++; end
    r = g_resp;
  endtask

  initial begin
    vc_resp_t r; int lat;
    ptr_t model [int];
    int found_n = 0;
    req = '0; g_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); l1_res = 1; l2_res = 1; g_res = 1;
    @(negedge clk); l1_res = 0; l2_res = 0; g_res = 0;
    repeat (6) @(negedge clk);

    // empty hierarchy: L1D miss, L2 miss -> invalid after 1 + 4 cycles
    expect_lookup(K(1), 0, 0, '0, 5, "cold lookup");
    // insert: L1D miss, L2 miss, new line written to both
    expect_insert(K(1), 0, 64'hA1, 0, 5, "insert A");
    expect_lookup(K(1), 0, 1, 64'hA1, 1, "A from L1D");
    // key B at pa 2: same L1D set (one reserved way) -> evicts line 0 from L1D
    expect_insert(K(2), 2, 64'hB2, 0, 5, "insert B");
    expect_lookup(K(1), 0, 1, 64'hA1, 5, "A from L2 after L1D eviction");
    chk(n_wb == 1, "L2 hit written back to L1D");
    expect_lookup(K(1), 0, 1, 64'hA1, 1, "A from L1D after writeback");
    // fill line 0 with 3 keys, touch A, add a 4th: LRU (K3) is replaced
    expect_insert(K(3), 0, 64'hC3, 0, 1, "insert C (L1D line hit)");
    expect_insert(K(4), 0, 64'hD4, 0, 1, "insert D");
    expect_lookup(K(1), 0, 1, 64'hA1, 1, "touch A");
    expect_insert(K(5), 0, 64'hE5, 0, 1, "insert E replaces LRU C");
    chk(n_ie == 1, "within-line eviction");
    expect_lookup(K(3), 0, 0, '0, 1, "C gone: within-line miss returns at L1D");
    expect_lookup(K(4), 0, 1, 64'hD4, 1, "D kept");
    expect_lookup(K(5), 0, 1, 64'hE5, 1, "E kept");
    // overwrite and remove
    expect_insert(K(4), 0, 64'hD44, 1, 1, "overwrite D");
    expect_lookup(K(4), 0, 1, 64'hD44, 1, "D new value");
    expect_insert(K(5), 0, INVALID_PTR, 1, 1, "remove E");
    expect_lookup(K(5), 0, 0, '0, 1, "E removed");
    // the written-through line is in L2 too: evict it from L1D and read
    expect_insert(K(6), 2, 64'hF6, 0, 5, "insert F at pa 2 evicts line 0 from L1D");
    expect_lookup(K(4), 0, 1, 64'hD44, 5, "D from L2 (write-through)");
    expect_lookup(K(5), 0, 0, '0, 1, "E removed, line back in L1D");
    // L2 set 0 holds pa 0 and pa 4; pa 0 touched last, so inserting tag 2
    // is not possible with 3 bits: use pa 4 then pa 0 then check both
    expect_insert(K(7), 4, 64'h77, 0, 5, "insert G at pa 4");
    expect_lookup(K(1), 0, 1, 64'hA1, 5, "A still in L2 set 0");
    chk(n_l2m >= 3, "L2 line misses");

    // random: a reported pointer is always the latest one
    for (int i = 0; i < 3000; i++) begin
      int kid; key_t k; ptr_t v;
      kid = $urandom_range(0, 29);
      k = K(100 + kid);
      if ($urandom_range(0, 2) == 0) begin
        v = ($urandom_range(0, 5) == 0) ? INVALID_PTR : {32'(kid), $urandom} | 64'h1;
        op(VC_INSERT, k, kid % 8, v, r, lat);
        model[kid] = v;
        chk(lat == 1 || lat == 5, "insert latency");
      end else begin
        op(VC_LOOKUP, k, kid % 8, '0, r, lat);
        if (r.found) begin
          found_n++;
          chk(model.exists(kid) && model[kid] == r.value, $sformatf("random lookup key %0d value", kid));
        end else begin
          chk(r.value == INVALID_PTR, "random miss returns invalid");
        end
        chk(lat == 1 || lat == 5, "lookup latency");
      end
    end
    chk(found_n > 300, $sformatf("random lookups found %0d", found_n));

    // GPU: 6 pairs per line, no L2, miss returns invalid at L1D latency
    for (int i = 0; i < 6; i++) begin
      gop(VC_INSERT, K(200 + i), 1, 64'(1000 + i), r, lat);
      chk(lat == 1, "GPU insert latency");
    end
    for (int i = 0; i < 6; i++) begin
      gop(VC_LOOKUP, K(200 + i), 1, '0, r, lat);
      chk(r.found && r.value == 64'(1000 + i) && lat == 1, $sformatf("GPU lookup %0d", i));
    end
    gop(VC_INSERT, K(210), 1, 64'h2222, r, lat);   // 7th key: K(200) is LRU
    gop(VC_LOOKUP, K(200), 1, '0, r, lat);
    chk(!r.found, "GPU within-line LRU replaced");
    gop(VC_LOOKUP, K(211), 3, '0, r, lat);        // same set, other tag
    chk(!r.found && lat == 1 && !g_wr2en, "GPU line miss returns invalid");
    gop(VC_INSERT, K(211), 3, 64'h3333, r, lat);  // evicts line pa 1
    gop(VC_LOOKUP, K(201), 1, '0, r, lat);
    chk(!r.found && lat == 1, "GPU entire-line eviction");
    gop(VC_LOOKUP, K(211), 3, '0, r, lat);
    chk(r.found && r.value == 64'h3333, "GPU new line");

    $display("writebacks=%0d l1_line_miss=%0d l2_line_miss=%0d item_evict=%0d found=%0d",
             n_wb, n_l1m, n_l2m, n_ie, found_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
