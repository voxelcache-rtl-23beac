// tb_vc_cache_level: one small level (4 sets, 4 ways, up to 2 reserved,
// 3 pairs per line, 4-bit pseudoaddress: set = pa % 4, tag = pa / 4).
// Checks that nothing is stored before reservation, that reserve sweeps take
// one cycle per set, that lines are found by set and tag, that the least
// recently used reserved line is replaced, that the normal-mode victim is
// never a reserved way and follows LRU among the others, that a reservation
// is clamped to MAX_RSV, that unreserve invalidates every reserved line and
// that each reserve step names exactly the ordinary ways it takes over.
module tb_vc_cache_level;
  import vc_pkg::*;

  localparam int SETS = 4, WAYS = 4, MAX_RSV = 2, PAIRS = 3, PA_W = 4;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_reserve = 0, cfg_unreserve = 0, cfg_busy;
  logic [2:0] cfg_ways = 0, rsv_ways;
  logic flush_valid;
  logic [1:0] flush_set;
  logic [WAYS-1:0] flush_ways;
  logic [PA_W-1:0] rd_pa = 0, wr_pa = 0;
  logic rd_hit, wr_en = 0, wr_evict;
  pair_t [PAIRS-1:0] rd_pairs, wr_pairs;
  slot_state_t [PAIRS-1:0] rd_st, wr_st;
  logic [1:0] nm_set = 0, nm_victim, nm_touch_way = 0;
  logic nm_victim_ok, nm_touch = 0;

  vc_cache_level #(.SETS(SETS), .WAYS(WAYS), .MAX_RSV(MAX_RSV), .PAIRS(PAIRS), .PA_W(PA_W)) dut (
    .clk, .rst_n, .cfg_reserve, .cfg_unreserve, .cfg_ways, .cfg_busy, .rsv_ways,
    .flush_valid, .flush_set, .flush_ways,
    .rd_pa, .rd_hit, .rd_pairs, .rd_st, .wr_en, .wr_pa, .wr_pairs, .wr_st, .wr_evict,
    .nm_set, .nm_victim, .nm_victim_ok, .nm_touch, .nm_touch_way);

  pair_t [PAIRS-1:0] img [16];   // what each pseudoaddress's line should hold
  int evicts = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic write_line(int pa, output bit ev);
    for (int i = 0; i < PAIRS; i++) begin
      img[pa][i].key = '{kz: pa, ky: i, kx: $urandom};
      img[pa][i].ptr = {$urandom, $urandom};
    end
    @(negedge clk);
    wr_pa = PA_W'(pa); wr_pairs = img[pa]; wr_en = 1;
    for (int i = 0; i < PAIRS; i++) wr_st[i] = '{valid: 1'b1, age: AGE_W'(i)};
    #1 ev = wr_evict;
    @(posedge clk); #1 wr_en = 0;
  endtask

  task automatic probe(int pa, bit exp_hit);
    @(negedge clk);
    rd_pa = PA_W'(pa);
    #1;
    chk(rd_hit == exp_hit, $sformatf("probe pa=%0d hit=%0b exp %0b", pa, rd_hit, exp_hit));
    if (exp_hit && rd_hit) begin
      chk(rd_pairs == img[pa], $sformatf("line data pa=%0d", pa));
      chk(rd_st[2].valid && rd_st[2].age == 2, "line state stored");
    end
  endtask

  // exp_flush: ways whose ordinary data each sweep step must ask to evict
  task automatic do_cfg(bit res, int ways, int exp_rsv, logic [WAYS-1:0] exp_flush);
    int cyc = 0;
    @(negedge clk);
    cfg_reserve = res; cfg_unreserve = !res; cfg_ways = 3'(ways);
    @(posedge clk); #1 cfg_reserve = 0; cfg_unreserve = 0;
    while (cfg_busy) begin
      chk(flush_valid && int'(flush_set) == cyc && flush_ways == exp_flush,
          $sformatf("flush step %0d: set %0d ways %b exp %b", cyc, flush_set, flush_ways, exp_flush));
      @(posedge clk); #1 cyc++;
    end
    chk(!flush_valid && flush_ways == '0, "no flush after the sweep");
    chk(cyc == SETS, $sformatf("sweep took %0d cycles, exp %0d", cyc, SETS));
    chk(int'(rsv_ways) == exp_rsv, $sformatf("rsv_ways %0d exp %0d", rsv_ways, exp_rsv));
  endtask

  initial begin
    bit ev;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // nothing reserved: writes are dropped, normal victim may be any way
    write_line(1, ev);
    probe(1, 0);
    @(negedge clk); nm_set = 1; #1 chk(nm_victim_ok, "victim exists with no reservation");
    // reserve 2 ways
    do_cfg(1, 2, 2, 4'b0011);
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk); nm_set = 2'(s); #1;
      chk(nm_victim_ok && nm_victim >= 2, $sformatf("normal victim %0d in set %0d not reserved", nm_victim, s));
    end
    // set 1: pa 1, 5, 9, 13 all map to it with tags 0..3
    write_line(1, ev);  chk(!ev, "no evict into a free way");
    write_line(5, ev);  chk(!ev, "no evict into a free way");
    probe(1, 1); probe(5, 1); probe(9, 0);
    write_line(2, ev);  // other set, must not disturb set 1
    write_line(9, ev);  chk(ev, "third tag in set evicts"); if (ev) evicts++;
    probe(1, 0); probe(5, 1); probe(9, 1); probe(2, 1);
    // rewrite 5 (now MRU), then 13 must evict 9
    write_line(5, ev);  chk(!ev, "rewrite of present tag does not evict");
    write_line(13, ev); chk(ev, "LRU evict"); if (ev) evicts++;
    probe(9, 0); probe(5, 1); probe(13, 1);
    // normal-mode LRU among unreserved ways 2 and 3
    @(negedge clk); nm_set = 3; nm_touch = 1; nm_touch_way = 2;
    @(negedge clk); nm_touch = 0; #1 chk(nm_victim == 3, "normal victim is LRU way 3");
    @(negedge clk); nm_touch = 1; nm_touch_way = 3;
    @(negedge clk); nm_touch = 0; #1 chk(nm_victim == 2, "normal victim is LRU way 2");
    @(negedge clk); nm_touch = 1; nm_touch_way = 0;   // reserved way: ignored
    @(negedge clk); nm_touch = 0; #1 chk(nm_victim == 2, "touch of reserved way ignored");
    // reserve more than MAX_RSV: clamped, lines invalidated
    do_cfg(1, 3, 2, 4'b0000);
    probe(5, 0); probe(13, 0); probe(2, 0);
    write_line(6, ev); probe(6, 1);
    // unreserve: every line gone, all ways back to normal mode
    do_cfg(0, 0, 0, 4'b0000);
    probe(6, 0);
    @(negedge clk); nm_set = 1; #1 chk(nm_victim_ok, "victim after unreserve");
    write_line(6, ev); probe(6, 0);
    chk(evicts == 2, "line evictions seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
