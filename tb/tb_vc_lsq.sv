// tb_vc_lsq: pushes a random mix of VoxelCache and virtual-address entries
// while both issue ports accept at random, and checks that entries leave in
// program order, each on the port its mode flag selects, with its contents
// intact. Also checks that the queue reports full after DEPTH entries
// (push_ready low: the core stalls) and that empty follows the count.
module tb_vc_lsq;
  import vc_pkg::*;

  localparam int DEPTH = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid = 0, push_ready, vox_valid, vox_ready = 0, va_valid, va_ready = 0, empty;
  lsq_entry_t push_entry;
  vc_req_t vox_req;
  va_req_t va_req;
  logic [5:0] count;

  vc_lsq #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .push_valid, .push_ready, .push_entry,
    .vox_valid, .vox_ready, .vox_req, .va_valid, .va_ready, .va_req, .empty, .count);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  lsq_entry_t expq[$];
  int pushed = 0, popped = 0, stalls = 0, n_vox = 0, n_va = 0;

  function automatic lsq_entry_t rnd_entry(int n);
    lsq_entry_t e;
    e = '0;
    e.mode = ($urandom_range(0, 1) == 1) ? MODE_VOX : MODE_VADDR;
    e.vox.id = 8'(n); e.va.id = 8'(n);
    e.vox.op = ($urandom_range(0, 1) == 1) ? VC_INSERT : VC_LOOKUP;
    e.vox.key.kx = $urandom; e.vox.value = {$urandom, $urandom}; e.vox.pa = $urandom;
    e.va.vaddr = {$urandom, $urandom}; e.va.write = 1'($urandom);
    return e;
  endfunction

  // checker on the issue side, one time unit before each rising edge
  always @(negedge clk) if (rst_n) begin
    #4;
    if (vox_valid && vox_ready) begin
      lsq_entry_t e;
      e = expq.pop_front();
      chk(e.mode == MODE_VOX && vox_req == e.vox, "VoxelCache entry in order on its port");
      popped++; n_vox++;
    end
    if (va_valid && va_ready) begin
      lsq_entry_t e;
      e = expq.pop_front();
      chk(e.mode == MODE_VADDR && va_req == e.va, "virtual-address entry in order on its port");
      popped++; n_va++;
    end
    chk(!(vox_valid && va_valid), "one port at a time");
  end
  always @(posedge clk) if (rst_n) begin
    #2 chk(empty == (count == 0) && int'(count) == expq.size(), "count");
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill with both ports blocked: stops at DEPTH
    for (int i = 0; i < DEPTH + 4; i++) begin
      @(negedge clk);
      push_entry = rnd_entry(pushed);
      push_valid = 1;
      #1;
      if (push_ready) begin expq.push_back(push_entry); pushed++; end
      else stalls++;
      @(posedge clk); #1 push_valid = 0;
    end
    chk(pushed == DEPTH && stalls == 4, $sformatf("full after %0d, stalls %0d", pushed, stalls));
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      vox_ready = 1'($urandom_range(0, 1));
      va_ready  = 1'($urandom_range(0, 1));
      push_valid = ($urandom_range(0, 2) != 0);
      push_entry = rnd_entry(pushed);
      #1;
      if (push_valid && push_ready) begin expq.push_back(push_entry); pushed++; end
    end
    @(negedge clk); push_valid = 0; vox_ready = 1; va_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    chk(empty && popped == pushed, $sformatf("drained popped=%0d pushed=%0d", popped, pushed));
    chk(n_vox > 100 && n_va > 100, "both modes issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
