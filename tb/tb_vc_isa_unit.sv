// tb_vc_isa_unit: drives every instruction with random registers and checks
// the queue entry the unit builds (mode flag, operation, key taken from rd1
// and rd2, value, pseudoaddress computed here from the key), that remove
// becomes an insert of the invalid pointer, that ordinary loads and stores
// keep virtual-address mode, that configuration instructions wait for the
// pipeline to drain and go to the level named by lvl, and that queue
// back-pressure stalls memory instructions.
module tb_vc_isa_unit;
  import vc_pkg::*;

  localparam int NR = 1024;
  int checks = 0, failures = 0;

  logic instr_valid, instr_ready, lsq_push, lsq_ready, lsq_empty, ctrl_idle, cfg_busy;
  logic l1_reserve, l2_reserve, unreserve, bad_instr;
  logic [3:0] cfg_ways;
  vc_instr_t instr;
  lsq_entry_t e;

  vc_isa_unit #(.NR(NR), .WAY_W(3)) dut (.instr_valid, .instr_ready, .instr, .lsq_push, .lsq_ready,
    .lsq_entry(e), .lsq_empty, .ctrl_idle, .cfg_busy, .l1_reserve, .l2_reserve, .unreserve,
    .cfg_ways, .bad_instr);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int unsigned ref_pa(logic [63:0] rd1, logic [63:0] rd2);
    longint unsigned h;
    h = ((longint'(rd1[31:0])  * 64'd73856093) & 64'hFFFF_FFFF) ^
        ((longint'(rd1[63:32]) * 64'd19349669) & 64'hFFFF_FFFF) ^
        ((longint'(rd2[31:0])  * 64'd83492791) & 64'hFFFF_FFFF);
    return int'((h & 64'hFFFF_FFFF) % NR);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vc_opcode_e opcs [7] = '{OPC_RESERVE, OPC_LOOKUP, OPC_REMOVE, OPC_INSERT, OPC_UNRESERVE, OPC_LOAD, OPC_STORE};
    instr_valid = 1; lsq_ready = 1; lsq_empty = 1; ctrl_idle = 1; cfg_busy = 0;
    for (int i = 0; i < 700; i++) begin
      instr = '0;
      instr.opc = opcs[i % 7];
      instr.id  = 8'(i);
      instr.rd1 = {$urandom, $urandom};
      instr.rd2 = {$urandom, $urandom};
      instr.r1  = {$urandom, $urandom} | 64'h1;
      instr.ways = 4'($urandom_range(0, 8));
      instr.lvl  = 2'($urandom_range(0, 3));
      lsq_ready = ($urandom_range(0, 3) != 0);
      lsq_empty = ($urandom_range(0, 3) != 0);
      ctrl_idle = ($urandom_range(0, 3) != 0);
      cfg_busy  = ($urandom_range(0, 3) == 0);
      #1;
      case (instr.opc)
        OPC_LOOKUP, OPC_INSERT, OPC_REMOVE: begin
          chk(lsq_push == lsq_ready && instr_ready == lsq_ready, "memory instruction push/stall");
          chk(e.mode == MODE_VOX, "VoxelCache mode");
          chk(e.vox.key.kx == instr.rd1[31:0] && e.vox.key.ky == instr.rd1[63:32] &&
              e.vox.key.kz == instr.rd2[31:0], "key from rd1, rd2");
          chk(int'(e.vox.pa) == ref_pa(instr.rd1, instr.rd2), "pseudoaddress");
          chk(e.vox.id == instr.id, "id");
          if (instr.opc == OPC_LOOKUP) chk(e.vox.op == VC_LOOKUP, "lookup op");
          if (instr.opc == OPC_INSERT) chk(e.vox.op == VC_INSERT && e.vox.value == instr.r1, "insert op/value");
          if (instr.opc == OPC_REMOVE) chk(e.vox.op == VC_INSERT && e.vox.value == INVALID_PTR, "remove = insert invalid");
          chk(!l1_reserve && !l2_reserve && !unreserve, "no config on memory op");
        end
        OPC_LOAD, OPC_STORE: begin
          chk(lsq_push == lsq_ready, "load/store push");
          chk(e.mode == MODE_VADDR && e.va.vaddr == instr.rd1 && e.va.write == (instr.opc == OPC_STORE) &&
              (instr.opc == OPC_LOAD || e.va.wdata == instr.r1), "virtual-address entry");
        end
        OPC_RESERVE: begin
          automatic bit drained = lsq_empty && ctrl_idle && !cfg_busy;
          chk(!lsq_push, "reserve not queued");
          chk(instr_ready == drained, "reserve waits for drain");
          chk(l1_reserve == (drained && instr.lvl == 1), "reserve L1D");
          chk(l2_reserve == (drained && instr.lvl == 2), "reserve L2");
          chk(int'(cfg_ways) == int'(instr.ways), "ways");
          chk(bad_instr == !(instr.lvl inside {1, 2}), "bad level flagged");
        end
        OPC_UNRESERVE: begin
          automatic bit drained = lsq_empty && ctrl_idle && !cfg_busy;
          chk(!lsq_push && unreserve == drained && instr_ready == drained, "unreserve waits for drain");
        end
        default: ;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
