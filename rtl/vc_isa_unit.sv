// vc_isa_unit: decode of the VoxelCache instructions into memory requests.
//
// Five instructions are added to the ISA:
//   reserve_cache_lines ways, lvl  mark and invalidate the first `ways` ways
//                                  of every set of level `lvl`
//   voxcache_lookup  state, rd1, rd2, r1   look up key (rd1, rd2) -> r1
//   voxcache_insert  status, rd1, rd2, r1  insert key (rd1, rd2) with value r1
//   voxcache_remove  status, rd1, rd2      insert key (rd1, rd2) with the
//                                          invalid value
//   unreserve_lines                        release every reserved line
// Ordinary loads and stores (address in rd1, store data in r1) pass through
// the same unit so that all memory requests enter the load-store queue in
// program order.
//
// For lookup, insert and remove the unit forms the 12-byte key from the
// source registers (rd1 = {ky, kx}, rd2[31:0] = kz; the instruction names a
// 16-byte key, of which 12 bytes are stored), computes the pseudoaddress with
// vc_pseudoaddr and pushes a VoxelCache-mode entry into the queue, as the
// paper describes. reserve_cache_lines and unreserve_lines wait until the
// queue is empty, the controller idle and no sweep running, then pulse the
// configuration of the level (lvl 1 = L1D, lvl 2 = L2; unreserve goes to
// both). The opcode and operand encodings are this design's own.
//
// Interface: instr_valid/instr_ready handshake; an instruction is consumed in
// the cycle both are high. The unit is combinational: all state lives in
// the queue and the cache levels.
module vc_isa_unit
  import vc_pkg::*;
#(
  parameter int unsigned NR    = 1024,
  parameter int unsigned WAY_W = 3
) (
  input  logic             instr_valid,
  output logic             instr_ready,
  input  vc_instr_t        instr,
  // load-store queue
  output logic             lsq_push,
  input  logic             lsq_ready,
  output lsq_entry_t       lsq_entry,
  // drain condition for configuration instructions
  input  logic             lsq_empty,
  input  logic             ctrl_idle,
  input  logic             cfg_busy,
  // configuration of the two levels
  output logic             l1_reserve,
  output logic             l2_reserve,
  output logic             unreserve,
  output logic [WAY_W:0]   cfg_ways,
  output logic             bad_instr
);

  localparam int unsigned PA_W = (NR > 1) ? $clog2(NR) : 1;

  key_t            key;
  logic [PA_W-1:0] pa;
  logic [31:0]     hash_unused;
  logic            is_mem, is_cfg, drained;

  vc_pseudoaddr #(.NR(NR)) u_pa (
    .key (key),
    .pa  (pa),
    .hash(hash_unused)
  );

  always_comb begin
    key     = key_from_regs(instr.rd1, instr.rd2);
    is_mem  = instr.opc inside {OPC_LOOKUP, OPC_INSERT, OPC_REMOVE, OPC_LOAD, OPC_STORE};
    is_cfg  = instr.opc inside {OPC_RESERVE, OPC_UNRESERVE};
    drained = lsq_empty && ctrl_idle && !cfg_busy;

    lsq_entry           = '0;
    lsq_entry.vox.id    = instr.id;
    lsq_entry.vox.key   = key;
    lsq_entry.vox.pa    = 32'(pa);
    lsq_entry.va.id     = instr.id;
    lsq_entry.va.vaddr  = instr.rd1;
    lsq_entry.va.wdata  = instr.r1;
    unique case (instr.opc)
      OPC_LOOKUP: begin
        lsq_entry.mode      = MODE_VOX;
        lsq_entry.vox.op    = VC_LOOKUP;
        lsq_entry.vox.value = INVALID_PTR;
      end
      OPC_INSERT: begin
        lsq_entry.mode      = MODE_VOX;
        lsq_entry.vox.op    = VC_INSERT;
        lsq_entry.vox.value = instr.r1;
      end
      OPC_REMOVE: begin
        lsq_entry.mode      = MODE_VOX;
        lsq_entry.vox.op    = VC_INSERT;
        lsq_entry.vox.value = INVALID_PTR;
      end
      OPC_STORE: begin
        lsq_entry.mode     = MODE_VADDR;
        lsq_entry.va.write = 1'b1;
      end
      default: begin
        lsq_entry.mode     = MODE_VADDR;
        lsq_entry.va.write = 1'b0;
      end
    endcase

    instr_ready = is_mem ? lsq_ready : (is_cfg ? drained : 1'b1);
    lsq_push    = instr_valid && is_mem && lsq_ready;

    l1_reserve  = instr_valid && drained && instr.opc == OPC_RESERVE && instr.lvl == 2'd1;
    l2_reserve  = instr_valid && drained && instr.opc == OPC_RESERVE && instr.lvl == 2'd2;
    unreserve   = instr_valid && drained && instr.opc == OPC_UNRESERVE;
    cfg_ways    = (WAY_W+1)'(instr.ways);
    bad_instr   = instr_valid && instr.opc == OPC_RESERVE && !(instr.lvl inside {2'd1, 2'd2});
  end

endmodule
