// vc_lsq: load-store queue with a per-entry addressing-mode flag.
//
// The core's memory requests wait here in program order. Each entry carries
// a one-bit mode flag: MODE_VADDR for an ordinary load or store by virtual
// address, MODE_VOX for a VoxelCache lookup or insert, which carries the key,
// the value and the pseudoaddress instead of an address. The entry at the
// head is issued to the port its mode selects: VoxelCache entries to the
// VoxelCache cache controller, virtual-address entries to the ordinary cache
// port. The flag and the shared queue follow the paper; the strict in-order
// issue is this design's simplification (the memory disambiguation and
// store-to-load forwarding of a real core are not modelled).
//
// Interface: push side valid/ready, two issue sides valid/ready. An entry
// leaves the queue in the cycle its port accepts it. DEPTH = 32 entries, the
// LSQ size of the simulated CPU. `empty` lets the ISA unit fence on it.
module vc_lsq
  import vc_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned QP_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       push_valid,
  output logic       push_ready,
  input  lsq_entry_t push_entry,
  output logic       vox_valid,
  input  logic       vox_ready,
  output vc_req_t    vox_req,
  output logic       va_valid,
  input  logic       va_ready,
  output va_req_t    va_req,
  output logic       empty,
  output logic [QP_W:0] count
);

  lsq_entry_t       q [DEPTH];
  logic [QP_W-1:0] head_q, tail_q;
  logic [QP_W:0]   count_q;
  logic             push, pop;
  lsq_entry_t       head_e;

  assign head_e     = q[head_q];
  assign empty      = (count_q == '0);
  assign count      = count_q;
  assign push_ready = (int'(count_q) < DEPTH);
  assign vox_valid  = !empty && head_e.mode == MODE_VOX;
  assign va_valid   = !empty && head_e.mode == MODE_VADDR;
  assign vox_req    = head_e.vox;
  assign va_req     = head_e.va;
  assign push       = push_valid && push_ready;
  assign pop        = (vox_valid && vox_ready) || (va_valid && va_ready);

  function automatic logic [QP_W-1:0] inc(logic [QP_W-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
    end else begin
      if (push) begin
        q[tail_q] <= push_entry;
        tail_q    <= inc(tail_q);
      end
      if (pop) head_q <= inc(head_q);
      count_q <= count_q + (QP_W+1)'(push) - (QP_W+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  int'(count_q) <= DEPTH);

endmodule
