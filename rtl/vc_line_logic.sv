// vc_line_logic: key compare and within-line replacement for one reserved line.
//
// A reserved line holds PAIRS key/pointer slots (3 on a CPU, 6 on a GPU).
// The requested key is compared with every slot at once ("Compare key" per
// slot, then "key exists?"). The block returns the pointer of the matching
// slot and builds the line as it must be written back:
//   lookup, key found     : return pointer, make the slot most recently used
//   lookup, key not found : return the invalid value, line unchanged
//   insert, key found     : overwrite the pointer, make the slot MRU
//   insert, key not found : place the pair in an empty slot if there is one
//                           (lowest index first), else replace the least
//                           recently used slot; make it MRU
// This is the paper's within-line policy. The LRU is exact: each slot keeps
// an age (0 = most recent); touching a slot ages every valid slot younger
// than it. The paper budgets 2 LRU bits per 3-slot line, which cannot hold
// an exact order of 3 slots; this design keeps exact ages instead.
//
// Interface: purely combinational. `wr` selects insert (1) or lookup (0).
// `evict` flags an insert that displaced a valid pair of another key.
module vc_line_logic
  import vc_pkg::*;
#(
  parameter int unsigned PAIRS = 3,
  parameter int unsigned IDX_W = (PAIRS > 1) ? $clog2(PAIRS) : 1
) (
  input  pair_t       [PAIRS-1:0] pairs_in,
  input  slot_state_t [PAIRS-1:0] st_in,
  input  key_t                    key,
  input  logic                    wr,
  input  ptr_t                    wvalue,
  output logic                    hit,
  output logic        [IDX_W-1:0] hit_idx,
  output ptr_t                    rvalue,
  output logic        [IDX_W-1:0] slot_idx,   // slot read or written
  output logic                    evict,
  output pair_t       [PAIRS-1:0] pairs_out,
  output slot_state_t [PAIRS-1:0] st_out
);

  logic [IDX_W-1:0] victim;
  logic             have_empty;
  logic             touch;
  int unsigned      old_age;

  always_comb begin
    // compare the key against every valid slot
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < PAIRS; i++) begin
      if (st_in[i].valid && pairs_in[i].key == key && !hit) begin
        hit     = 1'b1;
        hit_idx = IDX_W'(i);
      end
    end
    rvalue = hit ? pairs_in[hit_idx].ptr : INVALID_PTR;

    // victim: first empty slot, else the oldest one
    have_empty = 1'b0;
    victim     = '0;
    for (int i = PAIRS - 1; i >= 0; i--) begin
      if (!st_in[i].valid) begin
        have_empty = 1'b1;
        victim     = IDX_W'(i);
      end
    end
    if (!have_empty) begin
      for (int i = 0; i < PAIRS; i++) begin
        if (int'(st_in[i].age) == PAIRS - 1) victim = IDX_W'(i);
      end
    end

    slot_idx  = (hit || !wr) ? hit_idx : victim;
    evict     = wr && !hit && !have_empty;
    touch     = hit || wr;
    old_age   = st_in[slot_idx].valid ? int'(st_in[slot_idx].age) : PAIRS;

    pairs_out = pairs_in;
    st_out    = st_in;
    if (touch) begin
      for (int i = 0; i < PAIRS; i++) begin
        if (st_in[i].valid && int'(st_in[i].age) < old_age)
          st_out[i].age = st_in[i].age + 1'b1;
      end
      st_out[slot_idx].valid = 1'b1;
      st_out[slot_idx].age   = '0;
    end
    if (wr) begin
      pairs_out[slot_idx].key = key;
      pairs_out[slot_idx].ptr = wvalue;
    end
  end

endmodule
