// vc_pseudoaddr: pseudoaddress generation for a VoxelCache key.
//
// Every key is given a pseudoaddress, pseudoaddress = hash(k) % NR, where NR
// is the number of reserved lines in the outermost reserved cache level. The
// pseudoaddress is a line number: each cache level derives its set index and
// tag from it (set = pa % SETS, tag = pa / SETS, see vc_cache_level). Because
// all levels derive their set and tag from the same number, keys that share
// a line at one level share a line at every level, so whole lines can move
// between levels.
//
// The modulo and the role of NR follow the paper. The hash function is not
// given there; this design uses the spatial hash common in voxel hashing,
// h = (kx*73856093) ^ (ky*19349669) ^ (kz*83492791), computed on 32 bits.
//
// Interface: purely combinational, key in, pseudoaddress out, no clock.
// Default NR = 1024: a 256 KiB 8-way L2 with 64-byte lines has 512 sets, and
// 2 of its 8 ways are reserved.
module vc_pseudoaddr
  import vc_pkg::*;
#(
  parameter int unsigned NR   = 1024,
  parameter int unsigned PA_W = (NR > 1) ? $clog2(NR) : 1
) (
  input  key_t            key,
  output logic [PA_W-1:0] pa,
  output logic [31:0]     hash
);

  localparam logic [31:0] P1 = 32'd73856093;
  localparam logic [31:0] P2 = 32'd19349669;
  localparam logic [31:0] P3 = 32'd83492791;

  logic [31:0] hx, hy, hz, pa_full;

  always_comb begin
    hx      = key.kx * P1;
    hy      = key.ky * P2;
    hz      = key.kz * P3;
    hash    = hx ^ hy ^ hz;
    pa_full = hash % NR;
    pa      = pa_full[PA_W-1:0];
  end

endmodule
