// tb_vc_pseudoaddr: checks the pseudoaddress of random and corner keys
// against a reference computed here with 64-bit arithmetic:
// pa = ((kx*73856093) ^ (ky*19349669) ^ (kz*83492791)) mod 2^32 mod NR.
// Runs NR = 1024 (CPU: L2 reserved lines) and NR = 96 (not a power of two).
module tb_vc_pseudoaddr;
  import vc_pkg::*;

  int checks = 0, failures = 0;
  key_t key;
  logic [9:0]  pa_a;
  logic [6:0]  pa_b;
  logic [31:0] hash_a, hash_b;

  vc_pseudoaddr #(.NR(1024)) dut_a (.key(key), .pa(pa_a), .hash(hash_a));
  vc_pseudoaddr #(.NR(96))   dut_b (.key(key), .pa(pa_b), .hash(hash_b));

  function automatic longint unsigned ref_hash(key_t k);
    longint unsigned x, y, z;
    x = (longint'(k.kx) * 64'd73856093) & 64'hFFFF_FFFF;
    y = (longint'(k.ky) * 64'd19349669) & 64'hFFFF_FFFF;
    z = (longint'(k.kz) * 64'd83492791) & 64'hFFFF_FFFF;
    return (x ^ y ^ z) & 64'hFFFF_FFFF;
  endfunction

  task automatic check_key(key_t k);
    longint unsigned h;
    key = k;
    #1;
    h = ref_hash(k);
    checks++;
    if (hash_a != h[31:0]) begin failures++; $display("FAIL hash %h exp %h", hash_a, h[31:0]); end
    checks++;
    if (pa_a != 10'(h % 1024)) begin failures++; $display("FAIL pa1024 %0d exp %0d", pa_a, h % 1024); end
    checks++;
    if (pa_b != 7'(h % 96) || pa_b >= 96) begin failures++; $display("FAIL pa96 %0d exp %0d", pa_b, h % 96); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key_t k;
    check_key('{kz: 0, ky: 0, kx: 0});
    check_key('{kz: 0, ky: 0, kx: 1});
    check_key('{kz: -1, ky: -1, kx: -1});
    check_key('{kz: 32'sh7fffffff, ky: 32'sh80000000, kx: 5});
    for (int i = 0; i < 500; i++) begin
      k.kx = $urandom; k.ky = $urandom; k.kz = $urandom;
      if (i % 2 == 0) begin  // small coordinates, as in a voxel map
        k.kx = 32'(int'($urandom_range(0, 200)) - 100);
        k.ky = 32'(int'($urandom_range(0, 200)) - 100);
        k.kz = 32'(int'($urandom_range(0, 20)) - 10);
      end
      check_key(k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
