// tb_hash_index_unit: compares the hash of random and corner vertices with
// (x*1 ^ y*2654435761 ^ z*805459861) mod 2^15 computed in 64-bit integers.
module tb_hash_index_unit;
  import spnerf_pkg::*;
  vcoord_t     c;
  logic [14:0] idx;
  int checks = 0, failures = 0;
  hash_index_unit dut (.coord(c), .index(idx));

  function automatic logic [14:0] ref_hash(int x, int y, int z);
    longint unsigned h;
    h = ((longint'(x) * 1) ^ (longint'(y) * 64'd2654435761) ^ (longint'(z) * 64'd805459861));
    return 15'(h % 32768);
  endfunction

  task automatic chk(int x, int y, int z);
    c = '{x: 8'(x), y: 8'(y), z: 8'(z)}; #1;
    checks++;
    if (idx !== ref_hash(x, y, z)) begin
      failures++;
      if (failures < 10) $display("MISMATCH (%0d,%0d,%0d) -> %0d expected %0d", x, y, z, idx, ref_hash(x, y, z));
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(0, 0, 0); chk(1, 0, 0); chk(0, 1, 0); chk(0, 0, 1); chk(255, 255, 255);
    for (int i = 0; i < 5000; i++) chk($urandom % 256, $urandom % 256, $urandom % 256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
