// tb_index_encryptor: checks the index encryptor at its default size
// (26-bit line address, 10-bit index, 4 rounds) against an independent
// reference model, checks that 16,384 consecutive line addresses spread over
// all 1,024 sets (each set gets between 4 and 40 of them) and that a new key
// gives an unrelated mapping (about 1 in 1,024 indices unchanged).
module tb_index_encryptor;
  import tb_enc_ref_pkg::*;
  localparam int LA = 26, IW = 10, R = 4;

  logic [LA-1:0]       addr;
  logic [R*(LA/2)-1:0] key;
  logic [IW-1:0]       index;

  index_encryptor dut (.line_addr(addr), .key(key), .index(index));

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #1ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned hist [1024];
  logic [IW-1:0] idx_a [16384];

  initial begin : main
    int unsigned mn, mx, same;
    for (int i = 0; i < 3000; i++) begin
      addr = LA'({$urandom, $urandom});
      key  = (R*(LA/2))'({$urandom, $urandom});
      #1;
      check(index == IW'(enc_ref(addr, key, LA, R, IW)),
            $sformatf("addr %h key %h: index %0d, reference %0d", addr, key, index,
                      enc_ref(addr, key, LA, R, IW)));
    end
    key = 52'h1234_5678_9ABC_D;
    foreach (hist[i]) hist[i] = 0;
    for (int i = 0; i < 16384; i++) begin
      addr = LA'(i + 26'h0100000);
      #1;
      hist[index]++;
      idx_a[i] = index;
    end
    mn = 1 << 30; mx = 0;
    foreach (hist[i]) begin if (hist[i] < mn) mn = hist[i]; if (hist[i] > mx) mx = hist[i]; end
    check(mn >= 4 && mx <= 40, $sformatf("uneven spread: min %0d max %0d per set", mn, mx));
    key = 52'hF0E1_D2C3_B4A5_9;
    same = 0;
    for (int i = 0; i < 16384; i++) begin
      addr = LA'(i + 26'h0100000);
      #1;
      if (index == idx_a[i]) same++;
    end
    check(same < 60, $sformatf("%0d of 16384 indices unchanged by a new key", same));
    $display("spread min %0d max %0d, unchanged after rekey %0d", mn, mx, same);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
