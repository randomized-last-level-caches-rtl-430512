// tb_index_select: checks the set-index selection of a remap against the
// rules: outside a remap the old index i; during a remap i' for a relocated
// set (i < p), i for a set not yet relocated (i >= p) and i' again on the
// retry; can_retry only for i >= p, no retry yet, and i != i'. Indices are
// compared with the reference encryptor. Default size.
module tb_index_select;
  import tb_enc_ref_pkg::*;
  localparam int LA = 26, IW = 10, R = 4;

  logic [LA-1:0]       addr;
  logic [R*(LA/2)-1:0] k_old, k_new;
  logic                active, retry;
  logic [IW-1:0]       ptr, i_old, i_new, index;
  logic                use_new, can_retry;

  index_select dut (.line_addr(addr), .key_old(k_old), .key_new(k_new), .remap_active(active),
                    .ptr, .retry, .idx_old(i_old), .idx_new(i_new), .index, .use_new, .can_retry);

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

  initial begin : main
    int unsigned n_old = 0, n_new = 0, n_retry = 0;
    for (int n = 0; n < 5000; n++) begin
      int ei, eni, exp_idx;
      bit exp_retry;
      addr   = LA'({$urandom, $urandom});
      k_old  = (R*(LA/2))'({$urandom, $urandom});
      k_new  = (R*(LA/2))'({$urandom, $urandom});
      active = $urandom_range(0, 3) != 0;
      retry  = $urandom_range(0, 3) == 0;
      ptr    = IW'($urandom);
      if (n % 7 == 0) k_new = k_old;           // i == i'
      #1;
      ei  = int'(enc_ref(addr, k_old, LA, R, IW));
      eni = int'(enc_ref(addr, k_new, LA, R, IW));
      if (!active)               exp_idx = ei;
      else if (ei >= int'(ptr))  exp_idx = retry ? eni : ei;
      else                       exp_idx = eni;
      exp_retry = active && (ei >= int'(ptr)) && !retry && (ei != eni);
      check(int'(i_old) == ei && int'(i_new) == eni, "encryptor outputs differ from reference");
      check(int'(index) == exp_idx, $sformatf("index %0d expected %0d (active %0b i %0d i' %0d p %0d retry %0b)",
            index, exp_idx, active, ei, eni, ptr, retry));
      check(can_retry == exp_retry, "can_retry wrong");
      if (exp_retry) n_retry++;
      if (index == i_new && active) n_new++; else n_old++;
    end
    check(n_retry > 100 && n_new > 100 && n_old > 100, "some selection cases never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
