// tb_lru_replacer: checks LRU at 16 ways against a recency list kept by the
// testbench: after random touches the victim must be the least recently
// touched way, an invalid way (lowest-numbered) must be preferred, and the
// ages must stay a permutation of 0..15.
module tb_lru_replacer;
  localparam int W = 16, AW = 4;

  logic [W*AW-1:0] ages, ages_touched;
  logic [W-1:0]    valid;
  logic [AW-1:0]   touch_way, victim_way;
  logic            victim_valid;

  lru_replacer dut (.ages, .valid, .touch_way, .ages_touched, .victim_way, .victim_valid);

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

  int order [$];   // most recent first

  initial begin : main
    for (int j = 0; j < W; j++) ages[j*AW +: AW] = AW'(j);
    order.delete();
    for (int j = 0; j < W; j++) order.push_back(j);
    valid = '1;
    for (int n = 0; n < 3000; n++) begin
      int t = $urandom_range(0, W - 1);
      bit seen [W];
      touch_way = AW'(t);
      #1;
      // victim before the touch: least recent = last of the order
      check(victim_valid && int'(victim_way) == order[$],
            $sformatf("victim %0d, least recent is %0d", victim_way, order[$]));
      // apply the touch
      ages = ages_touched;
      foreach (order[i]) if (order[i] == t) begin order.delete(i); break; end
      order.push_front(t);
      #1;
      foreach (seen[j]) seen[j] = 0;
      for (int j = 0; j < W; j++) seen[ages[j*AW +: AW]] = 1;
      foreach (seen[j]) check(seen[j], "ages are not a permutation");
      check(ages[t*AW +: AW] == 0, "touched way is not the youngest");
      if (n % 10 == 0) begin
        int inv = $urandom_range(0, W - 1);
        int inv2 = $urandom_range(inv, W - 1);
        valid = '1; valid[inv2] = 1'b0; valid[inv] = 1'b0;
        #1;
        check(!victim_valid && int'(victim_way) == inv, "invalid way not chosen first");
        valid = '1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
