// tb_metadata_array: checks the metadata array at its default size (1024
// sets, 16 ways, 26-bit tags): ready rises exactly SETS cycles after reset,
// every set then reads as empty with LRU ages 0..15, reads return data one
// cycle after rd_en, a read and a write of the same set in one cycle return
// the old contents, and random writes read back as a reference copy says.
module tb_metadata_array;
  localparam int S = 1024, W = 16, LA = 26;
  localparam int TW = W * (LA + 2), AWD = W * 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          ready, rd_en = 1'b0, wr_en = 1'b0;
  logic [9:0]    rd_set = '0, wr_set = '0;
  logic [TW-1:0] rd_tags, wr_tags = '0;
  logic [AWD-1:0] rd_ages, wr_ages = '0;

  metadata_array dut (.clk, .rst_n, .ready, .rd_en, .rd_set, .rd_tags, .rd_ages,
                      .wr_en, .wr_set, .wr_tags, .wr_ages);

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [TW-1:0]  ref_tags [S];
  logic [AWD-1:0] ref_ages [S];
  logic [AWD-1:0] init_ages;

  initial begin : main
    int n;
    for (int j = 0; j < W; j++) init_ages[j*4 +: 4] = 4'(j);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    n = 0;
    while (!ready) begin @(negedge clk); n++; end
    check(n == S, $sformatf("ready after %0d cycles, expected %0d", n, S));
    foreach (ref_tags[i]) begin ref_tags[i] = '0; ref_ages[i] = init_ages; end
    // every set empty after the reset sweep
    for (int i = 0; i < S; i++) begin
      rd_en = 1'b1; rd_set = 10'(i);
      @(negedge clk);
      rd_en = 1'b0;
      check(rd_tags == '0 && rd_ages == init_ages, $sformatf("set %0d not cleared", i));
    end
    // random traffic
    for (int k = 0; k < 4000; k++) begin
      int ws, rs;
      logic [TW-1:0] old_t;
      logic [AWD-1:0] old_a;
      ws = $urandom_range(0, S - 1);
      rs = $urandom_range(0, 1) ? ws : $urandom_range(0, S - 1);
      old_t = ref_tags[rs];
      old_a = ref_ages[rs];
      wr_en = $urandom_range(0, 1); wr_set = 10'(ws);
      for (int w = 0; w < TW; w += 32) wr_tags[w +: 32] = $urandom;
      wr_ages = {$urandom, $urandom};
      rd_en = 1'b1; rd_set = 10'(rs);
      @(negedge clk);
      check(rd_tags == old_t && rd_ages == old_a, $sformatf("read of set %0d wrong", rs));
      if (wr_en) begin ref_tags[ws] = wr_tags; ref_ages[ws] = wr_ages; end
      wr_en = 1'b0; rd_en = 1'b0;
      // rd_en low: output holds
      @(negedge clk);
      check(rd_tags == old_t, "read data changed without rd_en");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
