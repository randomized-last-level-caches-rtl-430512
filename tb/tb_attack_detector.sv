// tb_attack_detector: checks the detector at its default size (1024 sets,
// 4096 accesses per sample, threshold 5, EMA factor 1/32) against a
// reference model in real arithmetic.
//
// Each sample period feeds 4096 access pulses and a chosen list of
// evictions. After each evaluation every set's stored EMA score must match
// the reference within 5 % (plus a small absolute margin for the fixed-point
// format), detect must agree with the reference whenever the highest score is
// not within 0.3 of the threshold, and the evaluation must finish in under
// 2,300 cycles (about 2K cycles, below the sample period). Scenarios: random
// background evictions, a sample with a single eviction (must not trigger),
// prime-prune-test-like bursts of 16 evictions on one set (must trigger),
// and a remap that clears the stored scores.
module tb_attack_detector;
  localparam int unsigned S      = 1024;
  localparam int unsigned SAMPLE = 4096;
  localparam int unsigned FB     = 8;
  localparam real         TH     = 5.0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         access = 1'b0, evict = 1'b0, remap_start = 1'b0;
  logic [9:0]   evict_set = '0;
  logic         detect, busy;
  logic [9:0]   detect_set, last_max_set;
  logic signed [23:0] last_max_az;
  logic [31:0]  evaluations, last_eval_cycles, overruns;

  attack_detector dut (
    .clk, .rst_n, .access, .evict, .evict_set, .remap_start,
    .detect, .detect_set, .busy, .last_max_az, .last_max_set,
    .evaluations, .last_eval_cycles, .overruns
  );

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real    az_ref [S];
  int     e_ref  [S];
  int     ev_list [$];
  int     n_detect = 0, n_expect_detect = 0;
  bit     detect_seen;

  always @(posedge clk) if (rst_n && detect) detect_seen <= 1'b1;

  // Feed one sample: SAMPLE accesses, the evictions of ev_list spread over it.
  task automatic run_sample();
    int k = 0;
    foreach (e_ref[i]) e_ref[i] = 0;
    foreach (ev_list[i]) e_ref[ev_list[i]]++;
    for (int unsigned a = 0; a < SAMPLE; a++) begin
      @(negedge clk);
      access = 1'b1;
      if (k < ev_list.size()) begin
        evict = 1'b1; evict_set = 10'(ev_list[k]); k++;
      end else evict = 1'b0;
    end
    @(negedge clk);
    access = 1'b0; evict = 1'b0;
    check(k == ev_list.size(), "more evictions than accesses in a sample");
  endtask

  task automatic reference(input bit reset_az);
    real sum = 0.0, sum2 = 0.0, mean, denom, wz;
    foreach (e_ref[i]) begin sum += e_ref[i]; sum2 += real'(e_ref[i]) * e_ref[i]; end
    mean  = sum / S;
    denom = $sqrt(sum2 / (S - 1));
    foreach (e_ref[i]) begin
      wz = (denom > 0.0) ? (e_ref[i] - mean) * e_ref[i] / denom : 0.0;
      if (reset_az) az_ref[i] = 0.0;
      az_ref[i] = az_ref[i] + (wz - az_ref[i]) / 32.0;
    end
  endtask

  task automatic evaluate_and_compare(input bit reset_az, input string name);
    int unsigned ev0 = evaluations;
    real maxref = -1.0e9;
    int  bad = 0;
    detect_seen = 1'b0;
    reference(reset_az);
    while (evaluations == ev0) @(negedge clk);
    @(negedge clk);
    foreach (az_ref[i]) begin
      real hw = real'(dut.az_mem[i]) / (1 << FB);
      if (az_ref[i] > maxref) maxref = az_ref[i];
      checks++;
      if (!(hw - az_ref[i] <= 0.05 * (az_ref[i] < 0 ? -az_ref[i] : az_ref[i]) + 0.1 &&
            az_ref[i] - hw <= 0.05 * (az_ref[i] < 0 ? -az_ref[i] : az_ref[i]) + 0.1)) begin
        failures++; bad++;
        if (bad < 4) $display("FAIL: %s set %0d az hw=%f ref=%f", name, i, hw, az_ref[i]);
      end
    end
    check(last_eval_cycles < 2300, $sformatf("%s: evaluation took %0d cycles", name, last_eval_cycles));
    if (maxref >= TH + 0.3 || maxref <= TH - 0.3) begin
      check(detect_seen == (maxref >= TH),
            $sformatf("%s: detect=%0b, reference max az=%f", name, detect_seen, maxref));
    end
    if (maxref >= TH) n_expect_detect++;
    if (detect_seen) n_detect++;
    $display("%s: max az ref=%f hw=%f (set %0d) detect=%0b cycles=%0d", name, maxref,
             real'(last_max_az) / (1 << FB), last_max_set, detect_seen, last_eval_cycles);
  endtask

  initial begin : main
    foreach (az_ref[i]) az_ref[i] = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    while (busy) @(negedge clk);   // reset sweep

    // random background: about one eviction per two accesses
    for (int s = 0; s < 3; s++) begin
      ev_list.delete();
      repeat (2048) ev_list.push_back($urandom_range(0, S - 1));
      run_sample();
      evaluate_and_compare(1'b0, $sformatf("random %0d", s));
    end
    // a single eviction in a whole sample: maximal z but tiny weight
    ev_list.delete();
    ev_list.push_back(77);
    run_sample();
    evaluate_and_compare(1'b0, "single eviction");
    // test phase of an attack: 16 evictions on set 300 and little else
    for (int s = 0; s < 2; s++) begin
      ev_list.delete();
      repeat (16) ev_list.push_back(300);
      repeat (8) ev_list.push_back($urandom_range(0, S - 1));
      run_sample();
      evaluate_and_compare(1'b0, $sformatf("attack %0d", s));
    end
    check(detect_set == 10'd300, $sformatf("detect_set=%0d, expected 300", detect_set));
    // a remap clears the scores at the next evaluation
    @(negedge clk); remap_start = 1'b1; @(negedge clk); remap_start = 1'b0;
    ev_list.delete();
    repeat (100) ev_list.push_back($urandom_range(0, S - 1));
    run_sample();
    evaluate_and_compare(1'b1, "after remap");
    // attack spread thinly: one congruent eviction per sample on top of noise
    for (int s = 0; s < 4; s++) begin
      ev_list.delete();
      repeat (4) ev_list.push_back(512);
      repeat (200) ev_list.push_back($urandom_range(0, S - 1));
      run_sample();
      evaluate_and_compare(1'b0, $sformatf("thin %0d", s));
    end

    check(n_detect > 0 && n_expect_detect > 0, "no detection happened");
    check(overruns == 0, "evaluation overran the sample period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
