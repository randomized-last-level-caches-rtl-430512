// attack_detector: detects eviction-set searches from the per-set
// distribution of LLC evictions and asks for a remap.
//
// During a sample period of SAMPLE LLC accesses the detector counts the
// evictions e_i of every cache set i. At the end of the period it computes,
// for every set, a non-centred Z-score z_i = e_i / sqrt(sum(e^2) / (S-1)),
// weights it by the set's excess of evictions, wz_i = (e_i - mean(e)) * z_i,
// and keeps an exponential moving average az_i = (1 - a) * az_i + a * wz_i
// with a = 2^-EMA_SHIFT (1/32). If any az_i reaches THRESHOLD (5), detect
// pulses and a remap follows. An ideal prime-prune-test round puts W
// evictions on one set and none elsewhere, which gives wz = W * sqrt(S) (512
// for 1024 sets and 16 ways) and an az of about 16; a single stray eviction
// gives wz of about sqrt(S) = 32 and an az of 1.
//
// Structure: two banks of eviction counters (one counts while the other is
// evaluated) and one array of EMA scores, all SETS entries deep. Evaluation
// runs in four steps: a pass over the sets summing e and e^2 (SETS cycles);
// var = sum(e^2) / (S-1) with a sequential divider; its square root with a
// sequential root unit; the reciprocal 1/sqrt(var) with the divider; then a
// second pass over the sets computing wz and az and clearing the counters
// (SETS cycles). With the defaults this takes about 2,200 cycles, below the
// sample period. One reciprocal per period replaces a division per set;
// the two multiplications per set are kept as multipliers.
//
// Number formats (this implementation's choice): scores are signed fixed
// point with FRAC_W fraction bits; az is stored in AZ_W bits and wz saturates
// to that range; the counters saturate at 2^CNT_W - 1. SETS must be a power of
// two (the mean is a shift). After a remap the stored scores are reset at the
// next evaluation (also a choice of this implementation: the set distribution
// before a remap says nothing about the sets after it).
//
// After reset the detector clears its counters and scores, one set per cycle
// (SETS cycles), and ignores evictions meanwhile.
//
// Interface: access pulses once per LLC access, evict pulses with evict_set
// for each eviction. detect is a one-cycle pulse at the end of an evaluation
// that found az >= THRESHOLD; detect_set names the highest-scoring set.
module attack_detector #(
  parameter int unsigned SETS      = llc_pkg::SETS_DEFAULT,
  parameter int unsigned SAMPLE    = llc_pkg::SAMPLE_DEFAULT,
  parameter int unsigned THRESHOLD = llc_pkg::THRESHOLD_DEFAULT,
  parameter int unsigned EMA_SHIFT = llc_pkg::EMA_SHIFT_DEFAULT,
  parameter int unsigned CNT_W     = llc_pkg::CNT_W_DEFAULT,
  parameter int unsigned FRAC_W    = llc_pkg::FRAC_W_DEFAULT,
  parameter int unsigned AZ_W      = llc_pkg::AZ_W_DEFAULT,
  localparam int unsigned IDX_W    = $clog2(SETS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   access,
  input  logic                   evict,
  input  logic [IDX_W-1:0]       evict_set,
  input  logic                   remap_start,
  output logic                   detect,
  output logic [IDX_W-1:0]       detect_set,
  output logic                   busy,
  output logic signed [AZ_W-1:0] last_max_az,     // highest az of the last evaluation
  output logic [IDX_W-1:0]       last_max_set,
  output logic [31:0]            evaluations,
  output logic [31:0]            last_eval_cycles,
  output logic [31:0]            overruns          // sample ended while still evaluating
);
  localparam int unsigned SUM_W  = CNT_W + IDX_W;
  localparam int unsigned SUM2_W = 2 * CNT_W + IDX_W;
  localparam int unsigned DW0    = SUM2_W + 2 * FRAC_W;
  localparam int unsigned DIV_W  = DW0 + (DW0 % 2);        // even, for the root
  localparam int unsigned RT_W   = DIV_W / 2;
  localparam int unsigned R_W    = 2 * FRAC_W + 2;         // reciprocal, unsigned
  localparam int unsigned D_W    = SUM_W + FRAC_W + 1;     // e - mean, signed
  localparam int unsigned P_W    = D_W + CNT_W + 1;        // (e - mean) * e
  localparam int unsigned WZ_W   = P_W + R_W + 1;
  localparam int unsigned SMP_W  = $clog2(SAMPLE);
  localparam logic signed [AZ_W-1:0] AZ_MAX = {1'b0, {(AZ_W-1){1'b1}}};
  localparam logic signed [AZ_W-1:0] AZ_MIN = {1'b1, {(AZ_W-1){1'b0}}};
  localparam logic signed [AZ_W-1:0] TH_Q   = AZ_W'(THRESHOLD << FRAC_W);

  if ((SETS & (SETS - 1)) != 0 || SETS < 2) begin : g_bad_sets
    $error("attack_detector: SETS must be a power of two");
  end

  // ---------------------------------------------------------------- counting
  logic [CNT_W-1:0]        cnt_mem [2][SETS];
  logic signed [AZ_W-1:0]  az_mem  [SETS];
  logic                    cnt_bank;      // bank being counted
  logic [SMP_W-1:0]        acc_cnt;
  logic                    sample_end;

  assign sample_end = access && (acc_cnt == SMP_W'(SAMPLE - 1));

  // ---------------------------------------------------------------- evaluation
  typedef enum logic [2:0] {D_INIT, D_IDLE, D_SUM, D_VAR, D_SQRT, D_RECIP, D_SCORE} dstate_e;
  dstate_e            state;
  logic [IDX_W-1:0]   idx;
  logic [SUM_W-1:0]   sum_e;
  logic [SUM2_W-1:0]  sum_e2;
  logic [R_W-1:0]     recip;
  logic               az_reset_pending, az_reset_now;
  logic               hit;
  logic [31:0]        cycles;

  logic [CNT_W-1:0]   e_rd;
  assign e_rd = cnt_mem[~cnt_bank][idx];

  // Divider and root shared by the evaluation steps.
  logic             div_start, div_done, div_busy;
  logic [DIV_W-1:0] div_num, div_den, div_quot;
  logic             rt_start, rt_done, rt_busy;
  logic [RT_W-1:0]  rt_root;

  seq_udiv #(.W(DIV_W)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quot(div_quot)
  );
  seq_isqrt #(.W(DIV_W)) u_sqrt (
    .clk, .rst_n, .start(rt_start), .x(div_quot),
    .busy(rt_busy), .done(rt_done), .root(rt_root)
  );

  // Per-set score, computed combinationally in the D_SCORE pass.
  logic [SUM_W+FRAC_W-1:0] mean_q;
  logic signed [D_W-1:0]   diff_q;
  logic signed [P_W-1:0]   prod_q;
  logic signed [WZ_W-1:0]  wz_full;
  logic signed [AZ_W-1:0]  wz_q, az_old, az_new;
  logic signed [AZ_W:0]    az_delta;

  assign mean_q = (SUM_W+FRAC_W)'({sum_e, {FRAC_W{1'b0}}} >> IDX_W);

  always_comb begin
    diff_q   = $signed(D_W'({e_rd, {FRAC_W{1'b0}}})) - $signed(D_W'(mean_q));
    prod_q   = diff_q * $signed({1'b0, e_rd});
    wz_full  = (prod_q * $signed({1'b0, recip})) >>> FRAC_W;
    if (wz_full > WZ_W'(AZ_MAX))      wz_q = AZ_MAX;
    else if (wz_full < WZ_W'(AZ_MIN)) wz_q = AZ_MIN;
    else                              wz_q = wz_full[AZ_W-1:0];
    az_old   = az_reset_now ? '0 : az_mem[idx];
    az_delta = $signed({wz_q[AZ_W-1], wz_q} - {az_old[AZ_W-1], az_old}) >>> EMA_SHIFT;
    az_new   = az_old + az_delta[AZ_W-1:0];
  end

  always_comb begin
    div_start = 1'b0;
    div_num   = '0;
    div_den   = '0;
    rt_start  = 1'b0;
    unique case (state)
      D_SUM: if (idx == IDX_W'(SETS - 1)) begin
        div_start = 1'b1;
        div_num   = DIV_W'({sum_e2 + SUM2_W'(e_rd) * SUM2_W'(e_rd), {(2*FRAC_W){1'b0}}});
        div_den   = DIV_W'(SETS - 1);
      end
      D_VAR:  rt_start = div_done;
      D_SQRT: if (rt_done) begin
        div_start = 1'b1;
        div_num   = DIV_W'(1) << (2 * FRAC_W);
        div_den   = DIV_W'(rt_root);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_bank         <= 1'b0;
      acc_cnt          <= '0;
      state            <= D_INIT;
      idx              <= '0;
      sum_e            <= '0;
      sum_e2           <= '0;
      recip            <= '0;
      az_reset_pending <= 1'b1;   // scores start at zero
      az_reset_now     <= 1'b0;
      hit              <= 1'b0;
      cycles           <= '0;
      detect           <= 1'b0;
      detect_set       <= '0;
      last_max_az      <= '0;
      last_max_set     <= '0;
      evaluations      <= '0;
      last_eval_cycles <= '0;
      overruns         <= '0;
    end else begin
      detect <= 1'b0;
      if (remap_start) az_reset_pending <= 1'b1;
      if (access) acc_cnt <= sample_end ? '0 : acc_cnt + 1'b1;
      if (state != D_IDLE && state != D_INIT) cycles <= cycles + 1;

      if (sample_end) begin
        if (state == D_IDLE) begin
          cnt_bank     <= ~cnt_bank;
          state        <= D_SUM;
          idx          <= '0;
          sum_e        <= '0;
          sum_e2       <= '0;
          cycles       <= 32'd1;
          az_reset_now <= az_reset_pending;
          az_reset_pending <= remap_start;
        end else begin
          overruns <= overruns + 1;
        end
      end

      unique case (state)
        D_INIT: begin
          cnt_mem[0][idx] <= '0;
          cnt_mem[1][idx] <= '0;
          az_mem[idx]     <= '0;
          idx             <= idx + 1'b1;
          if (idx == IDX_W'(SETS - 1)) state <= D_IDLE;
        end
        D_IDLE: ;
        D_SUM: begin
          sum_e  <= sum_e + SUM_W'(e_rd);
          sum_e2 <= sum_e2 + SUM2_W'(e_rd) * SUM2_W'(e_rd);
          idx    <= idx + 1'b1;
          if (idx == IDX_W'(SETS - 1)) state <= D_VAR;
        end
        D_VAR:  if (div_done) state <= D_SQRT;
        D_SQRT: if (rt_done) state <= D_RECIP;
        D_RECIP: if (div_done) begin
          recip       <= (div_quot > DIV_W'({R_W{1'b1}})) ? {R_W{1'b1}} : div_quot[R_W-1:0];
          state       <= D_SCORE;
          idx         <= '0;
          hit         <= 1'b0;
          last_max_az <= AZ_MIN;
        end
        D_SCORE: begin
          az_mem[idx]            <= az_new;
          cnt_mem[~cnt_bank][idx] <= '0;
          if (az_new > last_max_az) begin
            last_max_az  <= az_new;
            last_max_set <= idx;
          end
          if (az_new >= TH_Q) hit <= 1'b1;
          idx <= idx + 1'b1;
          if (idx == IDX_W'(SETS - 1)) begin
            state            <= D_IDLE;
            detect           <= hit || (az_new >= TH_Q);
            detect_set       <= (az_new > last_max_az) ? idx : last_max_set;
            evaluations      <= evaluations + 1;
            last_eval_cycles <= cycles;
            az_reset_now     <= 1'b0;
          end
        end
        default: state <= D_IDLE;
      endcase

      // Count evictions into the active bank (saturating).
      // An eviction in the cycle that ends a sample still belongs to it.
      if (evict && state != D_INIT && cnt_mem[cnt_bank][evict_set] != {CNT_W{1'b1}})
        cnt_mem[cnt_bank][evict_set] <= cnt_mem[cnt_bank][evict_set] + 1'b1;
    end
  end

  assign busy = (state != D_IDLE);

  // The reset sweep ends long before the first sample can.
  a_no_sample_in_init: assert property (@(posedge clk) disable iff (!rst_n)
    state == D_INIT |-> !sample_end);

endmodule
