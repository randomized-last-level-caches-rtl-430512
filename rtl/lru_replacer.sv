// lru_replacer: true LRU replacement for one cache set.
//
// Each way holds an age between 0 (most recently used) and WAYS-1 (least
// recently used); the ages of a set always form a permutation. Touching a way
// sets its age to 0 and ages by one every way that was younger than it. The
// victim is the lowest-numbered invalid way if there is one, otherwise the way
// of age WAYS-1. LRU is the policy the design uses at every cache level; the
// age-based encoding and the invalid-first victim rule are this
// implementation's choices.
//
// Interface: combinational. ages packs way j's age at [j*AGE_W +: AGE_W].
module lru_replacer #(
  parameter int unsigned WAYS   = llc_pkg::WAYS_DEFAULT,
  localparam int unsigned AGE_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [WAYS*AGE_W-1:0] ages,
  input  logic [WAYS-1:0]       valid,
  input  logic [AGE_W-1:0]      touch_way,
  output logic [WAYS*AGE_W-1:0] ages_touched,  // ages after touching touch_way
  output logic [AGE_W-1:0]      victim_way,
  output logic                  victim_valid   // the victim way holds a block
);
  always_comb begin
    logic [AGE_W-1:0] ref_age;
    ref_age = ages[touch_way*AGE_W +: AGE_W];
    for (int unsigned j = 0; j < WAYS; j++) begin
      if (AGE_W'(j) == touch_way)
        ages_touched[j*AGE_W +: AGE_W] = '0;
      else if (ages[j*AGE_W +: AGE_W] < ref_age)
        ages_touched[j*AGE_W +: AGE_W] = ages[j*AGE_W +: AGE_W] + 1'b1;
      else
        ages_touched[j*AGE_W +: AGE_W] = ages[j*AGE_W +: AGE_W];
    end
  end

  always_comb begin
    logic found;
    found      = 1'b0;
    victim_way = '0;
    for (int unsigned j = 0; j < WAYS; j++) begin
      if (!found && !valid[j]) begin
        found      = 1'b1;
        victim_way = AGE_W'(j);
      end
    end
    if (!found) begin
      for (int unsigned j = 0; j < WAYS; j++) begin
        if (ages[j*AGE_W +: AGE_W] == AGE_W'(WAYS - 1)) victim_way = AGE_W'(j);
      end
    end
    victim_valid = found ? 1'b0 : 1'b1;
  end

endmodule
