// seq_udiv: unsigned restoring divider, one quotient bit per cycle.
//
// Pulse start with num and den; W cycles later done pulses and quot holds
// num / den. Division by zero returns 0. Used by the attack detector, which
// needs two divisions per sample period and has thousands of cycles for them.
module seq_udiv #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quot
);
  localparam int unsigned CW = $clog2(W + 1);
  logic [W-1:0]  d, n;
  logic [W-1:0]  rem;
  logic [CW-1:0] cnt;
  logic [W:0]    trial;

  assign trial = {rem, n[W-1]} - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; quot <= '0;
      d <= '0; n <= '0; rem <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; d <= den; n <= num; rem <= '0; cnt <= CW'(W); quot <= '0;
      end else if (busy) begin
        if (!trial[W]) begin
          rem  <= trial[W-1:0];
          quot <= {quot[W-2:0], 1'b1};
        end else begin
          rem  <= {rem[W-2:0], n[W-1]};
          quot <= {quot[W-2:0], 1'b0};
        end
        n   <= n << 1;
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (d == '0) quot <= '0;
        end
      end
    end
  end
endmodule
