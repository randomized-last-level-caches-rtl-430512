// seq_isqrt: integer square root, one result bit per cycle.
//
// Pulse start with x (W bits, W even); W/2 cycles later done pulses and root
// holds floor(sqrt(x)). Bit-by-bit (non-restoring digit) method using only
// shifts, subtraction and comparison.
module seq_isqrt #(
  parameter int unsigned W = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  localparam int unsigned CW = $clog2(W / 2 + 1);
  logic [W-1:0]  xr;       // remaining radicand bits, consumed two at a time
  logic [W/2+1:0] rem;
  logic [CW-1:0] cnt;
  logic [W/2+3:0] cur, trial;

  assign cur   = {rem, xr[W-1:W-2]};
  assign trial = cur - {2'b00, root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; root <= '0; xr <= '0; rem <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; xr <= x; rem <= '0; root <= '0; cnt <= CW'(W / 2);
      end else if (busy) begin
        if (cur >= {2'b00, root, 2'b01}) begin
          rem  <= trial[W/2+1:0];
          root <= {root[W/2-2:0], 1'b1};
        end else begin
          rem  <= cur[W/2+1:0];
          root <= {root[W/2-2:0], 1'b0};
        end
        xr  <= xr << 2;
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
