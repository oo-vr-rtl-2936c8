// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// Pulse 'start' with dividend and divisor; 'done' pulses W cycles later with
// quotient and remainder held until the next start. A zero divisor returns an
// all-ones quotient (the caller avoids that case). Used by the rendering-time
// predictor to turn measured calibration times into per-unit rates; it runs
// once per calibration, so a small serial divider is enough.
module seq_divider #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient,
  output logic [W-1:0] remainder
);
  logic [W-1:0] d_r;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W+1:0] trial;

  assign trial = {1'b0, remainder, quotient[W-1]} - {2'b00, d_r};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      cnt       <= '0;
      d_r       <= '0;
      quotient  <= '0;
      remainder <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        cnt       <= ($clog2(W+1))'(W);
        d_r       <= divisor;
        quotient  <= dividend;
        remainder <= '0;
      end else if (busy) begin
        // shift remainder:quotient left, try to subtract the divisor
        if (!trial[W+1]) begin
          remainder <= trial[W-1:0];
          quotient  <= {quotient[W-2:0], 1'b1};
        end else begin
          remainder <= {remainder[W-2:0], quotient[W-1]};
          quotient  <= {quotient[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
