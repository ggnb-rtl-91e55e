// seq_divider -- unsigned restoring divider, one quotient bit per cycle.
//
// Helper of the PageRank engine, which needs 1/n and 1/out-degree once per
// window.  A `start` pulse latches dividend and divisor; `done` pulses W cycles
// later with quotient = dividend / divisor (truncated).  A zero divisor gives
// an all-ones quotient.  `busy` is high from the cycle after `start` until
// `done`.
// The method needs no divider of its own; this one is this design's choice
// for computing reciprocals once so that the PageRank iterations need none.
module seq_divider #(
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);

  logic [W-1:0]         dvd;     // remaining dividend bits, shifted out MSB first
  logic [W-1:0]         dvs;
  logic [W:0]           rem;
  logic [$clog2(W+1)-1:0] cnt;

  logic [W:0] rem_sh;
  logic [W:0] rem_sub;
  always_comb begin
    rem_sh  = {rem[W-1:0], dvd[W-1]};
    rem_sub = rem_sh - {1'b0, dvs};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      dvd      <= '0;
      dvs      <= '0;
      rem      <= '0;
      cnt      <= '0;
      quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        dvd      <= dividend;
        dvs      <= divisor;
        rem      <= '0;
        cnt      <= '0;
        quotient <= '0;
      end else if (busy) begin
        dvd <= dvd << 1;
        if (!rem_sub[W]) begin
          rem      <= rem_sub;
          quotient <= {quotient[W-2:0], 1'b1};
        end else begin
          rem      <= rem_sh;
          quotient <= {quotient[W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(W+1))'(W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
