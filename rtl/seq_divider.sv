// seq_divider: unsigned restoring divider, one quotient bit per cycle.
// Pulse `start` with dividend and divisor; `done` pulses W cycles later with
// quotient = dividend / divisor (truncated). A zero divisor gives all ones.
// `busy` is high from the cycle after start until done.
module seq_divider #(
  parameter int unsigned W = 26
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

  logic [W-1:0]          rem;
  logic [W-1:0]          dsr;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]            trial;

  assign trial = {rem, quotient[W-1]} - {1'b0, dsr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem      <= '0;
      dsr      <= '0;
      cnt      <= '0;
      quotient <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem      <= '0;
        dsr      <= divisor;
        quotient <= dividend;
        cnt      <= ($clog2(W+1))'(W);
        busy     <= 1'b1;
      end else if (busy) begin
        // shift the next dividend bit into the remainder and try to subtract
        if (!trial[W]) begin
          rem      <= trial[W-1:0];
          quotient <= {quotient[W-2:0], 1'b1};
        end else begin
          rem      <= {rem[W-2:0], quotient[W-1]};
          quotient <= {quotient[W-2:0], 1'b0};
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
