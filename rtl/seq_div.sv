// seq_div: unsigned restoring divider, one quotient bit per clock.
// Pulse `start` with the operands; `done` pulses N cycles later with
// quotient = floor(dividend / divisor). A zero divisor is treated as one
// (the callers clamp their divisors, this is only a guard). The Accelerator
// Progress Monitor runs once per epoch of 200K cycles, so a bit-serial
// divider is fast enough and keeps the arithmetic small.
module seq_div #(
  parameter int unsigned N = 64   // dividend / quotient width
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] dividend,
  input  logic [N-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] quotient
);
  logic [N-1:0]         q, d;
  logic [N:0]           r;
  logic [$clog2(N+1):0] cnt;
  logic [N:0]           r_sh, r_sub;

  assign r_sh  = {r[N-1:0], q[N-1]};
  assign r_sub = r_sh - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0;
      q <= '0; d <= '0; r <= '0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        q    <= dividend;
        d    <= (divisor == '0) ? N'(1) : divisor;
        r    <= '0;
        cnt  <= ($clog2(N+1)+1)'(N);
      end else if (busy) begin
        if (!r_sub[N]) begin
          r <= r_sub;
          q <= {q[N-2:0], 1'b1};
        end else begin
          r <= r_sh;
          q <= {q[N-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          quotient <= r_sub[N] ? {q[N-2:0], 1'b0} : {q[N-2:0], 1'b1};
        end
      end
    end
  end
endmodule
