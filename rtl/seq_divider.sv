// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// Divides an N-bit dividend by an M-bit divisor.  start loads the operands;
// N cycles later done pulses with quot = dividend / divisor (rounded down).
// A divisor of zero gives an all-ones quotient; callers avoid it.  The
// algorithm is this design's own choice for the centroid mean.
module seq_divider #(
  parameter int unsigned N = 48,
  parameter int unsigned M = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] dividend,
  input  logic [M-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] quot
);

  logic [M-1:0]           rem;
  logic [N-1:0]           q;
  logic [M-1:0]           dvs;
  logic [$clog2(N+1)-1:0] cnt;
  logic [M:0]             trial;

  assign trial = {rem[M-1:0], q[N-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      q    <= '0;
      dvs  <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= '0;
        q    <= dividend;
        dvs  <= divisor;
        cnt  <= ($clog2(N+1))'(N);
        busy <= 1'b1;
      end else if (busy) begin
        if (trial >= {1'b0, dvs}) begin
          rem <= M'(trial - {1'b0, dvs});
          q   <= {q[N-2:0], 1'b1};
        end else begin
          rem <= M'(trial);
          q   <= {q[N-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quot = q;

endmodule
