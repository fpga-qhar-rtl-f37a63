// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// A 'start' pulse loads dividend and divisor; N cycles later 'done' is high
// for one cycle with quotient = floor(dividend / divisor). A zero divisor
// gives an all-ones quotient (callers here never divide by zero). Used by
// the Lucas-Kanade unit to solve its 2x2 system; a sequential divider keeps
// that unit small, since it is busy for tens of cycles per pixel anyway.
module seq_divider #(
  parameter int unsigned N = 48,   // dividend and quotient width
  parameter int unsigned D = 40    // divisor width
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] dividend,
  input  logic [D-1:0] divisor,
  output logic [N-1:0] quotient,
  output logic         done
);
  logic [D-1:0]          rem;
  logic [N-1:0]          q;
  logic [D-1:0]          dvs;
  logic [$clog2(N+1)-1:0] cnt;
  logic                  run;
  logic [D:0]            trial;

  assign trial = {rem, q[N-1]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rem <= '0; q <= '0; dvs <= '0; cnt <= '0; run <= 1'b0; done <= 1'b0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem <= '0; q <= dividend; dvs <= divisor; cnt <= '0; run <= 1'b1;
      end else if (run) begin
        if (trial >= {1'b0, dvs}) begin
          rem <= D'(trial - {1'b0, dvs});
          q   <= {q[N-2:0], 1'b1};
        end else begin
          rem <= trial[D-1:0];
          q   <= {q[N-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(N+1))'(N-1)) begin
          run      <= 1'b0;
          done     <= 1'b1;
          quotient <= {q[N-2:0], (trial >= {1'b0, dvs})};
        end
      end
    end
  end
endmodule
