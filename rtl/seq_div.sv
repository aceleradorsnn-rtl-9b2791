// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// start loads num/den; NW clocks later done pulses with quo = num / den and
// rem = num % den. A zero divisor gives an all-ones quotient. Used by the
// AWB state machine, where gains are needed once per frame and a serial
// divider is the smallest choice (this design's choice; the paper does not
// say how the gains are computed).
module seq_div #(
  parameter int NW = 40,
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo,
  output logic [DW-1:0] rem
);
  logic [DW:0]   r;
  logic [NW-1:0] q;
  logic [DW-1:0] d;
  logic [$clog2(NW+1)-1:0] n;
  logic [DW:0]   trial;

  assign trial = {r[DW-1:0], q[NW-1]} - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; r <= '0; q <= '0; d <= '0; n <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; r <= '0; q <= num; d <= den; n <= '0;
      end else if (busy) begin
        if (!trial[DW]) begin
          r <= trial;
          q <= {q[NW-2:0], 1'b1};
        end else begin
          r <= {r[DW-1:0], q[NW-1]};
          q <= {q[NW-2:0], 1'b0};
        end
        n <= n + 1'b1;
        if (n == ($clog2(NW+1))'(NW - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
  assign quo = q;
  assign rem = r[DW-1:0];
endmodule
