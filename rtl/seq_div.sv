// seq_div -- unsigned restoring divider, one quotient bit per clock.
//
// A `start` pulse loads `dividend` and `divisor`; W clocks later `done`
// pulses for one cycle with `quotient` = dividend / divisor (floor) and
// `remainder`. Outputs hold until the next start. A zero divisor gives an
// all-ones quotient. Used by the load calculator for the two divisions of
// the gap and frame-count equations. A plain textbook divider, chosen here
// for its small size; the calculation has no throughput requirement.
module seq_div #(
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

  localparam int unsigned CW = $clog2(W + 1);

  logic [W-1:0]  q_q, d_q;
  logic [W:0]    r_q;
  logic [CW-1:0] n_q;
  logic [W:0]    r_shift, r_sub;

  assign r_shift   = {r_q[W-1:0], q_q[W-1]};
  assign r_sub     = r_shift - {1'b0, d_q};
  assign quotient  = q_q;
  assign remainder = r_q[W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_q  <= '0;
      d_q  <= '0;
      r_q  <= '0;
      n_q  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q_q  <= dividend;
        d_q  <= divisor;
        r_q  <= '0;
        n_q  <= CW'(W);
        busy <= 1'b1;
      end else if (busy) begin
        if (r_sub[W]) begin           // negative: restore
          r_q <= r_shift;
          q_q <= {q_q[W-2:0], 1'b0};
        end else begin
          r_q <= r_sub;
          q_q <= {q_q[W-2:0], 1'b1};
        end
        n_q <= n_q - 1'b1;
        if (n_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
