// serial_divider -- unsigned restoring divider, one quotient bit per clock.
//
// Computes quotient = dividend / divisor and the remainder for unsigned
// operands. A `start` pulse loads the operands; DW clocks later `done`
// pulses for one clock with the results, which then stay stable until the
// next start. `busy` is high in between; a start while busy is ignored.
// A zero divisor returns an all-ones quotient. It stands in for the vendor
// divider core used by the normaliser; the restoring algorithm and the
// one-bit-per-clock latency are this design's choice.
module serial_divider #(
  parameter int unsigned DW = 29,   // dividend and quotient width
  parameter int unsigned VW = 15    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] dividend,
  input  logic [VW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [DW-1:0] quotient,
  output logic [VW-1:0] remainder
);

  localparam int unsigned CW = $clog2(DW + 1);

  logic [DW-1:0] q;
  logic [VW:0]   r;
  logic [VW-1:0] d;
  logic [CW-1:0] cnt;
  logic [VW:0]   r_shift;
  logic [VW+1:0] r_trial;

  always_comb begin
    r_shift = {r[VW-1:0], q[DW-1]};
    r_trial = {1'b0, r_shift} - {2'b0, d};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      q         <= '0;
      r         <= '0;
      d         <= '0;
      cnt       <= '0;
      quotient  <= '0;
      remainder <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        q    <= dividend;
        r    <= '0;
        d    <= divisor;
        cnt  <= CW'(DW);
      end else if (busy) begin
        if (r_trial[VW+1]) begin       // negative: restore
          r <= r_shift;
          q <= {q[DW-2:0], 1'b0};
        end else begin
          r <= r_trial[VW:0];
          q <= {q[DW-2:0], 1'b1};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          quotient  <= r_trial[VW+1] ? {q[DW-2:0], 1'b0} : {q[DW-2:0], 1'b1};
          remainder <= r_trial[VW+1] ? r_shift[VW-1:0] : r_trial[VW-1:0];
        end
      end
    end
  end

  // protocol: a result is only reported at the end of a busy period
  a_done_ends_busy: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> !busy && $past(busy));

endmodule
