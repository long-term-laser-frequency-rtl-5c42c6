// acq_timebase -- acquisition timing of the oscilloscope that hosts the peak
// detectors.
//
// Every trigger starts an acquisition of N_SAMPLES samples, one every
// DECIMATION clocks. The block issues a sample strobe and the index of that
// sample within the acquisition; the peak detectors use the index as the
// time of a peak, so every time range is measured from the trigger. With the
// defaults (2^14 samples, decimation 32, 125 MHz clock) one acquisition lasts
// 4.194304 ms, the duration shown in the paper's control GUI.
//
// A trigger that arrives while an acquisition is still running ends it
// (`acq_end`) and starts a new one in the next clock, so the timing always
// follows the latest scan. Interface: `trig` one-clock pulse in;
// `acq_start` one clock after the trigger; `smp_stb` marks the clocks in
// which `smp_idx` names the current sample (the first strobe comes in the
// clock of `acq_start`); `acq_end` is a one-clock pulse after the last
// sample or at a retrigger. Decimation by plain sub-sampling and the
// retrigger rule are this design's choices.
module acq_timebase
  import stcl_pkg::*;
#(
  parameter int unsigned N_SAMPLES  = 16384,
  parameter int unsigned DECIMATION = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic trig,
  output logic acq_start,
  output logic acq_end,
  output logic acq_active,
  output logic smp_stb,
  output pos_t smp_idx
);

  localparam int unsigned DW = (DECIMATION > 1) ? $clog2(DECIMATION) : 1;
  logic [DW-1:0] dcnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acq_start  <= 1'b0;
      acq_end    <= 1'b0;
      acq_active <= 1'b0;
      smp_stb    <= 1'b0;
      smp_idx    <= '0;
      dcnt       <= '0;
    end else begin
      acq_start <= 1'b0;
      acq_end   <= 1'b0;
      smp_stb   <= 1'b0;
      if (trig) begin
        acq_end    <= acq_active;
        acq_start  <= 1'b1;
        acq_active <= 1'b1;
        smp_stb    <= 1'b1;
        smp_idx    <= '0;
        dcnt       <= '0;
      end else if (acq_active) begin
        if (dcnt == DW'(DECIMATION - 1)) begin
          dcnt <= '0;
          if (smp_idx == pos_t'(N_SAMPLES - 1)) begin
            acq_active <= 1'b0;
            acq_end    <= 1'b1;
          end else begin
            smp_idx <= smp_idx + 1'b1;
            smp_stb <= 1'b1;
          end
        end else begin
          dcnt <= dcnt + 1'b1;
        end
      end
    end
  end

  // protocol: samples only inside an acquisition, indices inside the record
  a_stb_in_acq: assert property (@(posedge clk) disable iff (!rst_n)
    smp_stb |-> acq_active && (int'(smp_idx) < N_SAMPLES));
  a_start_first: assert property (@(posedge clk) disable iff (!rst_n)
    acq_start |-> smp_stb && (smp_idx == '0));

endmodule
