// discharge_veto: identifies discharge pulse trains and vetoes triggers.
//
// A discharge shows up on the majority-sum signal as a long train of small
// pulses. Each pulse alone may pass the trigger conditions, so without a veto
// one discharge produces many triggers. This module accumulates the
// time-over-threshold of the input independently of the trigger state
// machine: every above-threshold sample adds one, and the sum is cleared once
// the input has stayed at or below threshold for dis_gap consecutive cycles
// (the train has ended). When the sum reaches dis_tot the input is declared a
// discharge: `discharge` pulses for one cycle and `veto` is held for dis_veto
// cycles. While the train continues the veto is re-armed on every further
// above-threshold sample, so it ends dis_veto cycles after the last pulse of
// the train. The trigger state machine refuses to trigger while veto is high.
//
// Interface: `above` is the trigger machine's combinational above-threshold
// flag of the current sample; all outputs are registered (one cycle later).
//
// From the published description: a separate veto module, identification by
// a long accumulated time-over-threshold, a long veto during which no trigger
// is generated. This design's own choices: the quiet gap that ends a train,
// the re-arming, and the default lengths in trig_pkg::CFG_DEFAULT. The
// published text also calls discharges "very low amplitude"; amplitude is not
// used here because the ToT criterion alone is what the text names as the
// identifying feature.
module discharge_veto
  import trig_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      above,
  input  trig_cfg_t cfg,
  output logic      veto,
  output logic      discharge
);

  time_t acc_q;     // accumulated ToT of the current train
  time_t gap_q;     // consecutive quiet cycles
  time_t veto_q;    // veto cycles still to go
  logic  ident;

  // Identification: the sum reaches dis_tot with this sample.
  assign ident = above && (acc_q + time_t'(1) >= cfg.dis_tot);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q     <= '0;
      gap_q     <= '0;
      veto_q    <= '0;
      discharge <= 1'b0;
    end else begin
      discharge <= ident && (veto_q == '0);
      if (above) begin
        gap_q <= '0;
        if (!(&acc_q)) acc_q <= acc_q + time_t'(1);
      end else if (gap_q >= cfg.dis_gap - time_t'(1)) begin
        acc_q <= '0;
      end else begin
        gap_q <= gap_q + time_t'(1);
      end

      if (ident)               veto_q <= cfg.dis_veto;
      else if (veto_q != '0)   veto_q <= veto_q - time_t'(1);
    end
  end

  assign veto = (veto_q != '0);

endmodule
