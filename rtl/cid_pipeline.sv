// cid_pipeline -- crystal identification front part: steps 1 to 4 chained.
//
// Raw 36-word ADC events stream in one word per clock.  They pass through
// baseline estimation and correction (cid_baseline), maximum search with
// parabolic interpolation (cid_peak), normalisation by the interpolated
// amplitude (cid_normalize) and half-height phase identification
// (cid_phase).  Each stage works on a whole event while the next event
// streams in behind it, so events may follow each other without gap: the
// event interval is 36 clocks, one clock per word.  The stages deliver their
// per-event numbers at different times; small FIFOs line them up so that one
// result record (cid_pkg::cid_result_t) leaves per event, in order.
//
// The normalised event stream is also brought out (norm_valid/norm): it is
// the input of the Wiener-filter stages of the full crystal identification
// module, which are not part of this design.
//
// Interface: in_valid/in_first/in_sample (in_first marks word 0 of an
// event); res_valid/res one clock pulse per event; norm_valid/norm.
// Timing: res_valid follows the last raw word of an event by a fixed
// latency of 141 clocks: the corrected event leaves the baseline stage 4 to
// 39 clocks after its last raw word, the amplitude follows 21 clocks after
// the last corrected word, the normalised event starts 36 clocks after the
// amplitude and takes 36 clocks, the phase follows 9 clocks after its last
// word, and the record is registered once more.
module cid_pipeline
  import cid_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic [ADC_W-1:0] in_sample,
  output logic             res_valid,
  output cid_result_t      res,
  output logic             norm_valid,
  output sample_t          norm
);
  logic             bl_valid, bl_base_valid;
  sample_t          bl_out;
  logic [ADC_W-1:0] bl_base;

  logic             pk_valid, pk_res_valid;
  sample_t          pk_out;
  logic [IDX_W-1:0] pk_idx;
  sample_w_t        pk_val;
  logic [AMP_W-1:0] pk_amp;

  logic             ph_valid, ph_crossed;
  logic [IDX_W+PH_FRAC-1:0] ph_t;

  cid_baseline u_baseline (
    .clk, .rst_n, .in_valid, .in_first, .in_sample,
    .out_valid(bl_valid), .out(bl_out), .base_valid(bl_base_valid), .baseline(bl_base)
  );

  cid_peak u_peak (
    .clk, .rst_n, .in_valid(bl_valid), .in(bl_out),
    .out_valid(pk_valid), .out(pk_out),
    .res_valid(pk_res_valid), .peak_idx(pk_idx), .peak_val(pk_val), .amplitude(pk_amp)
  );

  cid_normalize u_normalize (
    .clk, .rst_n, .in_valid(pk_valid), .in(pk_out),
    .amp_valid(pk_res_valid), .amplitude(pk_amp),
    .out_valid(norm_valid), .out(norm)
  );

  cid_phase u_phase (
    .clk, .rst_n, .in_valid(norm_valid), .in(norm),
    .res_valid(ph_valid), .crossed(ph_crossed), .t_half(ph_t)
  );

  // ---------------- result alignment ----------------
  localparam int unsigned PKW = IDX_W + AMP_W;
  logic [ADC_W-1:0] base_q;
  logic [PKW-1:0]   pk_q;
  logic             base_empty, pk_empty;

  sync_fifo #(.W(ADC_W), .DEPTH(4)) u_base_fifo (
    .clk, .rst_n, .push(bl_base_valid), .din(bl_base), .pop(ph_valid),
    .dout(base_q), .empty(base_empty), .full(), .count()
  );

  sync_fifo #(.W(PKW), .DEPTH(4)) u_peak_fifo (
    .clk, .rst_n, .push(pk_res_valid), .din({pk_idx, pk_amp}), .pop(ph_valid),
    .dout(pk_q), .empty(pk_empty), .full(), .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res       <= '0;
    end else begin
      res_valid <= ph_valid;
      if (ph_valid) begin
        res.baseline  <= base_q;
        res.peak_idx  <= pk_q[PKW-1 -: IDX_W];
        res.amplitude <= pk_q[AMP_W-1:0];
        res.crossed   <= ph_crossed;
        res.t_half    <= ph_t;
      end
    end
  end

  // every phase result has its baseline and peak waiting
  assert property (@(posedge clk) disable iff (!rst_n) ph_valid |-> (!base_empty && !pk_empty))
    else $error("cid_pipeline: result streams out of step");
endmodule
