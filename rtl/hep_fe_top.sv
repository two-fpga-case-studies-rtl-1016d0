// hep_fe_top -- the two real-time front-end processing modules side by side.
//
// Two independent data paths share the clock and reset:
//   * crystal identification (cid_pipeline): 36-word ADC events in, one
//     result record per event out (baseline, peak index, interpolated
//     amplitude, half-height crossing time/phase), plus the normalised event
//     stream for the Wiener-filter stages that follow it in a full system;
//   * front-end event sorter (ts_sorter): time-stamped events in, the same
//     events out in chronological order, the oldest released whenever the
//     DEPTH-entry sorting memory is full (or on flush).
// The two paths do not exchange data; each keeps its own handshake and
// timing as documented in its module.  SORT_DEPTH defaults to the 100-event
// memory; the crystal identification event length is fixed at 36 words.
module hep_fe_top
  import cid_pkg::*;
#(
  parameter int unsigned SORT_DEPTH = 100,
  parameter int unsigned TS_W       = 32,
  parameter int unsigned EV_DATA_W  = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // crystal identification
  input  logic                  adc_valid,
  input  logic                  adc_first,
  input  logic [ADC_W-1:0]      adc_sample,
  output logic                  cid_res_valid,
  output cid_result_t           cid_res,
  output logic                  norm_valid,
  output sample_t               norm,
  // event sorter
  input  logic                  ev_valid,
  output logic                  ev_ready,
  input  logic [TS_W-1:0]       ev_ts,
  input  logic [EV_DATA_W-1:0]  ev_data,
  input  logic                  sort_flush,
  output logic                  sorted_valid,
  output logic [TS_W-1:0]       sorted_ts,
  output logic [EV_DATA_W-1:0]  sorted_data,
  output logic [$clog2(SORT_DEPTH+1)-1:0] sort_count
);

  cid_pipeline u_cid (
    .clk, .rst_n,
    .in_valid(adc_valid), .in_first(adc_first), .in_sample(adc_sample),
    .res_valid(cid_res_valid), .res(cid_res),
    .norm_valid, .norm
  );

  ts_sorter #(.DEPTH(SORT_DEPTH), .TS_W(TS_W), .DATA_W(EV_DATA_W)) u_sorter (
    .clk, .rst_n,
    .in_valid(ev_valid), .in_ready(ev_ready), .in_ts(ev_ts), .in_data(ev_data),
    .flush(sort_flush),
    .out_valid(sorted_valid), .out_ts(sorted_ts), .out_data(sorted_data),
    .count(sort_count)
  );

endmodule
