// cid_peak -- step 2 of crystal identification: maximum value search with
// interpolation.
//
// Watches a baseline-corrected frame as it streams past and keeps the
// largest sample y0, its index, the sample before it (ym) and the sample
// after it (yp).  At the end of the frame the true peak of the parabola
// through (ym, y0, yp) is estimated as
//     amplitude = y0 + (yp - ym)^2 / (8 * (2*y0 - ym - yp))
// (floor of the quotient), using an iterative divider that needs QW clocks,
// well inside the 36-clock event interval.  Where the peak is the first or
// last sample, the missing neighbour is taken equal to y0; a flat top gives
// no correction.  Ties keep the first maximum.
//
// Interface: in_valid/in is the corrected stream (cid_pkg::sample_t).  The
// stream is passed on unchanged one clock later (out_valid/out).  res_valid
// pulses with peak_idx, peak_val and amplitude QW+3 clocks after the last
// sample of the frame.  A frame whose largest sample is not positive gives
// amplitude = peak_val clamped to zero.
//
// The paper names this step only.  The three-point parabolic interpolation is
// this design's choice, as the simplest interpolation of a maximum.
module cid_peak
  import cid_pkg::*;
#(
  parameter int unsigned QW = 18
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  sample_t          in,
  output logic             out_valid,
  output sample_t          out,
  output logic             res_valid,
  output logic [IDX_W-1:0] peak_idx,
  output sample_w_t        peak_val,
  output logic [AMP_W-1:0] amplitude
);
  // ---------------- running search ----------------
  sample_w_t        y0, ym, yp, prev;
  logic             yp_wait;
  logic [IDX_W-1:0] idx, idx0;
  logic             frame_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y0 <= '0; ym <= '0; yp <= '0; prev <= '0; yp_wait <= 1'b0;
      idx <= '0; idx0 <= '0; frame_end <= 1'b0;
      out_valid <= 1'b0; out <= '0;
    end else begin
      out_valid <= in_valid;
      out       <= in;
      frame_end <= in_valid && in.last;
      if (in_valid) begin
        prev <= in.data;
        idx  <= in.first ? IDX_W'(1) : idx + 1'b1;
        if (in.first) begin
          y0 <= in.data; ym <= in.data; yp <= in.data; idx0 <= '0; yp_wait <= 1'b1;
        end else if (in.data > y0) begin
          y0 <= in.data; ym <= prev; yp <= in.data; idx0 <= idx; yp_wait <= 1'b1;
        end else if (yp_wait) begin
          yp <= in.data; yp_wait <= 1'b0;
        end
      end
    end
  end

  // ---------------- interpolation ----------------
  // a = y0 - ym >= 0, b = y0 - yp >= 0: correction = (a - b)^2 / (8 (a + b))
  localparam int unsigned DDW = DW + 5;             // divisor width
  logic [DW:0]        a, b;
  logic signed [DW+1:0] d;
  logic [DDW-1:0]     den;
  logic [DDW+QW-1:0]  num;
  logic               div_busy, div_done;
  logic [QW-1:0]      quo;
  sample_w_t          y0_h;
  logic [IDX_W-1:0]   idx_h;
  logic               flat_h;

  assign a   = (DW+1)'(y0 - ym);
  assign b   = (DW+1)'(y0 - yp);
  assign d   = signed'({1'b0, a}) - signed'({1'b0, b});
  assign den = DDW'(a + b) << 3;
  assign num = (DDW+QW)'(d * d);

  cid_divider #(.DW(DDW), .QW(QW)) u_div (
    .clk, .rst_n, .start(frame_end), .num, .den,
    .busy(div_busy), .done(div_done), .quo
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y0_h <= '0; idx_h <= '0; flat_h <= 1'b0;
      res_valid <= 1'b0; peak_idx <= '0; peak_val <= '0; amplitude <= '0;
    end else begin
      res_valid <= div_done;
      if (frame_end) begin
        y0_h   <= y0;
        idx_h  <= idx0;
        flat_h <= (a == '0) && (b == '0);
      end
      if (div_done) begin
        peak_idx  <= idx_h;
        peak_val  <= y0_h;
        if (y0_h <= 0)      amplitude <= '0;
        else if (flat_h)    amplitude <= AMP_W'(y0_h);
        else                amplitude <= AMP_W'(y0_h) + AMP_W'(quo);
      end
    end
  end

  // one frame per divider run: the event interval leaves it idle at each frame end
  assert property (@(posedge clk) disable iff (!rst_n) frame_end |-> !div_busy)
    else $error("cid_peak: frames closer than the interpolation time");
endmodule
