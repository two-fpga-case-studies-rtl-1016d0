// cid_phase -- step 4 of crystal identification: phase identification
// through interpolation.
//
// Finds where the normalised pulse of a frame first rises through half of
// its amplitude (0.5 = 2**(NORM_FRAC-1)) and locates that point between the
// two samples around it by linear interpolation:
//     t_half = (i - 1) + (0.5 - y[i-1]) / (y[i] - y[i-1])
// where i is the first sample with y[i] >= 0.5.  t_half is given in samples
// with PH_FRAC fractional bits; its fractional part is the phase of the
// pulse with respect to the sampling clock.  Because the frame is already
// normalised, this is a constant-fraction time pick and does not depend on
// the pulse height.  The division is done by an iterative divider in PH_FRAC
// clocks.  A sample exactly at half gives t_half = i without a division.
// If the first sample is already above half, t_half = 0; a frame
// that never reaches half gives crossed = 0.
//
// Interface: in_valid/in is the normalised stream.  res_valid pulses with
// crossed and t_half PH_FRAC+3 clocks after the last sample of the frame.
//
// The paper names this step and says it uses interpolation.  The half-height
// crossing as the phase reference and the linear interpolation are this
// design's choices.
module cid_phase
  import cid_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  sample_t                  in,
  output logic                     res_valid,
  output logic                     crossed,
  output logic [IDX_W+PH_FRAC-1:0] t_half
);
  localparam sample_w_t HALF = sample_w_t'(1) <<< (NORM_FRAC - 1);
  localparam int unsigned QW = PH_FRAC;
  localparam int unsigned DDW = DW + 1;

  sample_w_t        prev, y0, y1;
  logic             found;
  logic [IDX_W-1:0] idx, cidx;
  logic             frame_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev <= '0; y0 <= '0; y1 <= '0; found <= 1'b0; idx <= '0; cidx <= '0;
      frame_end <= 1'b0;
    end else begin
      frame_end <= in_valid && in.last;
      if (in_valid) begin
        prev <= in.data;
        idx  <= in.first ? IDX_W'(1) : idx + 1'b1;
        if (in.first) begin
          found <= (in.data >= HALF);
          y0 <= in.data; y1 <= in.data; cidx <= '0;
        end else if (!found && in.data >= HALF) begin
          found <= 1'b1;
          y0 <= prev; y1 <= in.data; cidx <= idx;
        end
      end
    end
  end

  logic [DDW-1:0]    den;
  logic [DDW+QW-1:0] num;
  logic              div_busy, div_done;
  logic [QW-1:0]     quo;
  logic              found_h, at0_h, exact_h;
  logic [IDX_W-1:0]  cidx_h;

  assign den = DDW'(y1 - y0);
  assign num = (DDW+QW)'(DDW'(HALF - y0)) << QW;

  cid_divider #(.DW(DDW), .QW(QW)) u_div (
    .clk, .rst_n, .start(frame_end && found && cidx != '0 && y1 != HALF), .num, .den,
    .busy(div_busy), .done(div_done), .quo
  );

  // results wait for the divider only when there is something to divide
  logic [QW:0] wait_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      found_h <= 1'b0; at0_h <= 1'b0; exact_h <= 1'b0; cidx_h <= '0; wait_cnt <= '0;
      res_valid <= 1'b0; crossed <= 1'b0; t_half <= '0;
    end else begin
      res_valid <= 1'b0;
      if (frame_end) begin
        found_h  <= found;
        at0_h    <= (cidx == '0);
        exact_h  <= (y1 == HALF);
        cidx_h   <= cidx;
        wait_cnt <= (QW+1)'(QW + 1);
      end else if (wait_cnt != '0) begin
        wait_cnt <= wait_cnt - 1'b1;
        if (wait_cnt == (QW+1)'(1)) begin
          res_valid <= 1'b1;
          crossed   <= found_h;
          if (!found_h || at0_h) t_half <= '0;
          else if (exact_h) t_half <= {cidx_h, QW'(0)};
          else t_half <= {cidx_h - 1'b1, quo};
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) frame_end |-> (wait_cnt == '0 && !div_busy))
    else $error("cid_phase: frames closer than the interpolation time");
endmodule
