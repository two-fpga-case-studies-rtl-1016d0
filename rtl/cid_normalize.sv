// cid_normalize -- step 3 of crystal identification: normalisation.
//
// Scales every sample of a frame by the reciprocal of the frame's
// interpolated amplitude, so that the pulse peak becomes 1.0 (2**NORM_FRAC)
// whatever the deposited energy.  The amplitude is only known some clocks
// after the frame has gone past, so frames are written into a frame memory
// of NB banks (a ring of whole frames).  For each amplitude that arrives, an
// iterative divider forms recip = floor(2**(NORM_FRAC+RS) / amplitude) in QW
// clocks; the oldest stored frame is then read back one sample per clock and
// each sample is multiplied by recip and shifted right by RS:
//     out = sat( (x * recip) >>> RS )   ~   x * 2**NORM_FRAC / amplitude.
// A division per frame and a multiply per sample keep the event interval at
// 36 clocks.  An amplitude of zero is treated as one.
//
// Interface: in_valid/in is the corrected stream, amp_valid/amplitude the
// frame's amplitude, in frame order, arriving after the frame's last sample
// and before the third following frame is complete.  out_valid/out is the
// normalised stream.  Timing: the first normalised sample leaves QW+5 clocks
// after amp_valid when the read-out is free.
//
// The paper names this step only.  Reciprocal-and-multiply, the frame ring
// and all widths are this design's choices.
module cid_normalize
  import cid_pkg::*;
#(
  parameter int unsigned NB = 4,      // frames the memory can hold
  parameter int unsigned RS = 16,     // extra reciprocal bits
  parameter int unsigned QW = NORM_FRAC + RS + 1,
  localparam int unsigned BW = $clog2(NB)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  sample_t          in,
  input  logic             amp_valid,
  input  logic [AMP_W-1:0] amplitude,
  output logic             out_valid,
  output sample_t          out
);
  sample_w_t mem [NB][N_SAMPLES];
  sample_w_t ram_q;

  // ---------------- frame write ----------------
  logic [BW-1:0]    wb;
  logic [IDX_W-1:0] widx, idx_now;
  logic [BW:0]      stored;      // frames written and not yet read out
  logic             wr_done, rd_done;

  assign idx_now = in.first ? '0 : widx;
  assign wr_done = in_valid && idx_now == IDX_W'(N_SAMPLES - 1);

  always_ff @(posedge clk) if (in_valid) mem[wb][idx_now] <= in.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= '0; widx <= '0; stored <= '0;
    end else begin
      if (in_valid) widx <= wr_done ? '0 : idx_now + 1'b1;
      if (wr_done) wb <= BW'((32'(wb) + 1) % NB);
      stored <= stored + (BW+1)'(wr_done) - (BW+1)'(rd_done);
    end
  end

  // ---------------- reciprocal ----------------
  localparam int unsigned NUMW = AMP_W + QW;
  logic            div_busy, div_done;
  logic [QW-1:0]   quo;
  logic [AMP_W-1:0] den;

  assign den = (amplitude == '0) ? AMP_W'(1) : amplitude;

  cid_divider #(.DW(AMP_W), .QW(QW)) u_div (
    .clk, .rst_n, .start(amp_valid),
    .num(NUMW'(1) << (NORM_FRAC + RS)), .den,
    .busy(div_busy), .done(div_done), .quo
  );

  // reciprocals waiting for their frame to be read out
  logic [QW-1:0] rq [NB];
  logic [BW-1:0] rq_wp, rq_rp;
  logic [BW:0]   rq_n;

  // ---------------- read-out ----------------
  logic             rd_active, rd_last, rd_start;
  logic [BW-1:0]    rb;
  logic [IDX_W-1:0] ridx;
  logic [QW-1:0]    rd_recip;
  logic             s1_v, s1_first, s1_last;
  logic [QW-1:0]    s1_recip;

  assign rd_last  = rd_active && ridx == IDX_W'(N_SAMPLES - 1);
  assign rd_start = (rq_n != '0) && (!rd_active || rd_last);
  assign rd_done  = rd_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_wp <= '0; rq_rp <= '0; rq_n <= '0;
      rd_active <= 1'b0; rb <= '0; ridx <= '0; rd_recip <= '0;
      for (int i = 0; i < NB; i++) rq[i] <= '0;
    end else begin
      if (div_done) begin
        rq[rq_wp] <= quo;
        rq_wp     <= BW'((32'(rq_wp) + 1) % NB);
      end
      rq_n <= rq_n + (BW+1)'(div_done) - (BW+1)'(rd_start);
      if (rd_last) rb <= BW'((32'(rb) + 1) % NB);
      if (rd_start) begin
        rd_active <= 1'b1;
        ridx      <= '0;
        rd_recip  <= rq[rq_rp];
        rq_rp     <= BW'((32'(rq_rp) + 1) % NB);
      end else if (rd_active) begin
        if (rd_last) rd_active <= 1'b0;
        ridx <= ridx + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) ram_q <= mem[rb][ridx];

  // ---------------- scale ----------------
  localparam int unsigned PW = DW + QW + 1;
  logic signed [PW-1:0] prod, shifted;
  localparam logic signed [PW-1:0] MAXV = PW'((1 << (DW - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -MAXV - 1;

  always_comb begin
    prod    = PW'(ram_q) * signed'({1'b0, s1_recip});
    shifted = prod >>> RS;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_recip <= '0;
      out_valid <= 1'b0; out <= '0;
    end else begin
      s1_v      <= rd_active;
      s1_first  <= rd_active && ridx == '0;
      s1_last   <= rd_last;
      s1_recip  <= rd_recip;
      out_valid <= s1_v;
      out.first <= s1_first;
      out.last  <= s1_last;
      if (shifted > MAXV)      out.data <= MAXV[DW-1:0];
      else if (shifted < MINV) out.data <= MINV[DW-1:0];
      else                     out.data <= shifted[DW-1:0];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) stored <= (BW+1)'(NB))
    else $error("cid_normalize: frame memory overrun");
  assert property (@(posedge clk) disable iff (!rst_n) amp_valid |-> !div_busy)
    else $error("cid_normalize: amplitudes closer than the division time");
endmodule
