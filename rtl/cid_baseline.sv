// cid_baseline -- step 1 of crystal identification: baseline estimation and
// correction.
//
// Each event is a frame of N_SAMPLES ADC words starting with pre-trigger
// samples.  The baseline is the mean of the first BL_N samples of the frame
// (a power of two, so the mean is a shift).  Because the baseline is only
// known after BL_N samples, the frame is written into one half of a two-bank
// (ping-pong) frame memory; when its last word is in, the frame is read back
// from that bank, one word per clock, with the baseline subtracted, while the
// next frame fills the other bank.  Frames may follow each other without gap,
// so the event interval is N_SAMPLES clocks.
//
// Interface: in_valid/in_first/in_sample is the raw ADC stream (in_first on
// the first word of a frame; a frame is exactly N_SAMPLES words).  out is the
// corrected signed stream (cid_pkg::sample_t) with out_valid; baseline and
// base_valid give the estimate, pulsed with the first corrected sample.
// Timing: the first corrected word leaves 4 clocks after the last raw word of
// its frame; the frame then streams out in N_SAMPLES clocks.
//
// The paper names this step only.  Pre-trigger averaging, BL_N = 8 and the
// ping-pong memory are this design's choices.
module cid_baseline
  import cid_pkg::*;
#(
  parameter int unsigned NS   = N_SAMPLES,
  parameter int unsigned NBL  = BL_N,
  localparam int unsigned IW  = $clog2(NS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic [ADC_W-1:0] in_sample,
  output logic             out_valid,
  output sample_t          out,
  output logic             base_valid,
  output logic [ADC_W-1:0] baseline
);
  localparam int unsigned SH = $clog2(NBL);

  logic [ADC_W-1:0] mem [2][NS];
  logic [ADC_W-1:0] ram_q;

  // ---------------- write side ----------------
  logic [IW-1:0]       widx;
  logic                wbank;
  logic [ADC_W+SH-1:0] acc;
  logic [ADC_W-1:0]    base_r [2];
  logic                frame_done;
  logic [IW-1:0]       idx_now;
  logic [ADC_W+SH-1:0] acc_now;

  assign idx_now = in_first ? '0 : widx;
  assign acc_now = (in_first ? '0 : acc) + ((idx_now < IW'(NBL)) ? (ADC_W+SH)'(in_sample) : '0);

  always_ff @(posedge clk) begin
    if (in_valid) mem[wbank][idx_now] <= in_sample;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx <= '0; wbank <= 1'b0; acc <= '0; frame_done <= 1'b0;
      base_r[0] <= '0; base_r[1] <= '0;
    end else begin
      frame_done <= 1'b0;
      if (in_valid) begin
        acc  <= acc_now;
        widx <= idx_now + 1'b1;
        if (idx_now == IW'(NS - 1)) begin
          base_r[wbank] <= ADC_W'(acc_now >> SH);
          wbank         <= ~wbank;
          widx          <= '0;
          frame_done    <= 1'b1;
        end
      end
    end
  end

  // ---------------- read side ----------------
  logic          rd_active, rd_bank;
  logic [IW-1:0] rd_idx;
  logic [1:0]    pending;
  logic          rd_last, rd_start;
  logic          s1_v, s1_first, s1_last, s1_bank;

  assign rd_last  = rd_active && rd_idx == IW'(NS - 1);
  assign rd_start = (pending != 0 || frame_done) && (!rd_active || rd_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_active <= 1'b0; rd_bank <= 1'b0; rd_idx <= '0; pending <= '0;
    end else begin
      pending <= pending + 2'(frame_done) - 2'(rd_start);
      if (rd_start) begin
        rd_active <= 1'b1;
        rd_idx    <= '0;
        if (rd_active) rd_bank <= ~rd_bank;
      end else if (rd_active) begin
        if (rd_last) begin
          rd_active <= 1'b0;
          rd_bank   <= ~rd_bank;
        end
        rd_idx <= rd_idx + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) ram_q <= mem[rd_bank][rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_bank <= 1'b0;
      out_valid <= 1'b0; out <= '0; base_valid <= 1'b0; baseline <= '0;
    end else begin
      s1_v     <= rd_active;
      s1_first <= rd_active && rd_idx == '0;
      s1_last  <= rd_last;
      s1_bank  <= rd_bank;
      out_valid  <= s1_v;
      out.first  <= s1_first;
      out.last   <= s1_last;
      out.data   <= DW'(signed'({1'b0, ram_q}) - signed'({1'b0, base_r[s1_bank]}));
      base_valid <= s1_v && s1_first;
      baseline   <= base_r[s1_bank];
    end
  end

  initial assert (NBL == (1 << SH) && NBL <= NS) else $error("cid_baseline: BL_N must be a power of two");
  // at most one frame may wait while another is read out
  assert property (@(posedge clk) disable iff (!rst_n) pending <= 2'd1);
  // a frame starts on in_first
  assert property (@(posedge clk) disable iff (!rst_n) (in_valid && widx == '0) |-> in_first)
    else $error("cid_baseline: frame did not start with in_first");
endmodule
