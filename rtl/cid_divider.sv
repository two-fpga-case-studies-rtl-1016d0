// cid_divider -- iterative unsigned restoring divider, one quotient bit per clock.
//
// Computes quo = floor(num / den) for a quotient known to fit in QW bits,
// i.e. num < den * 2**QW.  The upper DW bits of the numerator form the
// starting partial remainder; each clock brings down one more numerator bit,
// subtracts the divisor when it fits and shifts one quotient bit in.
// Interface: pulse start with num/den; busy is high while working; done
// pulses with quo valid exactly QW clocks after start.  A zero divisor gives
// an all-ones quotient.  Used by the interpolation and normalisation stages,
// which need one division per event.  Not described in the paper: it is the
// simplest divider that fits the 36-clock event interval.
module cid_divider #(
  parameter int unsigned DW = 18,          // divisor width
  parameter int unsigned QW = 16,          // quotient width = clocks per division
  localparam int unsigned NW = DW + QW     // numerator width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [QW-1:0] quo
);
  logic [DW-1:0]        rem;
  logic [QW-1:0]        low;     // numerator bits still to bring down
  logic [DW-1:0]        den_q;
  logic [$clog2(QW+1)-1:0] cnt;
  logic [DW:0]          trial;

  assign trial = {rem, low[QW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; low <= '0; den_q <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem   <= num[NW-1:QW];
        low   <= num[QW-1:0];
        den_q <= den;
        cnt   <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (trial >= {1'b0, den_q}) begin
          rem <= DW'(trial - {1'b0, den_q});
          quo <= {quo[QW-2:0], 1'b1};
        end else begin
          rem <= trial[DW-1:0];
          quo <= {quo[QW-2:0], 1'b0};
        end
        low <= low << 1;
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(QW+1))'(QW - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // the quotient must fit: upper numerator part below the divisor
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && den != '0) |-> (num[NW-1:QW] < den))
    else $error("cid_divider: quotient overflows QW bits");
endmodule
