// ts_sorter -- front-end event timestamp sorter.
//
// Keeps up to DEPTH events (timestamp + payload) in a single memory, always
// in chronological order, and lets events out oldest first once the memory is
// full.  The memory is used as an iterative shift register: for every new
// event the whole memory is swept once, one address per clock.  A "carry"
// register starts out holding the new event; at each address the smaller of
// the carry and the stored entry is written back and the larger one moves on
// in the carry.  Entries older than the new event are therefore rewritten in
// place, the new event drops into its slot, and every younger entry moves up
// by one.  This takes exactly DEPTH clocks per event, so the event interval
// equals the memory depth (100 clocks for the default depth of 100).
//
// The memory is circular.  While fewer than DEPTH events are held, the sweep
// starts at the head (oldest) slot and the list grows by one.  When the memory
// is full, the head entry is the one released: the sweep then starts one slot
// after the head, the freed head slot becomes the new tail, and the head
// pointer advances by one.  No data is copied to make room.  Slots beyond the
// current fill count are treated as "later than anything", so the memory
// needs no reset.
//
// Interface
//   in_valid/in_ready : new event handshake; in_ready is high for one clock
//                       every DEPTH clocks while busy, and whenever idle.
//   flush             : with no event offered, releases the oldest held
//                       event (one per sweep) so the memory can be drained.
//   out_valid         : one-clock pulse with the released (oldest) event.
//                       There is no back-pressure on the output.
//   count             : number of events held.
// Timing: a sweep accepted in cycle t releases its event in cycle t+DEPTH+2;
// sweeps follow each other every DEPTH clocks with no gap.
//
// Following the paper: one memory block, insertion one event at a time at the
// chronologically correct place, circular memory, interval = depth, depth 100.
// Own choices: the release-when-full policy, the flush input, the widths, the
// two-stage read/compare-write pipeline, and equal timestamps leaving in
// arrival order.
module ts_sorter #(
  parameter int unsigned DEPTH  = 100,
  parameter int unsigned TS_W   = 32,
  parameter int unsigned DATA_W = 16,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [TS_W-1:0]   in_ts,
  input  logic [DATA_W-1:0] in_data,
  input  logic              flush,
  output logic              out_valid,
  output logic [TS_W-1:0]   out_ts,
  output logic [DATA_W-1:0] out_data,
  output logic [CW-1:0]     count
);

  typedef struct packed {
    logic [TS_W-1:0]   ts;
    logic [DATA_W-1:0] data;
  } entry_t;

  // Sorting memory: one read and one write port, read result one clock later.
  entry_t mem [DEPTH];
  entry_t ram_q;

  logic [AW-1:0] head;          // physical slot of the oldest event

  // Sweep control (stage 0: address issue)
  logic          active;
  logic [AW-1:0] k;             // position within the sweep
  logic [AW-1:0] rd_addr;
  logic          emit;          // this sweep releases the head entry
  logic [CW-1:0] nvalid;        // positions k < nvalid hold real entries
  entry_t        new_ev;
  logic          new_ev_valid;  // false for a flush sweep

  // Stage 1: compare and write back
  logic          s1_v, s1_first, s1_last, s1_emit, s1_kvalid;
  logic [AW-1:0] s1_addr;
  entry_t        carry;
  logic          carry_valid;
  logic          carry_shift;   // carry holds a displaced entry, not the new one

  logic last_k, can_start, start, start_flush;

  function automatic logic [AW-1:0] inc_wrap(input logic [AW-1:0] a);
    return (a == AW'(DEPTH - 1)) ? '0 : a + 1'b1;
  endfunction

  assign last_k      = (k == AW'(DEPTH - 1));
  assign can_start   = !active || last_k;
  assign in_ready    = can_start;
  assign start_flush = can_start && !in_valid && flush && (count != '0);
  assign start       = (can_start && in_valid) || start_flush;

  // ---------------- stage 0 ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      k            <= '0;
      rd_addr      <= '0;
      head         <= '0;
      count        <= '0;
      emit         <= 1'b0;
      nvalid       <= '0;
      new_ev       <= '0;
      new_ev_valid <= 1'b0;
    end else if (start) begin
      active       <= 1'b1;
      k            <= '0;
      new_ev       <= '{ts: in_ts, data: in_data};
      new_ev_valid <= !start_flush;
      if (start_flush || count == CW'(DEPTH)) begin
        // release the head: sweep the slots after it, ending on the freed one
        emit    <= 1'b1;
        nvalid  <= count - 1'b1;
        rd_addr <= inc_wrap(head);
        head    <= inc_wrap(head);
        if (start_flush) count <= count - 1'b1;
      end else begin
        emit    <= 1'b0;
        nvalid  <= count;
        rd_addr <= head;
        count   <= count + 1'b1;
      end
    end else if (active) begin
      if (last_k) active <= 1'b0;
      k       <= k + 1'b1;
      rd_addr <= inc_wrap(rd_addr);
    end
  end

  // memory read port
  always_ff @(posedge clk) ram_q <= mem[rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_emit <= 1'b0;
      s1_kvalid <= 1'b0; s1_addr <= '0;
    end else begin
      s1_v      <= active;
      s1_first  <= active && (k == '0);
      s1_last   <= active && last_k;
      s1_emit   <= emit;
      s1_kvalid <= (CW'(k) < nvalid);
      s1_addr   <= rd_addr;
    end
  end

  // ---------------- stage 1 ----------------
  entry_t h;
  logic   h_valid, take_carry;

  always_comb begin
    h       = s1_first ? new_ev       : carry;
    h_valid = s1_first ? new_ev_valid : carry_valid;
    // Before the insertion point the new event is compared (strictly, so an
    // equal stored entry stays ahead of it); after it, a displaced entry is
    // never later than the next stored one and simply shifts up.
    take_carry = h_valid && (!s1_kvalid || (!s1_first && carry_shift) ||
                             (h.ts < ram_q.ts));
  end

  always_ff @(posedge clk) begin
    if (s1_v) mem[s1_addr] <= take_carry ? h : ram_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry       <= '0;
      carry_valid <= 1'b0;
      carry_shift <= 1'b0;
      out_valid   <= 1'b0;
      out_ts      <= '0;
      out_data    <= '0;
    end else begin
      out_valid <= 1'b0;
      if (s1_v) begin
        if (take_carry) begin
          carry       <= ram_q;
          carry_valid <= s1_kvalid;
          carry_shift <= 1'b1;
        end else begin
          carry       <= h;
          carry_valid <= h_valid;
          carry_shift <= !s1_first && carry_shift;
        end
        if (s1_last && s1_emit) begin
          // the last read of a releasing sweep is the old head slot
          out_valid <= 1'b1;
          out_ts    <= ram_q.ts;
          out_data  <= ram_q.data;
        end
      end
    end
  end

  // ---------------- rules ----------------
  initial assert (DEPTH >= 3) else $error("ts_sorter: DEPTH must be at least 3");

  // a sweep that does not release ends with an empty carry: nothing is lost
  assert property (@(posedge clk) disable iff (!rst_n)
                   (s1_v && s1_last && !s1_emit) |-> !(take_carry ? s1_kvalid : h_valid))
    else $error("ts_sorter: valid entry dropped at end of sweep");
  assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));

endmodule
