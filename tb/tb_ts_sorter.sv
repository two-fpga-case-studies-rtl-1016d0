// tb_ts_sorter -- self-checking testbench for ts_sorter.
//
// Feeds nearly-ordered random timestamps (an increasing base plus jitter, with
// deliberate ties) and compares every released event with a reference list
// kept in the testbench: insertion after all equal timestamps, release of the
// front when the list is full.  Payloads carry a sequence number so the order
// of ties is checked too.  Also checks the event interval (one accepted event
// every DEPTH clocks under constant offer), the release latency (DEPTH+2
// clocks after the accepting cycle) and a full drain through flush.
module tb_ts_sorter;
  localparam int DEPTH  = 12;
  localparam int TS_W   = 16;
  localparam int DATA_W = 16;
  localparam int N_EV   = 200;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, flush = 0, out_valid;
  logic [TS_W-1:0] in_ts = 0, out_ts;
  logic [DATA_W-1:0] in_data = 0, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct { int ts; int data; } ev_t;
  ev_t model[$];
  ev_t expq[$];
  int  exp_cycle[$];

  ts_sorter #(.DEPTH(DEPTH), .TS_W(TS_W), .DATA_W(DATA_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // reference: note what each accepted sweep must release
  int last_accept = -1;
  always @(posedge clk) if (rst_n) begin
    check(int'(count) == model.size(), "count");
    if (in_valid && in_ready) begin
      ev_t e; int pos;
      if (last_accept >= 0) check(cyc - last_accept == DEPTH, $sformatf("interval %0d", cyc - last_accept));
      last_accept = cyc;
      if (model.size() == DEPTH) begin
        expq.push_back(model.pop_front());
        exp_cycle.push_back(cyc + DEPTH + 2);
      end
      e.ts = int'(in_ts); e.data = int'(in_data);
      pos = model.size();
      for (int i = 0; i < model.size(); i++) if (model[i].ts > e.ts) begin pos = i; break; end
      model.insert(pos, e);
    end else if (flush && in_ready && model.size() > 0) begin
      expq.push_back(model.pop_front());
      exp_cycle.push_back(cyc + DEPTH + 2);
    end
    if (out_valid) begin
      if (expq.size() == 0) check(0, "unexpected output");
      else begin
        ev_t e;
        int  c;
        e = expq.pop_front();
        c = exp_cycle.pop_front();
        check(int'(out_ts) == e.ts && int'(out_data) == e.data,
              $sformatf("out ts=%0d data=%0d exp ts=%0d data=%0d", out_ts, out_data, e.ts, e.data));
        check(cyc == c, $sformatf("latency: out at %0d expected %0d", cyc, c));
      end
    end
  end

  initial begin
    int base;
    base = 100;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < N_EV; n++) begin
      in_valid <= 1;
      in_ts    <= TS_W'(base + $urandom_range(0, 40));
      in_data  <= DATA_W'(n);
      base    += $urandom_range(0, 6);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 0;
    flush    <= 1;
    while (model.size() > 0) @(posedge clk);
    flush <= 0;
    repeat (DEPTH + 5) @(posedge clk);
    check(expq.size() == 0, "all released events seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_EV * DEPTH * 3 + 1000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
