// tb_cid_normalize -- self-checking testbench for cid_normalize.
//
// Streams random frames into the block and, a fixed number of clocks after
// each frame's last sample, its amplitude (random, also zero and very small
// values that force saturation).  The expected output is worked out in the
// testbench: recip = floor(2**30 / max(amp,1)), out = sat((x*recip) >>> 16).
// Checks every normalised sample and its flags, the QW+5-clock latency from
// amp_valid to the first normalised sample, and that back-to-back frames come
// out back to back (36-clock interval).
module tb_cid_normalize;
  import cid_pkg::*;
  localparam int NF  = 50;
  localparam int QW  = NORM_FRAC + 16 + 1;
  localparam int DLY = 21;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, amp_valid = 0, out_valid;
  sample_t in = '0, out;
  logic [AMP_W-1:0] amplitude = '0;

  int checks = 0, failures = 0, cyc = 0;
  int exp_q[$];
  int amp_q[$], amp_cyc[$];
  int first_exp[$];
  int oidx = 0, frames_out = 0, last_first = -1, b2b = 0;

  cid_normalize dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // amplitude driver: each amplitude DLY clocks after its frame
  always @(posedge clk) begin
    amp_valid <= 0;
    if (amp_cyc.size() > 0 && amp_cyc[0] == cyc + 1) begin
      amp_valid <= 1;
      amplitude <= AMP_W'(amp_q.pop_front());
      void'(amp_cyc.pop_front());
      first_exp.push_back(cyc + 1 + QW + 5);
    end
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e;
    e = exp_q.pop_front();
    check(int'(out.data) == e, $sformatf("sample %0d got %0d exp %0d", oidx, out.data, e));
    check(out.first == (oidx == 0) && out.last == (oidx == N_SAMPLES - 1), "flags");
    if (oidx == 0) begin
      check(cyc == first_exp[0], $sformatf("latency: first at %0d exp %0d", cyc, first_exp[0]));
      void'(first_exp.pop_front());
      if (last_first >= 0 && cyc - last_first == N_SAMPLES) b2b++;
      last_first = cyc;
    end
    oidx = (oidx == N_SAMPLES - 1) ? 0 : oidx + 1;
    if (oidx == 0) frames_out++;
  end

  initial begin
    int x, amp;
    longint r, p;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      amp = (f % 9 == 4) ? 0 : (f % 9 == 7) ? $urandom_range(1, 3) : $urandom_range(50, 90000);
      r = (longint'(1) << 30) / ((amp == 0) ? 1 : amp);
      for (int i = 0; i < N_SAMPLES; i++) begin
        x = int'($urandom_range(0, 2 * amp + 20)) - amp / 2 - 10;
        p = (longint'(x) * r) >>> 16;
        if (p > 131071) p = 131071;
        if (p < -131072) p = -131072;
        exp_q.push_back(int'(p));
        in_valid <= 1;
        in.first <= (i == 0);
        in.last  <= (i == N_SAMPLES - 1);
        in.data  <= DW'(x);
        @(posedge clk);
        if (i == N_SAMPLES - 1) begin
          amp_q.push_back(amp);
          amp_cyc.push_back(cyc + DLY);
        end
      end
      if (f % 8 == 7) begin
        in_valid <= 0;
        repeat ($urandom_range(1, 40)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (DLY + QW + N_SAMPLES + 20) @(posedge clk);
    check(frames_out == NF, $sformatf("frames out %0d", frames_out));
    check(b2b > NF / 2, $sformatf("back-to-back frames out %0d", b2b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NF * 100 + 1000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
