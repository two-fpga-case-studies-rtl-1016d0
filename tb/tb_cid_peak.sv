// tb_cid_peak -- self-checking testbench for cid_peak.
//
// Streams random frames: pulses of random height at a random position
// (including the first and last sample), flat tops with ties, and
// all-negative frames.  For each frame the testbench finds the maximum, its
// neighbours and the parabolic amplitude itself and compares them with the
// block's result, checks the QW+3-clock result latency after the last sample
// and that the stream is passed on unchanged one clock later.
module tb_cid_peak;
  import cid_pkg::*;
  localparam int NF = 60;
  localparam int QW = 18;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  sample_t in = '0;
  logic out_valid, res_valid;
  sample_t out;
  logic [IDX_W-1:0] peak_idx;
  sample_w_t peak_val;
  logic [AMP_W-1:0] amplitude;

  int checks = 0, failures = 0, cyc = 0, nres = 0;
  int e_idx[$], e_val[$], e_amp[$], e_cyc[$];
  sample_t sent[$];

  cid_peak dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid) sent.push_back(in);
    if (out_valid) begin
      sample_t s;
      s = sent.pop_front();
      check(out == s, "stream pass-through");
    end
    if (res_valid) begin
      nres++;
      check(int'(peak_idx) == e_idx[0] && int'(peak_val) == e_val[0] && int'(amplitude) == e_amp[0],
            $sformatf("idx %0d/%0d val %0d/%0d amp %0d/%0d", peak_idx, e_idx[0], peak_val, e_val[0], amplitude, e_amp[0]));
      check(cyc - e_cyc[0] == QW + 3, $sformatf("latency %0d", cyc - e_cyc[0]));
      void'(e_idx.pop_front()); void'(e_val.pop_front()); void'(e_amp.pop_front()); void'(e_cyc.pop_front());
    end
  end

  initial begin
    int y[N_SAMPLES];
    int pk, h, mi, ym, yp, a, b;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      pk = (f == 0) ? 0 : (f == 1) ? N_SAMPLES - 1 : $urandom_range(5, 30);
      h  = $urandom_range(10, 60000);
      for (int i = 0; i < N_SAMPLES; i++) begin
        int dd;
        dd = (i > pk) ? i - pk : pk - i;
        y[i] = h - dd * dd * h / 40 + int'($urandom_range(0, 20)) - 10;
        if (f % 7 == 3 && dd <= 1) y[i] = h;          // flat top / ties
        if (f % 11 == 5) y[i] = -100 - int'($urandom_range(0, 500));
        if (y[i] < -60000) y[i] = -60000;
      end
      mi = 0;
      for (int i = 1; i < N_SAMPLES; i++) if (y[i] > y[mi]) mi = i;
      ym = (mi == 0) ? y[mi] : y[mi - 1];
      yp = (mi == N_SAMPLES - 1) ? y[mi] : y[mi + 1];
      a = y[mi] - ym; b = y[mi] - yp;
      e_idx.push_back(mi);
      e_val.push_back(y[mi]);
      if (y[mi] <= 0) e_amp.push_back(0);
      else if (a + b == 0) e_amp.push_back(y[mi]);
      else e_amp.push_back(y[mi] + int'((longint'(a - b) * longint'(a - b)) / (8 * longint'(a + b))));
      for (int i = 0; i < N_SAMPLES; i++) begin
        in_valid   <= 1;
        in.first   <= (i == 0);
        in.last    <= (i == N_SAMPLES - 1);
        in.data    <= DW'(y[i]);
        @(posedge clk);
        if (i == N_SAMPLES - 1) e_cyc.push_back(cyc);
      end
      if (f % 6 == 5) begin
        in_valid <= 0;
        repeat ($urandom_range(1, 30)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (QW + 10) @(posedge clk);
    check(nres == NF, $sformatf("results %0d", nres));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NF * 80 + 500) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
