// tb_cid_baseline -- self-checking testbench for cid_baseline.
//
// Sends random frames (random baseline level plus noise, with a pulse after
// the pre-trigger part), mostly back to back and sometimes with idle gaps.
// For every frame it works out the expected baseline, floor of the mean of
// the first BL_N words, and the corrected words, and compares them, the
// first/last flags and the fixed 4-clock latency from last raw word to first
// corrected word.  Back-to-back frames check the 36-clock event interval.
module tb_cid_baseline;
  import cid_pkg::*;
  localparam int NF = 40;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0;
  logic [ADC_W-1:0] in_sample = 0;
  logic out_valid, base_valid;
  sample_t out;
  logic [ADC_W-1:0] baseline;

  int checks = 0, failures = 0, cyc = 0;
  int exp_base[$];
  int exp_data[$];
  int last_in_cyc[$];
  int out_idx = 0;
  int frames_out = 0;

  cid_baseline dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    int e;
    e = exp_data.pop_front();
    check(int'(out.data) == e, $sformatf("sample %0d: got %0d exp %0d", out_idx, out.data, e));
    check(out.first == (out_idx == 0) && out.last == (out_idx == N_SAMPLES - 1), "flags");
    if (out_idx == 0) begin
      int lc;
      lc = last_in_cyc.pop_front();
      check(base_valid && int'(baseline) == exp_base[0], $sformatf("baseline %0d exp %0d", baseline, exp_base[0]));
      check(cyc - lc == 4, $sformatf("latency %0d", cyc - lc));
      void'(exp_base.pop_front());
    end
    out_idx = (out_idx == N_SAMPLES - 1) ? 0 : out_idx + 1;
    if (out_idx == 0) frames_out++;
  end

  initial begin
    int s[N_SAMPLES];
    int lvl, sum;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      lvl = $urandom_range(500, 20000);
      sum = 0;
      for (int i = 0; i < N_SAMPLES; i++) begin
        s[i] = lvl + $urandom_range(0, 30) - 15;
        if (i >= 10) s[i] += int'($urandom_range(0, 40000)) * (i < 20 ? i - 9 : 1) / 12;
        if (s[i] > 65535) s[i] = 65535;
        if (i < BL_N) sum += s[i];
      end
      exp_base.push_back(sum / BL_N);
      for (int i = 0; i < N_SAMPLES; i++) exp_data.push_back(s[i] - sum / BL_N);
      for (int i = 0; i < N_SAMPLES; i++) begin
        in_valid  <= 1;
        in_first  <= (i == 0);
        in_sample <= ADC_W'(s[i]);
        @(posedge clk);
        if (i == N_SAMPLES - 1) last_in_cyc.push_back(cyc);
      end
      if (f % 5 == 4) begin
        in_valid <= 0;
        repeat ($urandom_range(1, 50)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (N_SAMPLES + 10) @(posedge clk);
    check(frames_out == NF, $sformatf("frames out %0d", frames_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NF * 100 + 500) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
