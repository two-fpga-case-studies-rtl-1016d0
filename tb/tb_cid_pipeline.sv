// tb_cid_pipeline -- end-to-end testbench of the crystal identification chain.
//
// Generates pulses of random height, start time (with fractional position)
// and baseline level, plus special events: a pulse that starts above half at
// word 0 after correction, a pulse-free event, and a very small pulse.  Each
// event's result record and normalised words are compared with
// cid_model_pkg::cid_ref.  Most events are sent back to back to check the
// 36-clock event interval; the fixed latency from the last raw word to the
// result record is checked as well.
module tb_cid_pipeline;
  import cid_pkg::*;
  import cid_model_pkg::*;
  localparam int NF  = 60;
  localparam int LAT = 141;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0;
  logic [ADC_W-1:0] in_sample = 0;
  logic res_valid, norm_valid;
  cid_result_t res;
  sample_t norm;

  int checks = 0, failures = 0, cyc = 0, nres = 0, nidx = 0;
  ref_res_t exp_r[$];
  int exp_n[$];
  int last_cyc[$];

  cid_pipeline dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (norm_valid) begin
      int e;
      e = exp_n.pop_front();
      check(int'(norm.data) == e, $sformatf("norm word %0d got %0d exp %0d", nidx, norm.data, e));
      nidx = (nidx == N_SAMPLES - 1) ? 0 : nidx + 1;
    end
    if (res_valid) begin
      ref_res_t r;
      int lc;
      r = exp_r.pop_front();
      lc = last_cyc.pop_front();
      nres++;
      check(int'(res.baseline) == r.baseline && int'(res.peak_idx) == r.peak_idx &&
            int'(res.amplitude) == r.amplitude && int'(res.crossed) == r.crossed &&
            int'(res.t_half) == r.t_half,
            $sformatf("ev %0d: bl %0d/%0d idx %0d/%0d amp %0d/%0d cr %0d/%0d t %0d/%0d", nres,
                      res.baseline, r.baseline, res.peak_idx, r.peak_idx, res.amplitude, r.amplitude,
                      res.crossed, r.crossed, res.t_half, r.t_half));
      check(cyc - lc == LAT, $sformatf("latency %0d", cyc - lc));
    end
  end

  initial begin
    frame_t raw, nrm;
    ref_res_t r;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      if (f % 13 == 5)      make_pulse(raw, 3000, 0, 0.0, 3);                 // no pulse
      else if (f % 13 == 9) make_pulse(raw, 1000, 20, 10.3, 0);               // tiny pulse
      else make_pulse(raw, $urandom_range(200, 8000), $urandom_range(300, 50000),
                      8.0 + real'($urandom_range(0, 400)) / 100.0, 6);
      if (f % 13 == 11) for (int i = BL_N; i < N_SAMPLES; i++) raw[i] = 5000;  // step: above half at once
      cid_ref(raw, r, nrm);
      exp_r.push_back(r);
      for (int i = 0; i < N_SAMPLES; i++) exp_n.push_back(nrm[i]);
      for (int i = 0; i < N_SAMPLES; i++) begin
        in_valid  <= 1;
        in_first  <= (i == 0);
        in_sample <= ADC_W'(raw[i]);
        @(posedge clk);
        if (i == N_SAMPLES - 1) last_cyc.push_back(cyc);
      end
      if (f % 10 == 9) begin
        in_valid <= 0;
        repeat ($urandom_range(1, 80)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (LAT + 20) @(posedge clk);
    check(nres == NF, $sformatf("results %0d of %0d", nres, NF));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NF * 120 + 1000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
