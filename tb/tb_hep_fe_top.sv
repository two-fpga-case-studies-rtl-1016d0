// tb_hep_fe_top -- end-to-end testbench of hep_fe_top at its default sizes.
//
// Runs both data paths at once.  The sorter (100-event memory) receives 400
// nearly-ordered time-stamped events offered continuously, then is drained
// with flush; every released event is compared with a reference sorted list
// and checked for the 100-clock interval and the 102-clock release latency.
// The crystal identification path receives 80 pulse events, mostly back to
// back, and every result record and normalised word is compared with
// cid_model_pkg::cid_ref.  Each mechanism of the design is counted and must
// occur at least once: sorter fill sweeps, releases when full, flush
// releases, insertions ahead of younger events, timestamp ties, input stalls,
// head wrap-around; back-to-back and gapped events, interpolation
// corrections, normalisation saturation, events with no half crossing and
// events above half from word 0.  All sizes are the design's defaults.
module tb_hep_fe_top;
  import cid_pkg::*;
  import cid_model_pkg::*;
  localparam int DEPTH = 100;
  localparam int N_EV  = 400;
  localparam int NF    = 80;
  localparam int LAT   = 141;

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0, adc_first = 0;
  logic [ADC_W-1:0] adc_sample = 0;
  logic cid_res_valid, norm_valid;
  cid_result_t cid_res;
  sample_t norm;
  logic ev_valid = 0, ev_ready, sort_flush = 0, sorted_valid;
  logic [31:0] ev_ts = 0, sorted_ts;
  logic [15:0] ev_data = 0, sorted_data;
  logic [$clog2(DEPTH+1)-1:0] sort_count;

  hep_fe_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // mechanism counters
  int m_fill = 0, m_release = 0, m_flush = 0, m_insert_ahead = 0, m_tie = 0, m_stall = 0, m_wrap = 0;
  int m_b2b = 0, m_gap = 0, m_interp = 0, m_sat = 0, m_nocross = 0, m_at0 = 0;

  // ---------------- sorter reference ----------------
  typedef struct { int ts; int data; } ev_t;
  ev_t model[$], expq[$];
  int  exp_cyc[$];
  int  last_acc = -1, sorted_n = 0;

  always @(posedge clk) if (rst_n) begin
    check(int'(sort_count) == model.size(), "sort count");
    if (ev_valid && !ev_ready) m_stall++;
    if (ev_valid && ev_ready) begin
      ev_t e; int pos;
      if (last_acc >= 0) check(cyc - last_acc == DEPTH, $sformatf("sorter interval %0d", cyc - last_acc));
      last_acc = cyc;
      if (model.size() == DEPTH) begin
        expq.push_back(model.pop_front());
        exp_cyc.push_back(cyc + DEPTH + 2);
        m_release++;
      end else m_fill++;
      e.ts = int'(ev_ts); e.data = int'(ev_data);
      pos = model.size();
      for (int i = 0; i < model.size(); i++) if (model[i].ts > e.ts) begin pos = i; break; end
      for (int i = 0; i < model.size(); i++) if (model[i].ts == e.ts) begin m_tie++; break; end
      if (pos < model.size()) m_insert_ahead++;
      model.insert(pos, e);
    end else if (sort_flush && ev_ready && model.size() > 0) begin
      expq.push_back(model.pop_front());
      exp_cyc.push_back(cyc + DEPTH + 2);
      m_flush++;
    end
    if (sorted_valid) begin
      ev_t e; int c;
      sorted_n++;
      if (expq.size() == 0) check(0, "unexpected sorter output");
      else begin
        e = expq.pop_front();
        c = exp_cyc.pop_front();
        check(int'(sorted_ts) == e.ts && int'(sorted_data) == e.data,
              $sformatf("sorted ts=%0d data=%0d exp ts=%0d data=%0d", sorted_ts, sorted_data, e.ts, e.data));
        check(cyc == c, $sformatf("sorter latency: at %0d exp %0d", cyc, c));
      end
    end
    if (dut.u_sorter.start && dut.u_sorter.count == DEPTH &&
        dut.u_sorter.head == $clog2(DEPTH)'(DEPTH - 1)) m_wrap++;
  end

  // ---------------- crystal identification reference ----------------
  ref_res_t exp_r[$];
  int exp_n[$], last_cyc[$];
  int nres = 0;

  always @(posedge clk) if (rst_n) begin
    if (norm_valid) begin
      int e;
      e = exp_n.pop_front();
      check(int'(norm.data) == e, $sformatf("norm got %0d exp %0d", norm.data, e));
    end
    if (cid_res_valid) begin
      ref_res_t r; int lc;
      r = exp_r.pop_front();
      lc = last_cyc.pop_front();
      nres++;
      check(int'(cid_res.baseline) == r.baseline && int'(cid_res.peak_idx) == r.peak_idx &&
            int'(cid_res.amplitude) == r.amplitude && int'(cid_res.crossed) == r.crossed &&
            int'(cid_res.t_half) == r.t_half,
            $sformatf("cid ev %0d: amp %0d/%0d t %0d/%0d", nres, cid_res.amplitude, r.amplitude,
                      cid_res.t_half, r.t_half));
      check(cyc - lc == LAT, $sformatf("cid latency %0d", cyc - lc));
    end
  end

  // ---------------- stimulus ----------------
  initial begin : sorter_stim
    int base;
    base = 1000;
    @(posedge rst_n);
    @(posedge clk);
    for (int n = 0; n < N_EV; n++) begin
      ev_valid <= 1;
      ev_ts    <= 32'(base + $urandom_range(0, 300));
      ev_data  <= 16'(n);
      base    += $urandom_range(0, 5);
      @(posedge clk);
      while (!ev_ready) @(posedge clk);
    end
    ev_valid   <= 0;
    sort_flush <= 1;
    while (model.size() > 0) @(posedge clk);
    sort_flush <= 0;
  end

  initial begin : cid_stim
    frame_t raw, nrm;
    ref_res_t r;
    @(posedge rst_n);
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      if (f % 17 == 5)       make_pulse(raw, 3000, 0, 0.0, 4);
      else if (f % 17 == 9)  make_pulse(raw, 1000, 15, 12.5, 6);
      else make_pulse(raw, $urandom_range(200, 8000), $urandom_range(300, 50000),
                      8.0 + real'($urandom_range(0, 400)) / 100.0, 6);
      if (f % 17 == 11) for (int i = BL_N; i < N_SAMPLES; i++) raw[i] = 5000;
      if (f % 17 == 13) begin                       // undershoot only: no crossing
        make_pulse(raw, 3000, 0, 0.0, 0);
        for (int i = BL_N; i < N_SAMPLES; i++) raw[i] = 2950;
      end
      cid_ref(raw, r, nrm);
      exp_r.push_back(r);
      if (r.amplitude > 0 && r.crossed && r.t_half == 0) m_at0++;
      if (!r.crossed) m_nocross++;
      for (int i = 0; i < N_SAMPLES; i++) begin
        exp_n.push_back(nrm[i]);
        if (nrm[i] == 131071 || nrm[i] == -131072) m_sat++;
      end
      begin
        int mx; mx = -1000000;
        for (int i = 0; i < N_SAMPLES; i++) if (raw[i] - r.baseline > mx) mx = raw[i] - r.baseline;
        if (mx > 0 && r.amplitude > mx) m_interp++;
      end
      if (f > 0 && adc_valid) m_b2b++;
      for (int i = 0; i < N_SAMPLES; i++) begin
        adc_valid  <= 1;
        adc_first  <= (i == 0);
        adc_sample <= ADC_W'(raw[i]);
        @(posedge clk);
        if (i == N_SAMPLES - 1) last_cyc.push_back(cyc);
      end
      if (f % 8 == 7) begin
        adc_valid <= 0;
        m_gap++;
        repeat ($urandom_range(1, 100)) @(posedge clk);
      end
    end
    adc_valid <= 0;
  end

  initial begin : main
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (sorted_n == N_EV && nres == NF);
    repeat (10) @(posedge clk);
    check(expq.size() == 0 && model.size() == 0, "sorter drained");
    check(m_fill > 0,         $sformatf("sorter fill sweeps: %0d", m_fill));
    check(m_release > 0,      $sformatf("sorter releases when full: %0d", m_release));
    check(m_flush > 0,        $sformatf("sorter flush releases: %0d", m_flush));
    check(m_insert_ahead > 0, $sformatf("sorter insertions ahead of younger events: %0d", m_insert_ahead));
    check(m_tie > 0,          $sformatf("sorter timestamp ties: %0d", m_tie));
    check(m_stall > 0,        $sformatf("sorter input stall cycles: %0d", m_stall));
    check(m_wrap > 0,         $sformatf("sorter head wrap-arounds: %0d", m_wrap));
    check(m_b2b > 0,          $sformatf("cid back-to-back events: %0d", m_b2b));
    check(m_gap > 0,          $sformatf("cid gaps: %0d", m_gap));
    check(m_interp > 0,       $sformatf("cid interpolation corrections: %0d", m_interp));
    check(m_sat > 0,          $sformatf("cid normalisation saturations: %0d", m_sat));
    check(m_nocross > 0,      $sformatf("cid events without half crossing: %0d", m_nocross));
    check(m_at0 > 0,          $sformatf("cid events above half at word 0: %0d", m_at0));
    $display("mechanisms: fill=%0d release=%0d flush=%0d ahead=%0d tie=%0d stall=%0d wrap=%0d b2b=%0d gap=%0d interp=%0d sat=%0d nocross=%0d at0=%0d",
             m_fill, m_release, m_flush, m_insert_ahead, m_tie, m_stall, m_wrap,
             m_b2b, m_gap, m_interp, m_sat, m_nocross, m_at0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((N_EV + DEPTH) * DEPTH + 5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
