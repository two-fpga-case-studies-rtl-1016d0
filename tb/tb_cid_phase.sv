// tb_cid_phase -- self-checking testbench for cid_phase.
//
// Streams normalised frames of random rising pulses (random rise position
// and slope, noise), plus frames starting above half and frames that never
// reach half.  The testbench finds the first sample at or above 0.5 itself,
// interpolates the crossing and compares crossed and t_half with the block,
// and checks the PH_FRAC+3-clock result latency after the last sample.
module tb_cid_phase;
  import cid_pkg::*;
  localparam int NF = 60;
  localparam int HALF = 1 << (NORM_FRAC - 1);
  localparam int ONE = 1 << NORM_FRAC;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  sample_t in = '0;
  logic res_valid, crossed;
  logic [IDX_W+PH_FRAC-1:0] t_half;

  int checks = 0, failures = 0, cyc = 0, nres = 0;
  int e_cr[$], e_t[$], e_cyc[$];

  cid_phase dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  always @(posedge clk) if (rst_n && res_valid) begin
    nres++;
    check(int'(crossed) == e_cr[0] && int'(t_half) == e_t[0],
          $sformatf("crossed %0d/%0d t %0d/%0d", crossed, e_cr[0], t_half, e_t[0]));
    check(cyc - e_cyc[0] == PH_FRAC + 3, $sformatf("latency %0d", cyc - e_cyc[0]));
    void'(e_cr.pop_front()); void'(e_t.pop_front()); void'(e_cyc.pop_front());
  end

  initial begin
    int y[N_SAMPLES];
    int st, rise, ci;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      st   = $urandom_range(1, 25);
      rise = $urandom_range(1, 8);
      for (int i = 0; i < N_SAMPLES; i++) begin
        if (i < st) y[i] = int'($urandom_range(0, 400)) - 200;
        else if (i < st + rise) y[i] = (i - st + 1) * ONE / (rise + 1) + int'($urandom_range(0, 100)) - 50;
        else y[i] = ONE - int'($urandom_range(0, 600));
        if (f % 10 == 3) y[i] = HALF + 1 + int'($urandom_range(0, 100));   // above half from the start
        if (f % 10 == 6) y[i] = HALF - 1 - int'($urandom_range(0, 3000));  // never reaches half
        if (f % 10 == 8) y[i] = (i < st) ? 0 : HALF;                         // lands exactly on half
      end
      ci = -1;
      for (int i = 0; i < N_SAMPLES; i++) if (y[i] >= HALF) begin ci = i; break; end
      if (ci < 0) begin e_cr.push_back(0); e_t.push_back(0); end
      else if (ci == 0) begin e_cr.push_back(1); e_t.push_back(0); end
      else begin
        e_cr.push_back(1);
        e_t.push_back((ci - 1) * (1 << PH_FRAC) + ((HALF - y[ci-1]) * (1 << PH_FRAC)) / (y[ci] - y[ci-1]));
      end
      for (int i = 0; i < N_SAMPLES; i++) begin
        in_valid <= 1;
        in.first <= (i == 0);
        in.last  <= (i == N_SAMPLES - 1);
        in.data  <= DW'(y[i]);
        @(posedge clk);
        if (i == N_SAMPLES - 1) e_cyc.push_back(cyc);
      end
      if (f % 7 == 6) begin
        in_valid <= 0;
        repeat ($urandom_range(1, 30)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (30) @(posedge clk);
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
