// tb_xbiosip_top: end-to-end test of the approximate Pan-Tompkins unit at its
// default parameters (design B9: 10/12/2/8/16 approximated LSBs).
//
// A synthetic ECG is generated: 200 samples/s, one beat about every 0.8 s with
// some jitter, each beat a small P wave, a sharp QRS spike and a broad T wave, on
// top of a slow baseline wander and noise.  A short run of full-scale samples
// (an electrode artefact) is inserted once so that stage outputs saturate.  The
// 20,000 samples match the length of one evaluation record; in_valid has random
// gaps.
//
// For each accepted sample the testbench runs its own bit-level reference model
// of all five stages and queues the expected outputs; every stage output is
// checked when its valid appears, and mwi_valid must come exactly five clocks
// after in_valid.  The same sample is also run through exact integer arithmetic
// (the accurate unit A2) to count how often approximation changed each stage.
// Mechanisms that must occur at least once: approximation changing each stage's
// output, saturation of a 16-bit stage output, gaps in the input stream.  QRS
// peaks in the integrated signal are counted with a simple fixed threshold and
// reported against the number of generated beats.
module tb_xbiosip_top;
  import xbiosip_pkg::*;
  import xbiosip_ref_pkg::*;

  localparam int NSAMP = 20000;   // length of one NSRDB evaluation record
  localparam int LPF_C [32] = '{1, 2, 3, 4, 5, 6, 5, 4, 3, 2, 1, 0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0};
  localparam int HPF_C [32] = '{-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,
                                31,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1};
  localparam int DER_C [32] = '{2, 1, 0, -1, -2, 0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0};

  logic    clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  sample_t in_sample = '0;

  // One unit at its default parameters (design B9); arrays keep the
  // checking code shared with the multi-configuration test.
  localparam int NU = 1;
  logic        lv [NU], hv [NU], dv [NU], sv [NU], mv [NU], ls [NU], hs [NU], ds [NU];
  sample_t     lo [NU], ho [NU], dout [NU];
  logic [31:0] so [NU], mo [NU];

  xbiosip_top u_dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sample(in_sample),
    .lpf_valid(lv[0]), .lpf_out(lo[0]), .lpf_sat(ls[0]),
    .hpf_valid(hv[0]), .hpf_out(ho[0]), .hpf_sat(hs[0]),
    .der_valid(dv[0]), .der_out(dout[0]), .der_sat(ds[0]),
    .sqr_valid(sv[0]), .sqr_out(so[0]), .mwi_valid(mv[0]), .mwi_out(mo[0]));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_sat [NU] = '{0};
  int n_diff [NU][5];
  int n_gap = 0, n_beats = 0;
  int peaks [NU] = '{0};

  // Expected outputs per unit and stage, in sample order.
  logic signed [31:0] q_lpf [NU][$], q_hpf [NU][$], q_der [NU][$];
  logic [31:0]        q_sqr [NU][$], q_mwi [NU][$];

  // Reference state per configuration.
  logic signed [15:0] w_lpf [NU][32], w_hpf [NU][32], w_der [NU][32];
  logic [31:0]        w_mwi [NU][64];
  // Exact reference windows, used to see which stages approximation changed.
  logic signed [15:0] e_lpf [32], e_hpf [32], e_der [32];
  logic [31:0]        e_mwi [64];

  function automatic int kcfg(int c, int stage);
    int kb [NU][5] = '{'{10, 12, 2, 8, 16}};
    return kb[c][stage];
  endfunction

  // Run one input sample through the reference model of configuration c.
  // Exact (A2) outputs for the same sample, to count where each configuration
  // differs from the accurate unit.
  task automatic exact_step(logic signed [15:0] x, output logic signed [31:0] v [5]);
    logic signed [31:0] r;
    logic [63:0] m;
    longint sum;
    for (int i = 31; i > 0; i--) e_lpf[i] = e_lpf[i-1];
    e_lpf[0] = x;
    r = exact_fir(11, LPF_C, e_lpf); v[0] = 32'(ref_sat(r, 5));
    for (int i = 31; i > 0; i--) e_hpf[i] = e_hpf[i-1];
    e_hpf[0] = 16'(v[0]);
    r = exact_fir(32, HPF_C, e_hpf); v[1] = 32'(ref_sat(r, 5));
    for (int i = 31; i > 0; i--) e_der[i] = e_der[i-1];
    e_der[0] = 16'(v[1]);
    r = exact_fir(5, DER_C, e_der); v[2] = 32'(ref_sat(r, 3));
    m = (v[2] < 0) ? 64'(-v[2]) : 64'(v[2]);
    v[3] = 32'(m * m);
    for (int i = 63; i > 0; i--) e_mwi[i] = e_mwi[i-1];
    e_mwi[0] = 32'(v[3]) >> 5;
    sum = 0;
    for (int i = 0; i < 30; i++) sum += longint'(e_mwi[i]);
    v[4] = 32'(sum);
  endtask

  task automatic ref_step(int c, logic signed [15:0] x);
    logic signed [31:0] r;
    logic signed [15:0] y1, y2, y3;
    logic [63:0] m;
    logic [31:0] sq, mw;
    for (int i = 31; i > 0; i--) w_lpf[c][i] = w_lpf[c][i-1];
    w_lpf[c][0] = x;
    r  = ref_fir(11, LPF_C, w_lpf[c], kcfg(c, 0), 1, 5);
    y1 = ref_sat(r, 5);
    if (ref_sat_hit(r, 5)) n_sat[c]++;
    q_lpf[c].push_back(32'(y1));
    for (int i = 31; i > 0; i--) w_hpf[c][i] = w_hpf[c][i-1];
    w_hpf[c][0] = y1;
    r  = ref_fir(32, HPF_C, w_hpf[c], kcfg(c, 1), 1, 5);
    y2 = ref_sat(r, 5);
    if (ref_sat_hit(r, 5)) n_sat[c]++;
    q_hpf[c].push_back(32'(y2));
    for (int i = 31; i > 0; i--) w_der[c][i] = w_der[c][i-1];
    w_der[c][0] = y2;
    r  = ref_fir(5, DER_C, w_der[c], kcfg(c, 2), 1, 5);
    y3 = ref_sat(r, 3);
    if (ref_sat_hit(r, 3)) n_sat[c]++;
    q_der[c].push_back(32'(y3));
    m  = (y3 < 0) ? 64'(-32'(y3)) : 64'(y3);
    sq = 32'(ref_mul(16, kcfg(c, 3), 0, 1, 5, m, m));
    q_sqr[c].push_back(sq);
    for (int i = 63; i > 0; i--) w_mwi[c][i] = w_mwi[c][i-1];
    w_mwi[c][0] = sq >> 5;
    mw = ref_mwi(30, w_mwi[c], kcfg(c, 4), 5);
    q_mwi[c].push_back(mw);
  endtask

  // Compare every stage output of both units when its valid is high.
  always @(posedge clk) begin
    #2;
    for (int c = 0; c < NU; c++) begin
      if (lv[c]) begin
        checks++;
        if (q_lpf[c].size() == 0 || 32'(lo[c]) !== q_lpf[c].pop_front()) begin failures++; $display("unit %0d LPF mismatch", c); end
      end
      if (hv[c]) begin
        checks++;
        if (q_hpf[c].size() == 0 || 32'(ho[c]) !== q_hpf[c].pop_front()) begin failures++; $display("unit %0d HPF mismatch", c); end
      end
      if (dv[c]) begin
        checks++;
        if (q_der[c].size() == 0 || 32'(dout[c]) !== q_der[c].pop_front()) begin failures++; $display("unit %0d DER mismatch", c); end
      end
      if (sv[c]) begin
        checks++;
        if (q_sqr[c].size() == 0 || so[c] !== q_sqr[c].pop_front()) begin failures++; $display("unit %0d SQR mismatch", c); end
      end
      if (mv[c]) begin
        checks++;
        if (q_mwi[c].size() == 0 || mo[c] !== q_mwi[c].pop_front()) begin failures++; $display("unit %0d MWI mismatch", c); end
      end
    end
  end

  // Latency: mwi_valid must be in_valid delayed by exactly five clocks.
  logic [4:0] vpipe = '0;
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      checks++;
      for (int c = 0; c < NU; c++)
        if (mv[c] !== vpipe[4]) begin failures++; $display("latency wrong"); end
    end
    vpipe = {vpipe[3:0], in_valid};
  end

  // Simple peak counter on the integrated signal: a peak is a rise above TH
  // followed by a fall below TH/2.
  localparam logic [31:0] TH = 32'd150000;
  logic above [NU] = '{1'b0};
  always @(posedge clk) begin
    #3;
    for (int c = 0; c < NU; c++)
      if (mv[c]) begin
        if (!above[c] && mo[c] > TH) begin above[c] = 1'b1; peaks[c]++; end
        else if (above[c] && mo[c] < (TH >> 1)) above[c] = 1'b0;
      end
  end

  initial begin
    repeat (NSAMP * 4 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Synthetic ECG sample n (phase t within the current beat, in samples).
  function automatic sample_t ecg(int n, int t, int noise);
    real v, d;
    v = 600.0 * $sin(2.0 * 3.14159265 * real'(n) / 1400.0);           // baseline wander
    d = real'(t - 30);  v += 500.0 * $exp(-(d * d) / 50.0);             // P wave
    d = real'(t - 50);  v += 9000.0 * $exp(-(d * d) / 6.0);             // R spike
    d = real'(t - 46);  v -= 1500.0 * $exp(-(d * d) / 3.0);             // Q dip
    d = real'(t - 54);  v -= 2000.0 * $exp(-(d * d) / 3.0);             // S dip
    d = real'(t - 95);  v += 1200.0 * $exp(-(d * d) / 150.0);           // T wave
    v += real'(noise);
    return sample_t'(int'(v));
  endfunction

  initial begin
    int t, period, n;
    logic signed [31:0] xv [5];
    for (int c = 0; c < NU; c++) begin
      for (int i = 0; i < 32; i++) begin w_lpf[c][i] = '0; w_hpf[c][i] = '0; w_der[c][i] = '0; end
      for (int i = 0; i < 64; i++) w_mwi[c][i] = '0;
      for (int s = 0; s < 5; s++) n_diff[c][s] = 0;
    end
    for (int i = 0; i < 32; i++) begin e_lpf[i] = '0; e_hpf[i] = '0; e_der[i] = '0; end
    for (int i = 0; i < 64; i++) e_mwi[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    t = 0; period = 160; n = 0;
    while (n < NSAMP) begin
      sample_t x;
      if ($urandom % 3 == 0) begin
        in_valid <= 1'b0;
        n_gap++;
      end else begin
        if (n >= NSAMP / 2 && n < NSAMP / 2 + 60) x = (n < NSAMP / 2 + 30) ? 16'sh7fff : -16'sh8000;  // artefact
        else x = ecg(n, t, int'($urandom % 200) - 100);
        if (t == 50) n_beats++;
        t++;
        if (t == period) begin t = 0; period = 150 + int'($urandom % 21); end
        in_valid  <= 1'b1;
        in_sample <= x;
        exact_step(x, xv);
        for (int c = 0; c < NU; c++) begin
          ref_step(c, x);
          if (q_lpf[c][$] != xv[0]) n_diff[c][0]++;
          if (q_hpf[c][$] != xv[1]) n_diff[c][1]++;
          if (q_der[c][$] != xv[2]) n_diff[c][2]++;
          if (q_sqr[c][$] != 32'(xv[3])) n_diff[c][3]++;
          if (q_mwi[c][$] != 32'(xv[4])) n_diff[c][4]++;
        end
        n++;
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (10) @(posedge clk);
    $display("samples %0d, input gaps %0d, beats generated %0d", NSAMP, n_gap, n_beats);
    for (int c = 0; c < NU; c++) begin
      $display("unit %0d: peaks %0d of %0d beats, saturations %0d, outputs changed LPF %0d HPF %0d DER %0d SQR %0d MWI %0d",
               c, peaks[c], n_beats, n_sat[c], n_diff[c][0], n_diff[c][1], n_diff[c][2], n_diff[c][3], n_diff[c][4]);
      // Each stage with approximated LSBs must have been changed by them.
      for (int st = 0; st < 5; st++)
        if (kcfg(c, st) > 0) begin
          checks++;
          if (n_diff[c][st] == 0) begin failures++; $display("unit %0d stage %0d never changed", c, st); end
        end
    end
    checks += 2;
    if (n_gap == 0) failures++;
    if (n_sat[0] == 0) begin failures++; $display("no stage output saturated"); end
    // No expected output may be left unchecked.
    checks++;
    for (int c = 0; c < NU; c++) if (q_mwi[c].size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
