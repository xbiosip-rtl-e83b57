// tb_approx_fir: streaming test of approx_fir (default taps: the low-pass coefficients).
// Random samples (mostly small, with runs of full-scale values so that the
// output can saturate)
// are fed with random gaps in in_valid.  The testbench keeps its own copy of the
// delay line; one clock after each accepted sample it checks out_valid, the
// output sample and the saturation flag of the default instance (K = 10
// approximate LSBs) against the bit-level reference model, and of an accurate
// instance (K = 0) against exact integer convolution.  A valid output must
// appear exactly one clock after its input and never otherwise.
module tb_approx_fir;
  import xbiosip_pkg::*;
  import xbiosip_ref_pkg::*;

  localparam int NT = 11;
  localparam int SH = 5;
  localparam int KD = 10;
  localparam int COEF [32] = '{1,2,3,4,5,6,5,4,3,2,1,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0};

  logic    clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  sample_t in_sample = '0;
  logic    v_ax, v_ex, sat_ax, sat_ex;
  sample_t y_ax, y_ex;
  int checks = 0, failures = 0, n_sat = 0, n_diff = 0;

  approx_fir u_ax (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sample(in_sample),
           .out_valid(v_ax), .out_sample(y_ax), .out_sat(sat_ax));
  approx_fir #(.K(0)) u_ex (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sample(in_sample),
           .out_valid(v_ex), .out_sample(y_ex), .out_sat(sat_ex));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample_t win [32];
    logic signed [31:0] r_ax, r_ex;
    logic exp_valid;
    sample_t burst = '0;
    for (int i = 0; i < 32; i++) win[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 1500; n++) begin
      // drive
      in_valid  <= ($urandom % 4) != 0;
      if ((n / 40) % 4 == 3) begin
        // full-scale burst: a run of one extreme value, sign changing every 40
        if (n % 40 == 0) burst = ($urandom % 2) ? 16'sh7fff : -16'sh8000;
        in_sample <= burst;
      end else
        in_sample <= (($urandom % 8) == 0) ? sample_t'($urandom) : sample_t'($signed($urandom % 4096) - 2048);
      #1;
      exp_valid = in_valid;
      if (in_valid) begin
        for (int i = 31; i > 0; i--) win[i] = win[i-1];
        win[0] = in_sample;
        r_ax = ref_fir(NT, COEF, win, KD, 1, 5);
        r_ex = exact_fir(NT, COEF, win);
      end
      @(posedge clk);
      #1;
      checks += 2;
      if (v_ax !== exp_valid || v_ex !== exp_valid) begin failures++; $display("valid timing wrong at %0d", n); end
      if (exp_valid) begin
        checks += 4;
        if (y_ax !== ref_sat(r_ax, SH)) begin failures++; $display("approx out %0d, expected %0d", y_ax, ref_sat(r_ax, SH)); end
        if (sat_ax !== ref_sat_hit(r_ax, SH)) failures++;
        if (y_ex !== ref_sat(r_ex, SH)) begin failures++; $display("exact out %0d, expected %0d", y_ex, ref_sat(r_ex, SH)); end
        if (sat_ex !== ref_sat_hit(r_ex, SH)) failures++;
        if (sat_ex) n_sat++;
        if (y_ax !== y_ex) n_diff++;
      end
    end
    in_valid <= 1'b0;
    $display("saturated outputs %0d, outputs changed by approximation %0d", n_sat, n_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
