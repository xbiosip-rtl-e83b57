// tb_sqr_stage: streaming test of the squarer.
// Random signed samples (including -32768 and 32767) are fed with gaps in
// in_valid.  One clock after each accepted sample the default instance (K = 8)
// is compared with the reference model of the approximate recursive multiplier
// and an accurate instance (K = 0) with x * x; out_valid must follow in_valid by
// exactly one clock.
module tb_sqr_stage;
  import xbiosip_pkg::*;
  import xbiosip_ref_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  sample_t     in_sample = '0;
  logic        v_ax, v_ex;
  logic [31:0] y_ax, y_ex;
  int checks = 0, failures = 0, n_diff = 0;

  sqr_stage u_ax (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sample(in_sample),
                  .out_valid(v_ax), .out_square(y_ax));
  sqr_stage #(.K(0)) u_ex (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sample(in_sample),
                  .out_valid(v_ex), .out_square(y_ex));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] mag;
    logic exp_valid;
    logic [31:0] r_ax, r_ex;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      in_valid  <= (n < 4) || ($urandom % 4) != 0;
      in_sample <= (n == 0) ? -16'sh8000 : (n == 1) ? 16'sh7fff : (n == 2) ? -16'sd3 : sample_t'($urandom);
      #1;
      exp_valid = in_valid;
      mag  = (in_sample < 0) ? 64'(-32'(in_sample)) : 64'(in_sample);
      r_ax = 32'(ref_mul(16, 8, 0, 1, 5, mag, mag));
      r_ex = 32'(mag * mag);
      @(posedge clk);
      #1;
      checks += 2;
      if (v_ax !== exp_valid || v_ex !== exp_valid) begin failures++; $display("valid timing wrong"); end
      if (exp_valid) begin
        checks += 2;
        if (y_ax !== r_ax) begin failures++; $display("approx square %0d, expected %0d", y_ax, r_ax); end
        if (y_ex !== r_ex) begin failures++; $display("exact square %0d, expected %0d", y_ex, r_ex); end
        if (y_ax !== y_ex) n_diff++;
      end
    end
    checks++;
    if (n_diff == 0) failures++;
    $display("squares changed by approximation %0d", n_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
