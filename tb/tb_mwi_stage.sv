// tb_mwi_stage: streaming test of the moving-window integrator.
// Random 32-bit squares are fed with gaps in in_valid.  The testbench keeps its
// own window of the last 30 scaled terms; one clock after each accepted input it
// compares the default instance (K = 16) with the reference adder chain, and an
// accurate instance (K = 0) with the exact window sum.  out_valid must follow
// in_valid by exactly one clock.
module tb_mwi_stage;
  import xbiosip_pkg::*;
  import xbiosip_ref_pkg::*;

  localparam int N = 30;

  logic        clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [31:0] in_square = '0;
  logic        v_ax, v_ex;
  logic [31:0] y_ax, y_ex;
  int checks = 0, failures = 0, n_diff = 0;

  mwi_stage u_ax (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_square(in_square),
                  .out_valid(v_ax), .out_sum(y_ax));
  mwi_stage #(.K(0)) u_ex (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_square(in_square),
                  .out_valid(v_ex), .out_sum(y_ex));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] term [64];
    logic exp_valid;
    logic [31:0] r_ax;
    longint r_ex;
    for (int i = 0; i < 64; i++) term[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      in_valid  <= ($urandom % 4) != 0;
      in_square <= ($urandom % 2) ? ($urandom >> 2) : ($urandom % 65536);
      #1;
      exp_valid = in_valid;
      if (in_valid) begin
        for (int i = 63; i > 0; i--) term[i] = term[i-1];
        term[0] = in_square >> 5;
        r_ax = ref_mwi(N, term, 16, 5);
        r_ex = 0;
        for (int i = 0; i < N; i++) r_ex += longint'(term[i]);
      end
      @(posedge clk);
      #1;
      checks += 2;
      if (v_ax !== exp_valid || v_ex !== exp_valid) begin failures++; $display("valid timing wrong"); end
      if (exp_valid) begin
        checks += 2;
        if (y_ax !== r_ax) begin failures++; $display("approx sum %0d, expected %0d", y_ax, r_ax); end
        if (y_ex !== 32'(r_ex)) begin failures++; $display("exact sum %0d, expected %0d", y_ex, r_ex); end
        if (y_ax !== y_ex) n_diff++;
      end
    end
    checks++;
    if (n_diff == 0) failures++;
    $display("sums changed by approximation %0d", n_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
