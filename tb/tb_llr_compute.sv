// tb_llr_compute: random channel indices and symbol counts.  phi is
// recomputed here in floating point, ceil(0.5 i / ln((0.5 i + 0.01 j)/(0.01 j))),
// and every output must be N - phi saturated to -128..127, one cycle after
// the symbol, with the pilot and last tags carried along.
module tb_llr_compute;
  logic clk = 0, rst_n = 0, est_valid = 0, sym_valid = 0;
  logic [5:0] lam_s_idx = 1;
  logic [6:0] lam_b_idx = 1;
  uv_pkg::sym_t sym = '0;
  logic llr_valid;
  uv_pkg::llr_t llr;
  int checks = 0, failures = 0;

  llr_compute dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int phi, e;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 400; f++) begin
      @(negedge clk);
      lam_s_idx = 6'($urandom_range(1, 32));
      lam_b_idx = 7'($urandom_range(1, 64));
      phi = $rtoi($ceil((0.5 * lam_s_idx) / $ln((0.5 * lam_s_idx + 0.01 * lam_b_idx) / (0.01 * lam_b_idx))));
      est_valid = 1;
      @(negedge clk) est_valid = 0;
      for (int n = 0; n < 8; n++) begin
        sym.cnt   = 8'((n == 7) ? 255 : $urandom_range(0, 30));
        sym.pilot = 1'($urandom_range(0, 1));
        sym.last  = 1'(n == 7);
        sym_valid = 1;
        e = int'(sym.cnt) - phi;
        if (e > 127) e = 127;
        @(negedge clk) sym_valid = 0;
        checks++;
        if (!llr_valid || int'(llr.llr) != e || llr.pilot != sym.pilot || llr.last != sym.last) begin
          failures++;
          if (failures < 10) $display("i %0d j %0d N %0d: llr %0d expected %0d (phi %0d)", lam_s_idx, lam_b_idx, sym.cnt, llr.llr, e, phi);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
