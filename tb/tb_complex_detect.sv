// tb_complex_detect -- checks the complex-flag OR reduction at its default
// width (220 syndromes, d = 21): all-zero residuals, a single remaining
// syndrome at every position of S_{i-1}, a remaining S_i syndrome with and
// without the last-round flag, and random vectors.
module tb_complex_detect;
  localparam int N = 220;
  logic [N-1:0] sp, sc;
  logic last, cplx;
  int checks = 0;
  int failures = 0;

  complex_detect #(.N(N)) dut (.s_prev_res(sp), .s_cur_res(sc), .last_round(last), .complex_o(cplx));

  task automatic chk(input bit exp, input string what);
    checks++;
    if (cplx !== exp) begin
      failures++;
      $display("FAIL: %s: got %0d want %0d", what, cplx, exp);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sp = '0; sc = '0; last = 0; #1; chk(0, "all clear");
    last = 1; #1; chk(0, "all clear, last round");
    for (int i = 0; i < N; i++) begin
      sp = '0; sp[i] = 1; sc = '0; last = 0; #1; chk(1, $sformatf("S_{i-1}[%0d] left", i));
      sp = '0; sc = '0; sc[i] = 1; last = 0; #1; chk(0, $sformatf("S_i[%0d] left, not last", i));
      last = 1; #1; chk(1, $sformatf("S_i[%0d] left, last round", i));
    end
    for (int t = 0; t < 200; t++) begin
      bit e;
      sp = '0; sc = '0;
      if ($urandom % 2) sp[$urandom % N] = 1;
      if ($urandom % 2) sc[$urandom % N] = 1;
      last = $urandom % 2;
      #1;
      e = (sp != '0) || (last && sc != '0);
      chk(e, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
