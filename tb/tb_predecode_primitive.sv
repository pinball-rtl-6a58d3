// tb_predecode_primitive -- exhaustive check of the predecoding primitive:
// all four input combinations, each compared with the expected "both active
// -> correct and clear both" behaviour, repeated with a time watchdog.
module tb_predecode_primitive;
  logic c_in, n_in, c_out, n_out, corr;
  int checks = 0;
  int failures = 0;

  predecode_primitive dut (
    .center_in(c_in), .neighbor_in(n_in),
    .center_out(c_out), .neighbor_out(n_out), .correction(corr)
  );

  initial begin
    #100_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int v = 0; v < 4; v++) begin
        bit both;
        c_in = v[0];
        n_in = v[1];
        #1;
        both = (v == 3);
        checks++;
        if (corr !== both || c_out !== (both ? 1'b0 : v[0]) || n_out !== (both ? 1'b0 : v[1])) begin
          failures++;
          $display("FAIL: center=%0d neighbor=%0d -> c_out=%0d n_out=%0d corr=%0d", v[0], v[1], c_out, n_out, corr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
