// tb_val_compare -- self-checking test of the Validator comparison logic.
// Random and edge-case metric pairs against random thresholds; the expected
// absolute distances and pass/fail are computed in the testbench with
// 64-bit arithmetic. Includes distances equal to the threshold (pass),
// threshold + 1 (fail) and full-range values.
module tb_val_compare;
  import ssp_pkg::*;
  cntr_t [NUM_CNTR-1:0] agg, gold, d;
  cntr_t                th;
  logic  [NUM_CNTR-1:0] over;
  logic                 fail;
  int checks = 0, failures = 0;
  int unsigned nfail = 0, npass = 0;

  val_compare dut (.agg_i(agg), .gold_i(gold), .thresh_i(th), .dist_o(d), .over_o(over), .fail_o(fail));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one();
    bit any = 0;
    #1;
    for (int m = 0; m < NUM_CNTR; m++) begin
      longint a = longint'(agg[m]), g = longint'(gold[m]);
      longint e = (a > g) ? a - g : g - a;
      check(d[m] == 32'(e), $sformatf("distance m%0d %0d exp %0d", m, d[m], e));
      check(over[m] == (e > longint'(th)), $sformatf("over m%0d", m));
      if (e > longint'(th)) any = 1;
    end
    check(fail == any, "window verdict");
    if (any) nfail++; else npass++;
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) begin
      th = $urandom % 2000;
      for (int m = 0; m < NUM_CNTR; m++) begin
        gold[m] = $urandom;
        if (i % 2 == 0) agg[m] = gold[m] + (($urandom % 2) ? ($urandom % (th + 1)) : -($urandom % (th + 1)));
        else case ($urandom % 4)
          0: agg[m] = gold[m] + ($urandom % 1000);
          1: agg[m] = gold[m] - ($urandom % 1000);
          2: agg[m] = gold[m] + ((i % 2) ? th : th + 1);
          default: agg[m] = $urandom;
        endcase
      end
      one();
    end
    // edge cases
    th = 10;
    for (int m = 0; m < NUM_CNTR; m++) begin gold[m] = 100; agg[m] = 110; end
    one(); check(!fail, "distance equal to threshold passes");
    agg[3] = 89; one(); check(fail && over == 8'b0000_1000, "distance threshold+1 fails, one metric");
    for (int m = 0; m < NUM_CNTR; m++) begin gold[m] = 32'hFFFF_FFFF; agg[m] = 0; end
    th = 32'hFFFF_FFFE; one(); check(fail, "full-range distance");
    check(nfail > 100 && npass > 100, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
