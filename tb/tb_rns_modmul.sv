// tb_rns_modmul: the evaluated workload, RNS modular multiplication, run on
// the modular execution unit at the smallest and largest channel counts
// (8 and 64 channels of 64-bit moduli, i.e. 504- and 4088-bit p) with the
// default latencies (addmod 2, mulmod 4), and at 64 channels with the
// long-delay latencies (addmod 4, mulmod 9). Each run uses both second base
// extensions (Szabo-Tanaka and Kawamura et al.); see rns_modmul_run.
// The cycle counts printed are for this testbench's simple scalar issue
// loop, not for a processor.
module tb_rns_modmul;
  logic d8, d64, d64l;
  int c8, f8, c64, f64, c64l, f64l;
  int st8, k8, st64, k64, st64l, k64l;

  rns_modmul_run #(.N(8))  r8  (.done(d8),  .checks(c8),  .failures(f8),
                                .cycles_st(st8), .cycles_k(k8));
  rns_modmul_run #(.N(64)) r64 (.done(d64), .checks(c64), .failures(f64),
                                .cycles_st(st64), .cycles_k(k64));
  rns_modmul_run #(.N(64), .ADD_LAT(4), .MUL_LAT(9)) r64l (
    .done(d64l), .checks(c64l), .failures(f64l), .cycles_st(st64l), .cycles_k(k64l));

  initial begin
    #5_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c64 + c64l, f8 + f64 + f64l + 1);
    $finish;
  end

  initial begin
    wait (d8 && d64 && d64l);
    $display("cycles (Szabo-Tanaka / Kawamura): 8 ch %0d / %0d, 64 ch %0d / %0d, 64 ch long delays %0d / %0d",
             st8, k8, st64, k64, st64l, k64l);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c64 + c64l, f8 + f64 + f64l);
    $finish;
  end
endmodule
