// tb_pcsa: checks the sense amplifier model against the paper's two
// simulated operating points at 0.6 V (LRS/HRS 20k/350k resolves in 50 ns,
// HRS/HRS 320k/350k in 200 ns), the output polarity (R_BL < R_BLb gives
// Q = 1), the precharge state, the abandoned read when SEN falls early,
// the never-resolving equal pair, and random pairs against the switching
// time formula t = 40 ns + 0.5 ns/kOhm * min(R). A second instance with a
// 20 % spread is read 200 times on a 60k/350k pair (nominal 70 ns): every
// switching time must lie within 56-84 ns, and reads on both sides of the
// 70 ns window must occur.
module tb_pcsa;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic sen;
  logic [31:0] r_bl, r_blb;
  logic q, qb;

  pcsa dut (.sen, .r_bl, .r_blb, .q, .qb);

  // Second instance with a +-20 % read-to-read spread of the switching time.
  logic q2, qb2;
  pcsa #(.SPREAD_PCT(20)) dut_spread (.sen, .r_bl, .r_blb, .q(q2), .qb(qb2));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", msg, $realtime); end
  endtask

  // Sense once; t_sw is the time at which Q and Qb separated (0: never
  // within 'window' ns).
  realtime t_sw;
  task automatic sense(input int unsigned rbl, input int unsigned rblb,
                       input realtime window);
    realtime t0;
    sen = 0; r_bl = rbl; r_blb = rblb;
    #20;
    check(q && qb, "precharged");
    sen = 1; t0 = $realtime;
    t_sw = 0;
    fork
      begin wait (q != qb); t_sw = $realtime - t0; end
      begin #(window); end
    join_any
    disable fork;
    if (t_sw != 0) begin
      #1;
      check(q == (rbl < rblb) && qb == !(rbl < rblb), "polarity");
    end
    sen = 0;
    #1;
  endtask

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t;
    sen = 0; r_bl = 0; r_blb = 0;
    sense(20_000, 350_000, 500); t = t_sw;
    check(t > 49.9 && t < 50.1, $sformatf("LRS/HRS 20k/350k: %0.2f ns, paper 50 ns", t));
    sense(350_000, 20_000, 500); t = t_sw;
    check(t > 49.9 && t < 50.1, "HRS/LRS resolves in 50 ns (polarity checked in sense)");
    sense(320_000, 350_000, 500); t = t_sw;
    check(t > 199.9 && t < 200.1, $sformatf("HRS/HRS 320k/350k: %0.2f ns, paper 200 ns", t));
    sense(100_000, 100_000, 1000); t = t_sw;
    check(t == 0, "equal pair never resolves");
    // abandon: SEN low after 30 ns on a pair that needs 50 ns
    sen = 0; r_bl = 20_000; r_blb = 350_000;
    #20 sen = 1;
    #30 sen = 0;
    #100;
    check(q && qb, "abandoned read stays precharged");
    for (int i = 0; i < 50; i++) begin
      int unsigned a, b;
      real expv;
      a = $urandom_range(5_000, 600_000);
      b = $urandom_range(5_000, 600_000);
      if (a == b) b = a + 1;
      expv = 40.0 + 0.5 * real'((a < b) ? a : b) / 1000.0;
      sense(a, b, 1000); t = t_sw;
      check(t > expv - 0.01 && t < expv + 0.01, $sformatf("%0d/%0d: %0.3f expected %0.3f", a, b, t, expv));
    end
    begin
      int early, late;
      realtime t0, t2;
      early = 0; late = 0;
      for (int i = 0; i < 200; i++) begin
        sen = 0; r_bl = 60_000; r_blb = 350_000;
        #20;
        sen = 1; t0 = $realtime;
        wait (q2 != qb2);
        t2 = $realtime - t0;
        check(t2 >= 55.99 && t2 <= 84.01 && q2 == 1, $sformatf("spread read %0.2f ns", t2));
        if (t2 < 70.0) early++; else late++;
        #5 sen = 0;
        #1;
      end
      $display("spread 20 %%: %0d of 200 reads resolved before 70 ns", early);
      check(early > 20 && late > 20, "spread gives reads on both sides of 70 ns");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
