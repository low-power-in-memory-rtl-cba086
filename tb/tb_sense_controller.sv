// tb_sense_controller: runs reads at the default sizes and checks the
// phase timing cycle by cycle: WL/SL up for the whole read, SEN low for
// 2 precharge cycles then high for exactly 7 cycles (70 ns at 10 ns),
// 'sample' only in the last SEN cycle, 'done' one cycle later, latency 10
// cycles from start, start ignored while busy, latched row address.
module tb_sense_controller;
  localparam int PRE = 2, SEN_C = 7;
  int checks = 0, failures = 0;
  logic       clk = 0, rst_n;
  logic       start;
  logic [4:0] row_addr_in, row_addr;
  logic       wl_drv, sl_drv, sen, sample, busy, done;

  sense_controller dut (.clk, .rst_n, .start, .row_addr_in, .row_addr,
                        .wl_drv, .sl_drv, .sen, .sample, .busy, .done);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; row_addr_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      int unsigned row;
      int sen_cycles, sample_cycle, lat;
      realtime t_sen, t_smp;
      row = $urandom_range(31);
      @(negedge clk);
      check(!busy && !sen && !wl_drv, "idle outputs");
      start = 1; row_addr_in = 5'(row);
      @(negedge clk);
      start = 0; row_addr_in = 5'(row ^ 5'h1f);   // must not be re-latched
      sen_cycles = 0; sample_cycle = -1; lat = 1;
      while (!done) begin
        check(busy && wl_drv && sl_drv, "WL/SL/busy during read");
        check(row_addr == 5'(row), "latched row");
        if (lat <= PRE) check(!sen, "SEN low during precharge");
        if (sen) begin
          sen_cycles++;
          if (sen_cycles == 1) t_sen = $realtime;
        end
        if (sample) begin
          check(sample_cycle == -1, "single sample");
          sample_cycle = lat;
          t_smp = $realtime;
        end
        if (n == 2) start = 1;        // start while busy: ignored
        @(negedge clk);
        lat++;
      end
      start = 0;
      check(lat == PRE + SEN_C + 1, $sformatf("latency %0d", lat));
      check(sen_cycles == SEN_C, $sformatf("SEN cycles %0d", sen_cycles));
      check(sample_cycle == PRE + SEN_C, "sample in last SEN cycle");
      // capture edge = one clock after the sample cycle starts
      check((t_smp + 10.0) - t_sen == 70.0, "capture 70 ns after SEN rises");
      check(!sen && !wl_drv, "SEN and WL low with done");
      @(negedge clk);
      check(!done && !busy, "done is one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
