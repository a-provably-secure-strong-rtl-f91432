// tb_lpuf_controller -- checks the sequencer's protocol and cycle counts for
// P2 = 1 and P2 = 16: one cap_seed/incr per start, exactly 256/P2 load
// clocks with load_idx counting 0,1,..., b_ready only after the load, one
// init per accepted b' beat, exactly 1280/P2 step clocks with run_idx
// counting up, one r_valid after each run, and return to idle only after the
// beat flagged b_last. b_valid is raised after random delays, so the
// controller is also seen waiting for b'.
module tb_lpuf_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, done = 0;

  localparam int P2S [2] = '{1, 16};

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (done == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int unsigned P2 = P2S[g];
    localparam int LW = $clog2(256 / P2 + 1);
    localparam int RW = $clog2(1280 / P2 + 1);
    logic start, start_ready, b_valid, b_last, b_ready, cap_seed, incr;
    logic load, init, step, r_valid, busy;
    logic [LW-1:0] load_idx;
    logic [RW-1:0] run_idx;
    int waits = 0;

    lpuf_controller #(.P2(P2)) dut (.*);

    task automatic check(input logic cond, input string what);
      checks++;
      if (!cond) begin
        failures++;
        if (failures < 20) $display("FAIL P2=%0d: %s", P2, what);
      end
    endtask

    initial begin
      int nload, nstep, nbits;
      start = 0; b_valid = 0; b_last = 0;
      @(posedge rst_n);
      @(negedge clk);
      for (int ch = 0; ch < 3; ch++) begin
        nbits = 1 + ch * 2;
        check(start_ready && !busy, "idle before start");
        start = 1;
        #1;
        check(cap_seed && incr, "cap_seed and incr with start");
        @(negedge clk);
        start = 0;
        check(!cap_seed && !start_ready, "cap_seed is one clock");
        nload = 0;
        while (load) begin
          check(int'(load_idx) == nload && !b_ready, "load index");
          nload++;
          @(negedge clk);
        end
        check(nload == 256 / P2, $sformatf("load lasted %0d clocks", nload));
        for (int bi = 0; bi < nbits; bi++) begin
          int d;
          d = $urandom % 4;
          repeat (d) begin
            check(b_ready && !step && !r_valid, "waiting for b'");
            waits++;
            @(negedge clk);
          end
          b_valid = 1; b_last = (bi == nbits - 1);
          #1;
          check(b_ready && init, "beat accepted with init");
          @(negedge clk);
          b_valid = 0; b_last = 0;
          nstep = 0;
          while (step) begin
            check(int'(run_idx) == nstep && !init && !b_ready, "run index");
            nstep++;
            @(negedge clk);
          end
          check(nstep == 1280 / P2, $sformatf("run lasted %0d clocks", nstep));
          check(r_valid, "r_valid after run");
          @(negedge clk);
          check(!r_valid, "r_valid is one clock");
          if (bi == nbits - 1) check(start_ready, "idle after last");
          else                 check(b_ready, "ready for next b'");
        end
      end
      check(waits > 0, "controller waited for b' at least once");
      done++;
    end
  end
endmodule
