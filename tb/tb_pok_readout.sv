// tb_pok_readout -- the one-time interface at the full 6,360 bits: before any
// request nothing is output; the first request streams every raw bit in
// order, bit 0 first, one per clock, with blow_fuse on the last bit only;
// afterwards the interface is locked and further requests produce nothing.
// A second instance sees fuse_blown high from the start and must never
// output anything.
module tb_pok_readout;
  localparam int N = 6360;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] pok;
  logic req, v, ob, bf, lk, v2, ob2, bf2, lk2;

  pok_readout #(.N(N)) dut  (.clk, .rst_n, .pok_raw(pok), .fuse_blown(1'b0),
                             .enroll_req(req), .out_valid(v), .out_bit(ob),
                             .blow_fuse(bf), .locked(lk));
  pok_readout #(.N(N)) dut2 (.clk, .rst_n, .pok_raw(pok), .fuse_blown(1'b1),
                             .enroll_req(req), .out_valid(v2), .out_bit(ob2),
                             .blow_fuse(bf2), .locked(lk2));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  always @(negedge clk) if (rst_n) check(!v2 && !bf2 && lk2, "blown fuse keeps it shut");

  initial begin
    int nout, nbf;
    for (int i = 0; i < N; i++) pok[i] = 1'($urandom);
    req = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (5) begin
      @(negedge clk);
      check(!v && !bf && !lk && ob == 0, "quiet before request");
    end
    req = 1;
    @(negedge clk);
    req = 0;
    nout = 0; nbf = 0;
    while (v) begin
      check(ob == pok[nout], $sformatf("bit %0d", nout));
      if (bf) begin nbf++; check(nout == N - 1, "blow_fuse on last bit"); end
      nout++;
      @(negedge clk);
    end
    check(nout == N && nbf == 1, $sformatf("%0d bits, %0d fuse pulses", nout, nbf));
    check(lk, "locked after readout");
    req = 1;
    repeat (3) @(negedge clk);
    req = 0;
    repeat (20) begin
      @(negedge clk);
      check(!v && !bf && lk, "second request refused");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
