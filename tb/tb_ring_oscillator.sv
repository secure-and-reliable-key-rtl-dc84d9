// tb_ring_oscillator -- self-checking testbench of the ring-oscillator
// behavioural model.
//
// A noiseless RO with 5 stages of 220 ps (half period 1.1 ns, 454.5 MHz) is
// enabled for windows of 11 us and must give 5000 rising edges (+-1); while
// disabled it must stay at 0 with no edges.  A noisy RO (half period within
// +-5 ps) must give counts inside the range that bound allows
// (4977..5023) and not always the same count.
module tb_ring_oscillator;
  timeunit 1ns; timeprecision 1fs;

  logic en0 = 0, en1 = 0;
  logic osc0, osc1;
  int   edges0 = 0, edges1 = 0;

  ring_oscillator #(.N_INV(5), .STAGE_DELAY_FS(220_000), .NOISE_FS(0))     u0 (.en(en0), .osc(osc0));
  ring_oscillator #(.N_INV(5), .STAGE_DELAY_FS(220_000), .NOISE_FS(5_000)) u1 (.en(en1), .osc(osc1));

  always @(posedge osc0) edges0++;
  always @(posedge osc1) edges1++;

  int checks = 0, failures = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int first, distinct;
    #100;
    for (int rep = 0; rep < 3; rep++) begin
      edges0 = 0;
      en0 = 1;
      #11000;
      en0 = 0;
      #10;
      check($sformatf("noiseless count %0d", edges0), edges0 >= 4999 && edges0 <= 5001);
      edges0 = 0;
      #1000;
      check("no edges while disabled", edges0 == 0 && osc0 == 1'b0);
    end
    distinct = 0;
    for (int rep = 0; rep < 10; rep++) begin
      edges1 = 0;
      en1 = 1;
      #11000;
      en1 = 0;
      #10;
      check($sformatf("noisy count %0d", edges1), edges1 >= 4977 && edges1 <= 5023);
      if (rep == 0) first = edges1;
      else if (edges1 != first) distinct++;
    end
    check("noise changes the count", distinct > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
