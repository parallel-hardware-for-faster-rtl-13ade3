// control_unit_tb -- both control schemes side by side under random input traffic.
//
// Non-pipelined: a cycle-level model of the five-state sequence predicts in_ready, the
// one-hot load pattern and out_valid; with in_valid held high it must accept exactly
// one word every five cycles.  Pipelined: every load high, in_ready high, and out_valid
// equal to in_valid five cycles earlier.
module control_unit_tb;
  logic clk = 0, rst;
  logic in_valid;
  logic rdy_p, rdy_n, ov_p, ov_n;
  logic [4:0] ld_p, ld_n;
  int checks = 0, failures = 0;

  control_unit #(.PIPELINED(1'b1)) dut_p (.clk, .rst, .in_valid, .in_ready(rdy_p), .ld(ld_p), .out_valid(ov_p));
  control_unit #(.PIPELINED(1'b0)) dut_n (.clk, .rst, .in_valid, .in_ready(rdy_n), .ld(ld_n), .out_valid(ov_n));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int   ph = 0;         // model phase of the non-pipelined unit, 0 = S1
    bit   ov_exp_n = 0;
    bit   hist [$];       // in_valid history for the pipelined unit
    int   accepted = 0, first_acc = -1, last_acc = -1;
    rst = 1; in_valid = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 5; i++) hist.push_back(0);
    for (int cyc = 0; cyc < 600; cyc++) begin
      // first 300 cycles random traffic, then continuous
      in_valid = (cyc < 300) ? ($urandom_range(2) != 0) : 1'b1;
      #1;
      // non-pipelined
      check(rdy_n == (ph == 0), "np in_ready");
      check(ld_n == ((ph == 0) ? {4'b0, in_valid} : 5'(1 << ph)), $sformatf("np ld=%b ph=%0d", ld_n, ph));
      check(ov_n == ov_exp_n, "np out_valid");
      // pipelined
      check(rdy_p && ld_p == 5'b11111, "p in_ready/ld");
      check(ov_p == hist[0], "p out_valid");
      @(posedge clk);
      // advance the models
      ov_exp_n = (ph == 4);
      if (ph == 0) begin
        if (in_valid) begin
          ph = 1;
          if (cyc >= 300) begin
            accepted++;
            if (first_acc < 0) first_acc = cyc;
            last_acc = cyc;
          end
        end
      end else ph = (ph + 1) % 5;
      hist.pop_front();
      hist.push_back(in_valid);
      #1;
    end
    // Throughput of the non-pipelined unit: one word per five cycles.
    check(accepted > 10 && (last_acc - first_acc) == 5 * (accepted - 1),
          $sformatf("np rate: %0d words from cycle %0d to %0d", accepted, first_acc, last_acc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
