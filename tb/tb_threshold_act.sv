// tb_threshold_act: checks the threshold activation x = (o >= tau) on
// random signed values, on o == tau (must give +1) and on o == tau - 1
// (must give -1).
module tb_threshold_act;
  int checks = 0, failures = 0;
  logic signed [17:0] o, tau;
  logic x;

  threshold_act #(.ACC_W(18)) dut (.o, .tau, .x);

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int oi, ti;
      oi = int'($urandom % 4001) - 2000;
      ti = int'($urandom % 4001) - 2000;
      if (t % 5 == 1) ti = oi;
      if (t % 5 == 2) ti = oi + 1;
      o = 18'(oi); tau = 18'(ti);
      #1;
      checks++;
      if (x != (oi >= ti)) begin
        failures++;
        $display("o=%0d tau=%0d x=%0d", oi, ti, x);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
