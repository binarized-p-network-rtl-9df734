// tb_bpn_ctrl: drives the layer sequencer with five model layer engines of
// different, fixed run times. Checks that each layer is started exactly once
// per inference, only after the previous one reported done, in order 1..5;
// that busy covers the whole inference; that done pulses FLUSH+2 cycles after
// the last layer's done; and that a start while busy is ignored.
module tb_bpn_ctrl;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic [4:0] l_start, l_done;

  bpn_ctrl #(.NL(5), .FLUSH(1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model engines: layer l answers l_start with l_done after dur[l] cycles
  int dur [5] = '{7, 3, 12, 1, 5};
  int cnt [5];
  int starts [5];
  int order [$];
  longint last_done_t;

  always @(posedge clk) begin
    l_done <= '0;
    for (int l = 0; l < 5; l++) begin
      if (l_start[l]) begin
        starts[l]++;
        order.push_back(l);
        cnt[l] = dur[l];
        if (l > 0 && cnt[l-1] != -1) begin
          failures++; $display("layer %0d started before layer %0d finished", l, l-1);
        end
      end else if (cnt[l] > 0) begin
        cnt[l]--;
        if (cnt[l] == 0) begin
          l_done[l] <= 1'b1;
          cnt[l] = -1;
          if (l == 4) last_done_t = $time + 10;
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 3; run++) begin
      longint td;
      foreach (cnt[i]) cnt[i] = 0;
      foreach (starts[i]) starts[i] = 0;
      order.delete();
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      checks++;
      if (!busy) begin failures++; $display("not busy after start"); end
      repeat (10) @(negedge clk);
      start = 1'b1;            // must be ignored
      @(negedge clk);
      start = 1'b0;
      while (!done) begin
        @(negedge clk);
        if (!done && !busy) begin failures++; $display("busy dropped before done"); break; end
      end
      td = $time - 5;          // rising edge at which done was raised
      checks++;
      if ((td - last_done_t) / 10 != 2) begin
        failures++; $display("done %0d cycles after last layer done", (td - last_done_t) / 10);
      end
      checks++;
      if (order.size() != 5 || order[0] != 0 || order[1] != 1 || order[2] != 2 || order[3] != 3 || order[4] != 4) begin
        failures++; $display("layer order %p", order);
      end
      foreach (starts[i]) begin
        checks++;
        if (starts[i] != 1) begin failures++; $display("layer %0d started %0d times", i, starts[i]); end
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
