// tb_xnor_popcount: checks the XNOR-popcount kernel at two widths (16, as a
// convolution channel group, and 100, as the output FC layer) against a
// count of agreeing bits done bit by bit here, on random and corner vectors
// (all agree, none agree).
module tb_xnor_popcount;
  int checks = 0, failures = 0;

  logic [15:0] w16, x16;
  logic [4:0]  c16;
  logic [99:0] w100, x100;
  logic [6:0]  c100;

  xnor_popcount #(.W(16))  u16  (.w(w16),  .x(x16),  .count(c16));
  xnor_popcount #(.W(100)) u100 (.w(w100), .x(x100), .count(c100));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int e16, e100;
      w16 = 16'($urandom); x16 = 16'($urandom);
      for (int i = 0; i < 4; i++) begin
        w100[32*i +: 25] = 25'($urandom);
        x100[32*i +: 25] = 25'($urandom);
      end
      w100 = {$urandom, $urandom, $urandom, $urandom};
      x100 = {$urandom, $urandom, $urandom, $urandom};
      if (t == 0) begin x16 = w16; x100 = w100; end
      if (t == 1) begin x16 = ~w16; x100 = ~w100; end
      #1;
      e16 = 0; e100 = 0;
      for (int i = 0; i < 16; i++)  if (w16[i] == x16[i]) e16++;
      for (int i = 0; i < 100; i++) if (w100[i] == x100[i]) e100++;
      checks += 2;
      if (int'(c16) != e16) begin failures++; $display("W16: got %0d expected %0d", c16, e16); end
      if (int'(c100) != e100) begin failures++; $display("W100: got %0d expected %0d", c100, e100); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
