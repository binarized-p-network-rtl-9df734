// tb_fmap_ram: fills a 16-bit x 49 feature-map buffer (layer 3's shape),
// reads it back in random order while writing elsewhere, and checks data and
// the one-cycle read latency.
module tb_fmap_ram;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic we = 1'b0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [49];

  fmap_ram #(.WIDTH(16), .DEPTH(49)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < 49; a++) begin
      we = 1'b1; waddr = 6'(a); wdata = 16'($urandom); model[a] = wdata;
      @(negedge clk);
    end
    we = 1'b0;
    for (int i = 0; i < 200; i++) begin
      int a, b;
      a = int'($urandom % 49);
      b = int'($urandom % 49);
      raddr = 6'(a);
      // concurrent write to a different address
      we = (a != b); waddr = 6'(b); wdata = 16'($urandom);
      @(negedge clk);
      if (a != b) model[b] = wdata;
      we = 1'b0;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("addr %0d: got %h expected %h", a, rdata, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
