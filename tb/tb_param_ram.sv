// tb_param_ram: writes every word of a 100-bit x 17 weight RAM (the output
// layer's shape) lane by lane, then reads all words back in random order and
// checks data and the one-cycle read latency. A second pass rewrites only
// lane 1 of some words and checks the other lanes are kept.
module tb_param_ram;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic wr_en = 1'b0;
  logic [4:0] wr_addr = '0, rd_addr = '0;
  logic [2:0] wr_lane = '0;
  logic [31:0] wr_data = '0;
  logic [99:0] rd_data;
  logic [127:0] model [17];

  param_ram #(.WIDTH(100), .DEPTH(17)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, int l, logic [31:0] d);
    wr_en = 1'b1; wr_addr = 5'(a); wr_lane = 3'(l); wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
    model[a][32*l +: 32] = d;
  endtask

  task automatic check_all();
    for (int i = 0; i < 40; i++) begin
      int a;
      a = int'($urandom % 17);
      rd_addr = 5'(a);
      @(negedge clk);       // one clock edge later the word must be there
      checks++;
      if (rd_data !== model[a][99:0]) begin
        failures++;
        $display("addr %0d: got %h expected %h", a, rd_data, model[a][99:0]);
      end
    end
  endtask

  initial begin
    @(negedge clk);
    for (int a = 0; a < 17; a++)
      for (int l = 0; l < 4; l++) wr(a, l, $urandom);
    check_all();
    for (int a = 0; a < 17; a += 3) wr(a, 1, $urandom);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
