// tb_image_buffer: writes a full 6x84x84 observation, four pixels per word,
// then reads random pixels and checks each arrives one cycle after its index.
module tb_image_buffer;
  import bpn_pkg::*;
  localparam int NPIX = IMG_C * IMG_H * IMG_H;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic wr_en = 1'b0;
  logic [13:0] wr_word = '0;
  logic [31:0] wr_data = '0;
  logic [15:0] rd_idx = '0;
  logic [7:0]  rd_pix;
  byte unsigned pix [NPIX];

  image_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (pix[i]) pix[i] = byte'($urandom);
    @(negedge clk);
    for (int j = 0; j < NPIX / 4; j++) begin
      wr_en = 1'b1; wr_word = 14'(j);
      wr_data = {pix[4*j+3], pix[4*j+2], pix[4*j+1], pix[4*j]};
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      int p;
      p = (i < 4) ? i : int'($urandom % NPIX);
      rd_idx = 16'(p);
      @(negedge clk);
      checks++;
      if (rd_pix != pix[p]) begin
        failures++;
        $display("pixel %0d: got %0d expected %0d", p, rd_pix, pix[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
