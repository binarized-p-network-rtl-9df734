// bpn_ctrl: layer sequencer for one BPN inference.
//
// An inference is the five layers of the network run one after another: the
// first convolution (MAC + threshold), two binary convolutions, the hidden
// binary FC layer and the output FC layer whose results are scaled into the
// action preferences. On start the controller pulses l_start[0], waits for
// l_done[0], pulses l_start[1] on the same cycle, and so on; after l_done[4]
// it waits FLUSH cycles for the scaling stage to drain and then pulses done.
// busy is high from the cycle after start until done. A start while busy is
// ignored. Running the layers strictly in sequence (no layer pipelining) is
// this design's choice.
module bpn_ctrl #(
  parameter int unsigned NL    = 5,
  parameter int unsigned FLUSH = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [NL-1:0] l_start,
  input  logic [NL-1:0] l_done
);
  typedef enum logic [1:0] {IDLE, LAYER, DRAIN} state_e;

  state_e state;
  logic [$clog2(NL+1)-1:0]    layer;
  logic [$clog2(FLUSH+2)-1:0] flush_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      layer     <= '0;
      flush_cnt <= '0;
      l_start   <= '0;
      done      <= 1'b0;
    end else begin
      l_start <= '0;
      done    <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state      <= LAYER;
          layer      <= '0;
          l_start[0] <= 1'b1;
        end
        LAYER: if (l_done[layer]) begin
          if (32'(layer) == NL-1) begin
            state     <= DRAIN;
            flush_cnt <= '0;
          end else begin
            layer            <= layer + 1'b1;
            l_start[layer+1] <= 1'b1;
          end
        end
        DRAIN: begin
          if (32'(flush_cnt) == FLUSH) begin
            state <= IDLE;
            done  <= 1'b1;
          end else flush_cnt <= flush_cnt + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy = (state != IDLE);
endmodule
