// bfc_layer: binary fully-connected layer engine (XNOR - popcount).
//
// Used for layer 4, FC(N) with N = 100 hidden neurons over the 784 flattened
// outputs of layer 3, and for layer 5, FC(|A|) with 17 outputs over those 100
// hidden bits. For each output neuron n the engine reads the input vector in
// NCH = N_IN/CHUNK slices of CHUNK bits, XNOR-popcounts each slice with the
// matching weight slice and accumulates; the +-1 dot product
// o = 2*count - N_IN is then emitted on the o_valid/o_idx/o_val stream. The
// consumer applies the threshold activation (layer 4) or the lambda scaling
// (layer 5), so this engine has no threshold of its own.
//
// Memory layout: input slice k at in_addr = k; weight slice k of neuron n at
// w_addr = n*NCH + k. Both reads take one cycle.
//
// Timing: start pulse; slices issued on N_OUT*NCH consecutive cycles from the
// cycle after start; o_valid for neuron n is high on the cycle its last
// slice's data arrives; done pulses on the cycle after the last o_valid.
// Slice width and memory layout are this design's choices.
module bfc_layer
  import bpn_pkg::*;
#(
  parameter int unsigned N_IN  = N_FLAT,
  parameter int unsigned N_OUT = N_HID,
  parameter int unsigned CHUNK = C3,
  parameter int unsigned NCH   = N_IN / CHUNK,
  parameter int unsigned I_AW  = (NCH > 1) ? $clog2(NCH) : 1,
  parameter int unsigned W_AW  = (N_OUT * NCH > 1) ? $clog2(N_OUT * NCH) : 1,
  parameter int unsigned N_AW  = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  parameter int unsigned O_W   = $clog2(N_IN + 1) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // input vector read port (1-cycle latency)
  output logic [I_AW-1:0]       in_addr,
  input  logic [CHUNK-1:0]      in_data,
  // weight read port (1-cycle latency)
  output logic [W_AW-1:0]       w_addr,
  input  logic [CHUNK-1:0]      w_data,
  // result stream
  output logic                  o_valid,
  output logic [N_AW-1:0]       o_idx,
  output logic signed [O_W-1:0] o_val
);
  localparam int unsigned PCW = $clog2(CHUNK + 1);
  localparam int unsigned AW  = $clog2(N_IN + 1);

  initial assert (N_IN % CHUNK == 0) else $error("N_IN must be a multiple of CHUNK");

  logic              run;
  logic [N_AW-1:0]   n;
  logic [I_AW-1:0]   k;
  logic              sl_first, sl_last, n_last;

  assign sl_first = (k == 0);
  assign sl_last  = (32'(k) == NCH-1);
  assign n_last   = (32'(n) == N_OUT-1);

  always_comb begin
    in_addr = k;
    w_addr  = W_AW'(32'(n) * NCH + 32'(k));
  end

  logic            v_q, first_q, last_q, final_q;
  logic [N_AW-1:0] n_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      n <= '0; k <= '0;
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0; final_q <= 1'b0; n_q <= '0;
      done <= 1'b0;
    end else begin
      v_q     <= run;
      first_q <= sl_first;
      last_q  <= sl_last;
      final_q <= sl_last && n_last;
      n_q     <= n;
      done    <= v_q && last_q && final_q;
      if (start && !busy) begin
        run <= 1'b1;
        n <= '0; k <= '0;
      end else if (run) begin
        if (32'(k) != NCH-1) k <= k + 1'b1;
        else begin
          k <= '0;
          if (32'(n) != N_OUT-1) n <= n + 1'b1;
          else begin
            n   <= '0;
            run <= 1'b0;
          end
        end
      end
    end
  end

  assign busy = run || v_q || done;

  logic [PCW-1:0] cnt;
  logic [AW-1:0]  acc, acc_next;

  xnor_popcount #(.W(CHUNK)) u_pc (.w(w_data), .x(in_data), .count(cnt));

  assign acc_next = (first_q ? AW'(0) : acc) + AW'(cnt);

  always_ff @(posedge clk) begin
    if (v_q) acc <= acc_next;
  end

  assign o_valid = v_q && last_q;
  assign o_idx   = n_q;
  assign o_val   = O_W'(2 * int'(acc_next) - int'(N_IN));
endmodule
