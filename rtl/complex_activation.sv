// complex_activation: complex activation layer that applies a real activation
// function to the real part and to the imaginary part separately
// (f(a + jb) = f(a) + j f(b)). The function is ReLU, which makes this the
// usual CReLU; the paper does not name the function, so ReLU is a choice of
// this design.
//
// The two mappings of the paper for this class of layer are both built:
//   * LATENCY_OPT: two activation engines, one per part, in parallel.
//     One element per cycle, one cycle latency.
//   * RESOURCE_OPT: one engine shared by both parts; the real part is handled
//     in the first cycle and the imaginary part in the second. One element
//     every two cycles, two cycles latency.
// The stream carries an element index that passes through unchanged.
module complex_activation
  import cvnn_pkg::*;
#(
  parameter mapping_t MAPPING = LATENCY_OPT
) (
  input  logic   clk,
  input  logic   rst_n,
  input  cbeat_t in_beat,
  output cbeat_t out_beat
);

  function automatic data_t relu(data_t x);
    return (x < 0) ? data_t'(0) : x;
  endfunction

  if (MAPPING == LATENCY_OPT) begin : g_latency_opt
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_beat <= '0;
      else begin
        out_beat.valid   <= in_beat.valid;
        out_beat.idx     <= in_beat.idx;
        out_beat.data.re <= relu(in_beat.data.re);   // engine 1
        out_beat.data.im <= relu(in_beat.data.im);   // engine 2
      end
    end
  end else begin : g_resource_opt
    cbeat_t held;
    logic   ph2;
    data_t  eng_in, eng_out;

    assign eng_in  = ph2 ? held.data.im : in_beat.data.re;
    assign eng_out = relu(eng_in);                   // the single engine

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        held <= '0; ph2 <= 1'b0; out_beat <= '0;
      end else begin
        ph2            <= in_beat.valid;
        out_beat.valid <= ph2;
        if (in_beat.valid) begin                     // cycle 1: real part
          held         <= in_beat;
          held.data.re <= eng_out;
        end
        if (ph2) begin                               // cycle 2: imaginary part
          out_beat.idx     <= held.idx;
          out_beat.data.re <= held.data.re;
          out_beat.data.im <= eng_out;
        end
      end
    end

    assert property (@(posedge clk) disable iff (!rst_n) in_beat.valid |=> !in_beat.valid)
      else $error("complex_activation: resource-opt accepts one element every two cycles");
  end

endmodule
