// mc_aggregator: turns the outputs of S Monte-Carlo forward passes into a
// prediction and an uncertainty, per output and per part.
//
// In dropout-based Bayesian inference the network is run S times with fresh
// dropout masks; the mean of the S outputs is the prediction and their
// standard deviation measures the uncertainty. This block keeps, for each of
// the N_OUT outputs and for the real and imaginary parts separately, the sum
// s and the sum of squares q of the samples. After the S-th pass it streams
//   mean = s / S
//   std  = floor(sqrt((S*q - s^2) / S^2))    (population standard deviation)
// both in the data format (the square root of a Q.2FRAC variance is a Q.FRAC
// standard deviation); std saturates at the largest positive data value.
//
// How: the standard deviation is computed as isqrt(S*q - s^2) / S, which is
// the same integer as the formula above (for integers v >= 0 and S > 0,
// floor(sqrt(floor(v/S^2))) = floor(floor(sqrt(v))/S)). One output at a time,
// a load cycle forms S*q - s^2 for both parts, two digit-by-digit square root
// units (one per part) then run one result bit per cycle for ROOT_BITS
// cycles, and an output cycle divides by the constant S and registers the
// result. Sums must stay within 32 bits for the s^2 product, which holds
// for S < 65536.
//
// What follows the paper: mean as prediction, standard deviation as
// uncertainty, over S samples. Choices of this design: the statistics are
// taken per part, division truncates, and the iterative square root.
//
// Interface: `clear` empties the sums and the sample count. Each beat on
// `in_beat` adds output `idx` of the current pass; `sample_done` closes a
// pass. After the S-th `sample_done` the block streams N_OUT results on
// `res_valid`/`res_idx`/`res_mean`/`res_std`, then pulses `all_done` together
// with the last result. res_idx has the common IDX_W width; bits above
// clog2(N_OUT) stay zero.
//
// Timing: results come one every ROOT_BITS + 2 = 34 cycles (one load cycle,
// ROOT_BITS square-root steps, one output cycle); the first is valid 34 cycles
// after the clock edge that samples the closing `sample_done`.
// Beats and `sample_done` must not arrive while results are being produced.
module mc_aggregator
  import cvnn_pkg::*;
#(
  parameter int N_OUT = 10,
  parameter int S     = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  cbeat_t           in_beat,
  input  logic             sample_done,
  output logic             res_valid,
  output logic [IDX_W-1:0] res_idx,
  output cplx_t            res_mean,
  output cplx_t            res_std,
  output logic             all_done
);

  localparam int OW = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int SW = $clog2(S + 1);

  typedef logic signed [63:0] wide_t;

  wide_t           sum_re [N_OUT];
  wide_t           sum_im [N_OUT];
  wide_t           sq_re  [N_OUT];
  wide_t           sq_im  [N_OUT];
  logic [SW-1:0]   n_samp;
  typedef enum logic [1:0] {E_IDLE, E_LOAD, E_ROOT, E_OUT} emit_t;
  localparam int ROOT_BITS = 32;               // result bits of isqrt(64-bit)

  emit_t           e_state;
  logic [OW-1:0]   e_idx;
  logic [63:0]     rem_re, rem_im, root_re, root_im, bitpos;

  function automatic data_t mean_of(wide_t s);
    return data_t'(s / wide_t'(S));
  endfunction

  // S*q - s^2, clamped at zero (it is never negative for exact sums).
  function automatic logic [63:0] var_of(logic signed [31:0] s32, wide_t q);
    wide_t v;
    v = wide_t'(S) * q - wide_t'(s32) * wide_t'(s32);
    return (v < 0) ? '0 : 64'(v);
  endfunction

  function automatic data_t std_of(logic [63:0] root);
    logic [63:0] r;
    r = root / 64'(S);
    return (r > 64'(2**(DATA_W-1) - 1)) ? data_t'(2**(DATA_W-1) - 1) : data_t'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_samp <= '0; e_state <= E_IDLE; e_idx <= '0;
      rem_re <= '0; rem_im <= '0; root_re <= '0; root_im <= '0; bitpos <= '0;
      res_valid <= 1'b0; res_idx <= '0; res_mean <= '0; res_std <= '0;
      all_done <= 1'b0;
      for (int o = 0; o < N_OUT; o++) begin
        sum_re[o] <= '0; sum_im[o] <= '0; sq_re[o] <= '0; sq_im[o] <= '0;
      end
    end else begin
      res_valid <= 1'b0;
      all_done  <= 1'b0;
      if (clear) begin
        n_samp <= '0; e_state <= E_IDLE;
        for (int o = 0; o < N_OUT; o++) begin
          sum_re[o] <= '0; sum_im[o] <= '0; sq_re[o] <= '0; sq_im[o] <= '0;
        end
      end else begin
        if (in_beat.valid && int'(in_beat.idx) < N_OUT) begin
          sum_re[OW'(in_beat.idx)] <= sum_re[OW'(in_beat.idx)] + wide_t'(in_beat.data.re);
          sum_im[OW'(in_beat.idx)] <= sum_im[OW'(in_beat.idx)] + wide_t'(in_beat.data.im);
          sq_re[OW'(in_beat.idx)]  <= sq_re[OW'(in_beat.idx)]
                                      + wide_t'(in_beat.data.re) * wide_t'(in_beat.data.re);
          sq_im[OW'(in_beat.idx)]  <= sq_im[OW'(in_beat.idx)]
                                      + wide_t'(in_beat.data.im) * wide_t'(in_beat.data.im);
        end
        if (sample_done) begin
          n_samp <= n_samp + 1'b1;
          if (int'(n_samp) == S-1) begin
            e_state <= E_LOAD;
            e_idx   <= '0;
          end
        end
        unique case (e_state)
          E_IDLE: ;
          E_LOAD: begin
            rem_re  <= var_of(sum_re[e_idx][31:0], sq_re[e_idx]);
            rem_im  <= var_of(sum_im[e_idx][31:0], sq_im[e_idx]);
            root_re <= '0;
            root_im <= '0;
            bitpos  <= 64'd1 << (2*ROOT_BITS - 2);
            e_state <= E_ROOT;
          end
          E_ROOT: begin
            // One step of the digit-by-digit square root for each part.
            if (rem_re >= (root_re | bitpos)) begin
              rem_re  <= rem_re - (root_re | bitpos);
              root_re <= (root_re >> 1) | bitpos;
            end else begin
              root_re <= root_re >> 1;
            end
            if (rem_im >= (root_im | bitpos)) begin
              rem_im  <= rem_im - (root_im | bitpos);
              root_im <= (root_im >> 1) | bitpos;
            end else begin
              root_im <= root_im >> 1;
            end
            bitpos <= bitpos >> 2;
            if (bitpos == 64'd1) e_state <= E_OUT;
          end
          E_OUT: begin
            res_valid   <= 1'b1;
            res_idx     <= IDX_W'(e_idx);
            res_mean.re <= mean_of(sum_re[e_idx]);
            res_mean.im <= mean_of(sum_im[e_idx]);
            res_std.re  <= std_of(root_re);
            res_std.im  <= std_of(root_im);
            if (int'(e_idx) == N_OUT-1) begin
              e_state  <= E_IDLE;
              all_done <= 1'b1;
              n_samp   <= '0;
            end else begin
              e_idx   <= e_idx + 1'b1;
              e_state <= E_LOAD;
            end
          end
          default: e_state <= E_IDLE;
        endcase
      end
    end
  end

  // Results are produced from the sums, so they must not change meanwhile.
  property no_input_while_emitting;
    @(posedge clk) disable iff (!rst_n)
      (e_state != E_IDLE) |-> !(in_beat.valid || sample_done);
  endproperty
  assert property (no_input_while_emitting)
    else $error("mc_aggregator: input while results are being produced");

endmodule
