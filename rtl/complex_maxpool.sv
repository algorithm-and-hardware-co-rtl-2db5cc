// complex_maxpool: complex max pooling (2x2 window, stride 2) that pools the
// real parts and the imaginary parts separately, as the paper describes for
// complex pooling layers: out.re = max of the four re, out.im = max of the
// four im. The window size and the choice of max (rather than average)
// pooling are choices of this design.
//
// The layer reads its input feature map (channel-major, C x H x W, one cycle
// read latency) one element per read and keeps a running maximum per part.
//   * LATENCY_OPT: two comparison engines, one per part, work in parallel;
//     one element is read every cycle, one output per 4 cycles.
//   * RESOURCE_OPT: one comparison engine is shared; it handles the real part
//     of an element in one cycle and the imaginary part in the next, so one
//     element is read every two cycles, one output per 8 cycles.
// Outputs leave on `out_beat` with the channel-major flat index
// c*(H/2)*(W/2) + oy*(W/2) + ox. `done` pulses with the last output.
module complex_maxpool
  import cvnn_pkg::*;
#(
  parameter int       C       = 6,
  parameter int       H       = 28,
  parameter int       W       = 28,
  parameter mapping_t MAPPING = LATENCY_OPT,
  parameter int       IFM_AW  = $clog2(C*H*W)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [IFM_AW-1:0] ifm_addr,
  input  cplx_t             ifm_data,
  output cbeat_t            out_beat
);

  localparam int OH    = H / 2;
  localparam int OW    = W / 2;
  localparam int N_OUT = C * OH * OW;
  localparam int II    = (MAPPING == LATENCY_OPT) ? 1 : 2;

  function automatic data_t max2(data_t a, data_t b);
    return (a > b) ? a : b;
  endfunction

  int unsigned c, oy, ox, dy, dx;
  logic        running, tick, issue;
  logic        d_valid, d_first, d_last;
  data_t       max_re, max_im;
  logic [IDX_W-1:0] out_cnt;

  assign issue    = running && (II == 1 || !tick);
  assign ifm_addr = IFM_AW'(c*H*W + (2*oy+dy)*W + (2*ox+dx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; tick <= 1'b0;
      c <= 0; oy <= 0; ox <= 0; dy <= 0; dx <= 0;
    end else if (start && !busy) begin
      running <= 1'b1; tick <= 1'b0;
      c <= 0; oy <= 0; ox <= 0; dy <= 0; dx <= 0;
    end else if (running) begin
      tick <= (II == 2) ? !tick : 1'b0;
      if (issue) begin
        if (dx != 1) dx <= 1;
        else begin
          dx <= 0;
          if (dy != 1) dy <= 1;
          else begin
            dy <= 0;
            if (ox != OW-1) ox <= ox + 1;
            else begin
              ox <= 0;
              if (oy != OH-1) oy <= oy + 1;
              else begin
                oy <= 0;
                if (c != C-1) c <= c + 1;
                else running <= 1'b0;
              end
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_first <= 1'b0; d_last <= 1'b0;
    end else begin
      d_valid <= issue;
      d_first <= (dy == 0) && (dx == 0);
      d_last  <= (dy == 1) && (dx == 1);
    end
  end

  logic  res_v;      // a finished window this cycle
  data_t res_re, res_im;

  if (MAPPING == LATENCY_OPT) begin : g_latency_opt
    data_t n_re, n_im;
    assign n_re = d_first ? ifm_data.re : max2(max_re, ifm_data.re);   // engine 1
    assign n_im = d_first ? ifm_data.im : max2(max_im, ifm_data.im);   // engine 2
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin max_re <= '0; max_im <= '0; end
      else if (d_valid) begin max_re <= n_re; max_im <= n_im; end
    end
    assign res_v  = d_valid && d_last;
    assign res_re = n_re;
    assign res_im = n_im;
  end else begin : g_resource_opt
    logic  ph2, h_first, h_last;
    data_t h_im, e_a, e_b, e_out;
    // The single engine: real part in phase 1, imaginary part in phase 2.
    assign e_a   = ph2 ? max_im : max_re;
    assign e_b   = ph2 ? h_im   : ifm_data.re;
    assign e_out = (ph2 ? h_first : d_first) ? e_b : max2(e_a, e_b);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        max_re <= '0; max_im <= '0; ph2 <= 1'b0;
        h_im <= '0; h_first <= 1'b0; h_last <= 1'b0;
      end else begin
        ph2 <= d_valid;
        if (d_valid) begin
          max_re  <= e_out;
          h_im    <= ifm_data.im;
          h_first <= d_first;
          h_last  <= d_last;
        end
        if (ph2) max_im <= e_out;
      end
    end
    assign res_v  = ph2 && h_last;
    assign res_re = max_re;
    assign res_im = e_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_beat <= '0; out_cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done           <= 1'b0;
      out_beat.valid <= res_v;
      if (start && !busy) begin
        busy    <= 1'b1;
        out_cnt <= '0;
      end
      if (res_v) begin
        out_beat.idx     <= out_cnt;
        out_beat.data.re <= res_re;
        out_beat.data.im <= res_im;
        out_cnt          <= out_cnt + 1'b1;
        if (int'(out_cnt) == N_OUT-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
