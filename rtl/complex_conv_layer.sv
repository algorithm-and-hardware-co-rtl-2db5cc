// complex_conv_layer: complex-valued 2-D convolution (valid padding, stride 1)
// computed on one complex MAC engine.
//
// out[oc][oy][ox] = sum over ic, ky, kx of W[oc][ic][ky][kx] * X[ic][oy+ky][ox+kx]
// with complex multiplication, so the real result is WR*XR - WI*XI and the
// imaginary result is WR*XI + WI*XR (the four sub-operations of the paper).
// The layer walks oc, oy, ox, ic, ky, kx in that order and feeds one product
// per MAC initiation interval (every cycle for LATENCY_OPT, every second
// cycle for RESOURCE_OPT) to complex_mac_engine. Each finished sum is shifted
// back to the data format with saturation and leaves on `out_beat`, tagged
// with its channel-major flat index oc*OH*OW + oy*OW + ox.
// Sequential evaluation on one engine, no bias term and the memory layouts
// below are choices of this design; the paper leaves the layer's insides to
// its HLS templates.
//
// Memory layouts (both read through ports with one cycle read latency):
//   input  X[ic][y][x]          at ic*IN_H*IN_W + y*IN_W + x
//   weight W[oc][ic][ky][kx]     at ((oc*IN_C + ic)*K + ky)*K + kx
//
// Timing: a pulse on `start` begins the layer; `done` pulses after the last
// output beat. Total cycles are about OUT_C*OH*OW*IN_C*K*K*II plus a few
// cycles of pipeline latency.
module complex_conv_layer
  import cvnn_pkg::*;
#(
  parameter int       IN_C    = 1,
  parameter int       IN_H    = 32,
  parameter int       IN_W    = 32,
  parameter int       OUT_C   = 6,
  parameter int       K       = 5,
  parameter mapping_t MAPPING = LATENCY_OPT,
  parameter int       IFM_AW  = $clog2(IN_C*IN_H*IN_W),
  parameter int       W_AW    = $clog2(OUT_C*IN_C*K*K)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [IFM_AW-1:0] ifm_addr,
  input  cplx_t             ifm_data,
  output logic [W_AW-1:0]   w_addr,
  input  cplx_t             w_data,
  output cbeat_t            out_beat
);

  localparam int OH    = IN_H - K + 1;
  localparam int OW    = IN_W - K + 1;
  localparam int N_OUT = OUT_C * OH * OW;
  localparam int II    = (MAPPING == LATENCY_OPT) ? 1 : 2;

  int unsigned oc, oy, ox, ic, ky, kx;
  logic        running, tick, issue;
  logic        is_first, is_last;
  logic        d_valid, d_first, d_last;
  logic        mac_v;
  cacc_t       mac_acc;
  logic [IDX_W-1:0] out_cnt;

  assign issue    = running && (II == 1 || !tick);
  assign is_first = (ic == 0) && (ky == 0) && (kx == 0);
  assign is_last  = (ic == IN_C-1) && (ky == K-1) && (kx == K-1);

  assign ifm_addr = IFM_AW'(ic*IN_H*IN_W + (oy+ky)*IN_W + (ox+kx));
  assign w_addr   = W_AW'(((oc*IN_C + ic)*K + ky)*K + kx);

  // Loop counters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; tick <= 1'b0;
      oc <= 0; oy <= 0; ox <= 0; ic <= 0; ky <= 0; kx <= 0;
    end else if (start && !busy) begin
      running <= 1'b1; tick <= 1'b0;
      oc <= 0; oy <= 0; ox <= 0; ic <= 0; ky <= 0; kx <= 0;
    end else if (running) begin
      tick <= (II == 2) ? !tick : 1'b0;
      if (issue) begin
        if (kx != K-1) kx <= kx + 1;
        else begin
          kx <= 0;
          if (ky != K-1) ky <= ky + 1;
          else begin
            ky <= 0;
            if (ic != IN_C-1) ic <= ic + 1;
            else begin
              ic <= 0;
              if (ox != OW-1) ox <= ox + 1;
              else begin
                ox <= 0;
                if (oy != OH-1) oy <= oy + 1;
                else begin
                  oy <= 0;
                  if (oc != OUT_C-1) oc <= oc + 1;
                  else running <= 1'b0;
                end
              end
            end
          end
        end
      end
    end
  end

  // Align the control flags with the memory read latency.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_first <= 1'b0; d_last <= 1'b0;
    end else begin
      d_valid <= issue;
      d_first <= is_first;
      d_last  <= is_last;
    end
  end

  complex_mac_engine #(.MAPPING(MAPPING)) u_mac (
    .clk, .rst_n,
    .in_valid (d_valid),
    .first    (d_first),
    .last     (d_last),
    .w        (w_data),
    .a        (ifm_data),
    .out_valid(mac_v),
    .acc      (mac_acc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_beat <= '0;
      out_cnt  <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
    end else begin
      done           <= 1'b0;
      out_beat.valid <= mac_v;
      if (start && !busy) begin
        busy    <= 1'b1;
        out_cnt <= '0;
      end
      if (mac_v) begin
        out_beat.idx     <= out_cnt;
        out_beat.data.re <= acc_to_data(mac_acc.re);
        out_beat.data.im <= acc_to_data(mac_acc.im);
        out_cnt          <= out_cnt + 1'b1;
        if (int'(out_cnt) == N_OUT-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
