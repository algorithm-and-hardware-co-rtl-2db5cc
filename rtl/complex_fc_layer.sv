// complex_fc_layer: complex-valued fully connected layer computed on one
// complex MAC engine.
//
// out[o] = sum over i of W[o][i] * X[i] in complex arithmetic: the real
// result is WR*XR - WI*XI and the imaginary result WR*XI + WI*XR, the same
// four sub-operations as the convolution. The layer walks o, then i, feeding
// one product per MAC initiation interval (every cycle for LATENCY_OPT,
// every second cycle for RESOURCE_OPT) to complex_mac_engine; each finished
// sum is brought back to the data format with saturation and leaves on
// `out_beat` with index o. Sequential evaluation on one engine and the absence
// of a bias term are choices of this design.
//
// Memory layouts (one cycle read latency):
//   input  X[i]     at i
//   weight W[o][i]  at o*IN_N + i
//
// Timing: a pulse on `start` begins the layer; `done` pulses together with the
// last output beat. Total cycles are about OUT_N*IN_N*II plus a few.
//
// What follows the paper: fully connected layers use the same four
// sub-operations as convolution and the same two mapping schemes.
module complex_fc_layer
  import cvnn_pkg::*;
#(
  parameter int       IN_N    = 400,
  parameter int       OUT_N   = 120,
  parameter mapping_t MAPPING = LATENCY_OPT,
  parameter int       IFM_AW  = $clog2(IN_N),
  parameter int       W_AW    = $clog2(OUT_N*IN_N)
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

  localparam int II = (MAPPING == LATENCY_OPT) ? 1 : 2;

  int unsigned o, i;
  logic        running, tick, issue;
  logic        d_valid, d_first, d_last;
  logic        mac_v;
  cacc_t       mac_acc;
  logic [IDX_W-1:0] out_cnt;

  assign issue    = running && (II == 1 || !tick);
  assign ifm_addr = IFM_AW'(i);
  assign w_addr   = W_AW'(o*IN_N + i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; tick <= 1'b0; o <= 0; i <= 0;
    end else if (start && !busy) begin
      running <= 1'b1; tick <= 1'b0; o <= 0; i <= 0;
    end else if (running) begin
      tick <= (II == 2) ? !tick : 1'b0;
      if (issue) begin
        if (i != IN_N-1) i <= i + 1;
        else begin
          i <= 0;
          if (o != OUT_N-1) o <= o + 1;
          else running <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_first <= 1'b0; d_last <= 1'b0;
    end else begin
      d_valid <= issue;
      d_first <= (i == 0);
      d_last  <= (i == IN_N-1);
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
        if (int'(out_cnt) == OUT_N-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
