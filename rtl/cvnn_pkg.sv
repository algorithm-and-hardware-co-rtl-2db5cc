// cvnn_pkg: types and helpers shared by the complex-valued Bayesian network
// accelerator.
//
// A complex value is carried as a packed pair of signed fixed-point words
// (real part in the upper half, imaginary part in the lower half). All data,
// weights and activations use the same Q(DATA_W-FRAC).FRAC format; products
// are accumulated at full width and brought back to DATA_W bits with an
// arithmetic right shift by FRAC and saturation.
//
// A Bayesian layer may put dropout on the real part (R), the imaginary part
// (I) or both (B); this follows the paper. The NONE setting, which turns a
// Bayesian layer off, and all word widths are choices of this design.
// The mapping scheme selects between the two hardware mappings of the paper:
// latency-opt (one engine per sub-operation, all parts in parallel) and
// resource-opt (engines shared, real and imaginary inputs in two cycles).
package cvnn_pkg;

  parameter int DATA_W = 16;   // width of one part of a complex word
  parameter int FRAC   = 8;    // fraction bits of data and weights
  parameter int ACC_W  = 40;   // accumulator width of a MAC engine
  parameter int IDX_W  = 16;   // element index carried with a stream beat
  parameter int RATE_W = 8;    // drop rate / random number width (Q0.8)

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef struct packed {
    data_t re;
    data_t im;
  } cplx_t;

  typedef struct packed {
    acc_t re;
    acc_t im;
  } cacc_t;

  // One element of a feature map travelling from a layer to the next buffer.
  typedef struct packed {
    logic              valid;
    logic [IDX_W-1:0]  idx;    // flat index, channel-major (c*H*W + y*W + x)
    cplx_t             data;
  } cbeat_t;

  typedef enum logic [1:0] {
    BAYES_NONE = 2'd0,  // no dropout in this layer
    BAYES_R    = 2'd1,  // dropout in the real part only
    BAYES_I    = 2'd2,  // dropout in the imaginary part only
    BAYES_B    = 2'd3   // dropout in both parts
  } bayes_cfg_t;

  typedef enum logic {
    LATENCY_OPT  = 1'b0,
    RESOURCE_OPT = 1'b1
  } mapping_t;

  // Shift an accumulator back to the data format, saturating on overflow.
  function automatic data_t acc_to_data(acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(data_t'({1'b0, {(DATA_W-1){1'b1}}})))
      return {1'b0, {(DATA_W-1){1'b1}}};
    else if (s < acc_t'(data_t'({1'b1, {(DATA_W-1){1'b0}}})))
      return {1'b1, {(DATA_W-1){1'b0}}};
    else
      return data_t'(s);
  endfunction

endpackage
