// si_pkg -- types and constants shared by the near-storage update accelerator.
//
// The accelerator in each computational storage device updates the FP32 master
// parameters and optimizer states of the slice of the flattened model that the
// device owns. Data lives in the device DRAM ("accelerator memory"), addressed here in
// words of LANES FP32 elements (512 bits for LANES = 16, the width of the
// 16-lane AXPBY unit). The optimizer selection covers the three updaters the design
// was built for: Adam (default), SGD with momentum and AdaGrad.
package si_pkg;
  import fp32_pkg::*;

  // Elements per memory word and per SIMD vector: the AXPBY block has 16 lanes.
  localparam int unsigned LANES      = 16;
  localparam int unsigned WORD_W     = LANES * 32;
  // 4 GB of device DRAM in 64-byte words -> 26-bit word address.
  localparam int unsigned MEM_AW     = 26;
  // Element counts and indices inside one device's share of the model.
  localparam int unsigned IDX_W      = 32;
  localparam int unsigned CNT_W      = 32;

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [MEM_AW-1:0] waddr_t;
  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [CNT_W-1:0]  cnt_t;

  typedef enum logic [1:0] {
    OPT_ADAM    = 2'd0,
    OPT_SGD_MOM = 2'd1,
    OPT_ADAGRAD = 2'd2
  } opt_e;

  // Coefficients written by the host for one update call.
  //   Adam   : m' = alpha_m*m + beta_m*g ; v' = alpha_v*v + beta_v*g*g
  //            p' = p - step * m' / (sqrt(v')*denom_scale + eps)
  //   SGD    : m' = alpha_m*m + beta_m*g ; p' = p - step * m'
  //   AdaGrad: v' = alpha_v*v + beta_v*g*g ; p' = p - step * g / (sqrt(v')*denom_scale + eps)
  // Adam bias corrections are folded into step (lr / (1 - b1^t)) and
  // denom_scale (1 / sqrt(1 - b2^t)) by the host.
  typedef struct packed {
    fp32_t alpha_m;
    fp32_t beta_m;
    fp32_t alpha_v;
    fp32_t beta_v;
    fp32_t step;
    fp32_t denom_scale;
    fp32_t eps;
  } opt_coef_t;

  // Word base addresses of the arrays of one subgroup in accelerator memory.
  typedef struct packed {
    waddr_t param;
    waddr_t mmt;
    waddr_t var_;
    waddr_t grad;
    waddr_t cidx;   // compressed gradients: indices
    waddr_t cval;   // compressed gradients: values
  } region_t;

endpackage
