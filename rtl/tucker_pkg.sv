// tucker_pkg: number formats, command encoding and shared helpers of the
// Tucker-decomposition (HOOI) engine.
//
// Number formats follow the fixed-point choices of the design: tensor data
// is 16 bit, matrix data (factor matrices, the unfolded matrix inside the
// SVD, sin/cos) is 27 bit, product terms are 48 bit, and the Jacobi
// quantities alpha, beta, gamma and theta are 32 bit. The positions of the
// binary points are this implementation's choice:
//   * matrix data is Q1.25 (sign, one integer bit, 25 fraction bits), so an
//     orthonormal matrix entry in [-1,1] is represented with full precision;
//   * tensor data is a plain 16-bit two's-complement number whose scale is
//     set by the user; a TTM output is the 48-bit sum shifted right by 25
//     (the matrix fraction) and saturated back to 16 bits;
//   * angles are radians with 29 fraction bits.
// In DRAM a matrix entry takes two adjacent 16-bit element slots (low half
// first), holding the 27-bit value sign-extended to 32 bits, so matrices keep
// their 27-bit precision when they pass through DRAM. DRAM addresses count
// 16-bit elements and are 34 bits wide (32 GiB), enough for a 256^4 tensor
// and its intermediate results.
package tucker_pkg;

  localparam int TENSOR_W = 16;
  localparam int MAT_W    = 27;
  localparam int MAT_FRAC = 25;
  localparam int PROD_W   = 48;
  localparam int ANG_W    = 32;
  localparam int ANG_FRAC = 29;
  localparam int ADDR_W   = 34;

  typedef logic signed [TENSOR_W-1:0] tensor_t;
  typedef logic signed [MAT_W-1:0]    mat_t;
  typedef logic signed [PROD_W-1:0]   prod_t;
  typedef logic signed [ANG_W-1:0]    ang_t;
  typedef logic        [ADDR_W-1:0]   addr_t;

  // Operations the controller dispatches.
  typedef enum logic [2:0] {
    OP_TTM     = 3'd0,  // Y = X x_j A^T on a tensor folded as [L, I, H]
    OP_LOAD_T  = 3'd1,  // DRAM tensor [L, I, H] -> on-chip rows of B^(k)
    OP_LOAD_U  = 3'd2,  // DRAM matrix (I x I, column major) -> on-chip U rows
    OP_STORE_U = 3'd3,  // on-chip U rows 0..R-1 -> DRAM matrix columns
    OP_SVD     = 3'd4   // Jacobi sweeps over the on-chip matrix
  } op_e;

  // One command. A tensor is always described folded into three modes:
  // dim_l = product of the modes before the one being worked on, dim_i = the
  // size of that mode, dim_h = product of the modes after it.
  typedef struct packed {
    op_e         op;
    addr_t       src;     // DRAM element address of the input
    addr_t       dst;     // DRAM element address of the output
    addr_t       mat;     // DRAM element address of the factor matrix
    logic [31:0] dim_l;
    logic [15:0] dim_i;
    logic [15:0] dim_r;   // TTM: output size of the mode; STORE_U: rows stored
    logic [31:0] dim_h;
    logic [7:0]  sweeps;  // SVD: Jacobi sweeps to run
    logic [15:0] wb;      // on-chip words per row holding B
    logic [15:0] wu;      // on-chip words per row holding U
  } cmd_t;

  // 48-bit sum -> 16-bit tensor element: arithmetic shift, then saturate.
  function automatic tensor_t sat_tensor(input logic signed [PROD_W-1:0] v,
                                         input int unsigned shift);
    logic signed [PROD_W-1:0] s;
    s = v >>> shift;
    if (s > prod_t'(32767))       return tensor_t'(16'sh7fff);
    else if (s < -prod_t'(32768)) return tensor_t'(16'sh8000);
    else                          return tensor_t'(s);
  endfunction

  // True when sat_tensor would clip.
  function automatic logic sat_clips(input logic signed [PROD_W-1:0] v,
                                     input int unsigned shift);
    logic signed [PROD_W-1:0] s;
    s = v >>> shift;
    return (s > prod_t'(32767)) || (s < -prod_t'(32768));
  endfunction

  // CORDIC elementary angles atan(2^-i) in radians with ANG_FRAC = 29
  // fraction bits: entry i = round(atan(2^-i) * 2^29).
  localparam logic [31:0] CORDIC_ATAN [32] = '{
    32'd421657428, 32'd248918915, 32'd131521918, 32'd66762579, 32'd33510843,
    32'd16771758, 32'd8387925, 32'd4194219, 32'd2097141, 32'd1048575,
    32'd524288, 32'd262144, 32'd131072, 32'd65536, 32'd32768, 32'd16384,
    32'd8192, 32'd4096, 32'd2048, 32'd1024, 32'd512, 32'd256, 32'd128,
    32'd64, 32'd32, 32'd16, 32'd8, 32'd4, 32'd2, 32'd1, 32'd0, 32'd0};

  // CORDIC gain compensation prod_i 1/sqrt(1 + 2^-2i) = 0.6072529350...
  // with 30 fraction bits.
  localparam logic [31:0] CORDIC_K = 32'd652032874;

endpackage
