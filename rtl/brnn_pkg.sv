// Shared types and constants of the Bayesian LSTM accelerator.
//
// Number formats: activations, weights and biases are 16-bit signed fixed point
// with FRAC fractional bits (Q6.10). The LSTM cell state is kept in 32 bits, and
// matrix-vector products are accumulated at 2*FRAC fractional bits in ACC_W bits.
// The 16-bit width and the 32-bit cell state follow the paper; the split into
// 6 integer and 10 fractional bits, the accumulator width and the lookup-table
// geometry are this design's choices.
//
// The activation tables are computed here by constant arithmetic (no data files):
//   sigmoid[k] = round(2^FRAC / (1 + exp(-x_k)))
//   tanh[k]    = round(2^FRAC * tanh(x_k))
//   x_k        = (k - 2^(LUT_BITS-1)) * 2^-LUT_STEP_LOG2 ,  k = 0 .. 2^LUT_BITS-1
// so the 1024-entry tables span [-8, 8) in steps of 1/64.
package brnn_pkg;

  localparam int DATA_W = 16;
  localparam int FRAC   = 10;
  localparam int CELL_W = 32;            // cell state, 2*FRAC fractional bits
  localparam int ACC_W  = 40;            // MVM accumulators, 2*FRAC fractional bits
  localparam int LUT_BITS      = 10;
  localparam int LUT_SIZE      = 1 << LUT_BITS;
  localparam int LUT_STEP_LOG2 = 6;      // table step 2^-6

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [CELL_W-1:0] cell_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef enum logic [0:0] {ACT_SIGMOID = 1'b0, ACT_TANH = 1'b1} act_e;
  typedef enum logic [0:0] {ARCH_AUTOENCODER = 1'b0, ARCH_CLASSIFIER = 1'b1} arch_e;

  // Gate order used everywhere: input, forget, modulation, output.
  localparam int GATE_I = 0, GATE_F = 1, GATE_G = 2, GATE_O = 3;

  // Saturate a wide value that has 2*FRAC fractional bits to data_t (FRAC bits).
  function automatic data_t sat_data(input acc_t v);
    acc_t s;
    s = v >>> FRAC;
    if (s > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(s[DATA_W-1:0]);
  endfunction

  // Saturate a wide value (2*FRAC fractional bits) to the 32-bit cell state.
  function automatic cell_t sat_cell(input logic signed [63:0] v);
    if (v > 64'sh7fff_ffff)       return cell_t'(32'sh7fff_ffff);
    else if (v < -64'sh8000_0000) return cell_t'(32'sh8000_0000);
    else                          return cell_t'(v[CELL_W-1:0]);
  endfunction

  // Map a value with 2*FRAC fractional bits to an activation table index.
  function automatic logic [LUT_BITS-1:0] lut_index(input logic signed [63:0] v);
    logic signed [63:0] k;
    k = (v >>> (2*FRAC - LUT_STEP_LOG2)) + 64'(LUT_SIZE/2);
    if (k < 0)                 return '0;
    else if (k >= 64'(LUT_SIZE)) return '1;
    else                       return k[LUT_BITS-1:0];
  endfunction

  // Table entry k of the sigmoid or tanh table, in data_t.
  function automatic data_t act_entry(input act_e f, input int k);
    real x, y;
    x = real'(k - LUT_SIZE/2) / real'(1 << LUT_STEP_LOG2);
    if (f == ACT_SIGMOID) y = 1.0 / (1.0 + $exp(-x));
    else                  y = (($exp(x) - $exp(-x)) / ($exp(x) + $exp(-x)));
    return data_t'($rtoi(y * real'(1 << FRAC) + (y >= 0.0 ? 0.5 : -0.5)));
  endfunction

endpackage
