// ebatch_pkg: constants, types and the fixed-point activation functions shared
// by the E-PUR datapath with E-Batch support.
//
// Number formats (this design's choice; the paper only says E-PUR computes
// with 8 or 16 bits):
//   * activations, weights, gate outputs, h : signed 8 bit, 6 fraction bits
//     (Q1.6, value = code / 64, range [-2, 2))
//   * DPU accumulator and pre-activations    : signed 32 bit, 12 fraction bits
//   * bias and LSTM cell state c             : signed 16 bit, 12 fraction bits
// Sigmoid uses the four-segment piecewise-linear "PLAN" approximation
// (shifts and adds only); tanh(x) = 2*sigmoid(2x) - 1.
package ebatch_pkg;

  localparam int unsigned DW       = 8;   // data / weight width (bits)
  localparam int unsigned ACC_W    = 32;  // DPU accumulator width
  localparam int unsigned CW       = 16;  // cell-state and bias width
  localparam int unsigned FRAC_D   = 6;   // fraction bits of 8-bit data
  localparam int unsigned FRAC_A   = 12;  // fraction bits of accumulator, bias, c
  localparam int unsigned NGATES   = 4;   // one compute unit per LSTM gate

  typedef logic signed [DW-1:0]    data_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [CW-1:0]    cell_t;

  // Request-buffer field widths.
  localparam int unsigned RID_W    = 16;  // request identifier
  localparam int unsigned TS_W     = 16;  // time-step counts
  localparam int unsigned LANE_W   = 8;   // lane number (up to 256 lanes)

  // What the runtime sends per batched request: which request, on which
  // lane, and how many of its time-steps remain to be evaluated.
  typedef struct packed {
    logic [RID_W-1:0]  req_id;
    logic [LANE_W-1:0] lane;
    logic [TS_W-1:0]   steps;
  } req_desc_t;

  // One request-buffer entry.
  typedef struct packed {
    logic [RID_W-1:0]  req_id;
    logic [LANE_W-1:0] lane;
    logic [TS_W-1:0]   steps_req;  // time-steps still to evaluate (from runtime)
    logic [TS_W-1:0]   steps_l0;   // time-steps evaluated in the first layer
    logic [TS_W-1:0]   steps_cur;  // time-steps evaluated in the current layer
  } req_entry_t;

  // What the accelerator reports per request when a batch completes.
  typedef struct packed {
    logic [RID_W-1:0]  req_id;
    logic [LANE_W-1:0] lane;
    logic [TS_W-1:0]   steps_done;
  } req_report_t;

  // Gate order of the four compute units (Fig. 1 / Eq. 1-6 of the LSTM cell).
  typedef enum logic [1:0] {GATE_I = 2'd0, GATE_F = 2'd1, GATE_G = 2'd2, GATE_O = 2'd3} gate_e;

  // Activation selected in a multi-functional unit.
  typedef enum logic {ACT_SIGMOID = 1'b0, ACT_TANH = 1'b1} act_e;

  // Sigmoid of a Q.12 value, returned in Q.12 (0 .. 4096).
  function automatic logic signed [31:0] sigmoid_q12(input logic signed [31:0] x);
    logic signed [31:0] a, y;
    a = (x < 0) ? -x : x;
    if (a >= 32'sd20480)      y = 32'sd4096;                // |x| >= 5
    else if (a >= 32'sd9728)  y = (a >>> 5) + 32'sd3456;     // 2.375 <= |x| < 5
    else if (a >= 32'sd4096)  y = (a >>> 3) + 32'sd2560;     // 1 <= |x| < 2.375
    else                      y = (a >>> 2) + 32'sd2048;     // 0 <= |x| < 1
    return (x < 0) ? (32'sd4096 - y) : y;
  endfunction

  // Tanh of a Q.12 value, returned in Q.12 (-4096 .. 4096).
  function automatic logic signed [31:0] tanh_q12(input logic signed [31:0] x);
    logic signed [31:0] x2;
    // Saturate before doubling so that 2x cannot overflow.
    if (x > 32'sd1073741823)       x2 = 32'sd2147483647;
    else if (x < -32'sd1073741824) x2 = -32'sd2147483647;
    else                           x2 = x <<< 1;
    return (sigmoid_q12(x2) <<< 1) - 32'sd4096;
  endfunction

  // Q.12 to Q1.6 with round-half-up and saturation to 8 bits.
  function automatic data_t q12_to_q6(input logic signed [31:0] x);
    logic signed [31:0] r;
    r = (x + 32'sd32) >>> 6;
    if (r > 32'sd127)       return data_t'(8'sd127);
    else if (r < -32'sd128) return data_t'(-8'sd128);
    else                    return data_t'(r[7:0]);
  endfunction

  // Saturate a Q.12 value to the 16-bit cell-state format.
  function automatic cell_t sat_cell(input logic signed [31:0] x);
    if (x > 32'sd32767)       return cell_t'(16'sd32767);
    else if (x < -32'sd32768) return cell_t'(-16'sd32768);
    else                      return cell_t'(x[15:0]);
  endfunction

endpackage
