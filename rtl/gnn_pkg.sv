// gnn_pkg: types, constants and arithmetic helpers shared by the event-graph
// audio accelerator.
//
// Events carry a cochlea channel index and a timestamp. The 700 channels and
// the skip-step graph (channel radius 100, skip step 10, time radius 20 ms,
// hence 21 candidate edges per event) follow the design description; the
// timestamp unit (1 us) and width (20 bits, about 1.05 s) are this design's
// choice.
//
// Quantisation: activations are 8-bit unsigned, weights are stored as 8-bit
// unsigned codes with a zero point of 128 (value = code - 128) and biases as
// 32-bit signed integers. After every matrix-vector product the 32-bit
// accumulator is rescaled by an integer multiplier and a right shift (the
// usual integer-only inference scheme). The multiplier/shift pairs are
// parameters of each layer.
package gnn_pkg;

  localparam int unsigned NUM_CH   = 700;  // cochlea channels
  localparam int unsigned CH_W     = 10;   // bits of a channel index
  localparam int unsigned TS_W     = 20;   // bits of a timestamp (1 us units)
  localparam int unsigned R_CH     = 100;  // channel search radius
  localparam int unsigned SKIP     = 10;   // skip step
  localparam int unsigned R_T      = 20000; // time radius, 20 ms in us
  localparam int unsigned N_EDGE   = 2 * R_CH / SKIP + 1; // 21 candidate edges
  localparam int unsigned W_ZP     = 128;  // weight zero point
  localparam int unsigned ACC_W    = 32;   // accumulator width

  // One cochlea event. 'last' marks the final event of a classification sample.
  typedef struct packed {
    logic            last;
    logic [CH_W-1:0] ch;
    logic [TS_W-1:0] t;
  } event_t;

  // One candidate edge of the skip-step pattern: t_diff = t_new - t_neighbour.
  typedef struct packed {
    logic            valid;
    logic [TS_W-1:0] t_diff;
  } edge_t;

  // Byte-wide weight/bias load port shared by all weight memories.
  // col < row length writes weight byte data[7:0]; col == row length writes
  // the row's 32-bit bias.
  typedef struct packed {
    logic        valid;
    logic [3:0]  sel;
    logic [9:0]  row;
    logic [7:0]  col;
    logic [31:0] data;
  } wload_t;

  // Weight-memory select codes on the load port.
  localparam logic [3:0] SEL_CONV0 = 4'd0;  // conv layers use SEL_CONV0 + layer
  localparam logic [3:0] SEL_MLP   = 4'd4;
  localparam logic [3:0] SEL_GRU   = 4'd5;

  // Requantise to unsigned 8 bits with ReLU: clamp((acc*mult) >>> shift, 0, 255).
  function automatic logic [7:0] req_relu_u8(input logic signed [ACC_W-1:0] acc,
                                             input int unsigned mult,
                                             input int unsigned shift);
    logic signed [63:0] p;
    p = (64'(acc) * $signed({1'b0, 31'(mult)})) >>> shift;
    if (p < 0)        return 8'd0;
    else if (p > 255) return 8'd255;
    else              return p[7:0];
  endfunction

  // Requantise to signed 16 bits (saturating): (acc*mult) >>> shift.
  function automatic logic signed [15:0] req_s16(input logic signed [ACC_W-1:0] acc,
                                                 input int unsigned mult,
                                                 input int unsigned shift);
    logic signed [63:0] p;
    p = (64'(acc) * $signed({1'b0, 31'(mult)})) >>> shift;
    if (p < -32768)     return 16'sh8000;
    else if (p > 32767) return 16'sh7fff;
    else                return p[15:0];
  endfunction

  // Saturating signed 16-bit add.
  function automatic logic signed [15:0] sat_add16(input logic signed [15:0] a,
                                                   input logic signed [15:0] b);
    logic signed [16:0] s;
    s = 17'(a) + 17'(b);
    if (s < -32768)     return 16'sh8000;
    else if (s > 32767) return 16'sh7fff;
    else                return s[15:0];
  endfunction

  // Index into the 256-entry activation tables: Q7.8 value to Q3.4, clamped.
  function automatic logic [7:0] lut_index(input logic signed [15:0] v);
    logic signed [15:0] q;
    q = v >>> 4;
    if (q < -128)     return 8'h80;
    else if (q > 127) return 8'h7f;
    else              return q[7:0];
  endfunction

endpackage
