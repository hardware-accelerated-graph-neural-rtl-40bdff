// mv_engine: weight memory plus two vector multipliers, sweeping a block of
// rows of a weight matrix against one input vector, two rows per clock.
//
// This is the shared matrix-vector resource of the two network heads: a
// two-port weight memory (ports a and b) feeds two vec_mul units, so rows
// base+2i and base+2i+1 are multiplied in the same cycle and a block of n rows
// takes ceil(n/2) issue cycles. The description gives this organisation (two
// vector-multiplication units exploiting the dual-port weight memory,
// "processing two rows in parallel"); the memory layout, the result stream and
// the bias column are this design's choices.
//
// Interface: pulse 'start' with 'base' and 'count' while idle; 'x' must stay
// stable until 'done'. Two cycles after each issue, res_valid carries
// res_idx (row offset from base, always even), res_a = W[base+idx].x + b and,
// when res_b_ok, res_b for row base+idx+1. 'done' pulses with the last result.
// wload with sel == SEL writes weight byte 'col' (< N) or the 32-bit bias
// (col == N) of row 'row'.
module mv_engine
  import gnn_pkg::*;
#(
  parameter int unsigned N    = 72,
  parameter int unsigned ROWS = 597,
  parameter logic [3:0]  SEL  = SEL_GRU
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  wload_t                   wload,
  input  logic                     start,
  input  logic [9:0]               base,
  input  logic [9:0]               count,
  input  logic signed [N-1:0][8:0] x,
  output logic                     busy,
  output logic                     res_valid,
  output logic [9:0]               res_idx,
  output logic                     res_b_ok,
  output logic signed [31:0]       res_a,
  output logic signed [31:0]       res_b,
  output logic                     done
);
  localparam int unsigned RA = $clog2(ROWS);

  logic [N-1:0][7:0]  wmem [ROWS];
  logic signed [31:0] bmem [ROWS];

  always_ff @(posedge clk) begin
    if (wload.valid && wload.sel == SEL && 32'(wload.row) < ROWS) begin
      if (32'(wload.col) < N)       wmem[wload.row[RA-1:0]][wload.col] <= wload.data[7:0];
      else if (32'(wload.col) == N) bmem[wload.row[RA-1:0]] <= wload.data;
    end
  end

  logic [9:0] idx, cnt, b0;
  logic [RA-1:0] ra, rb;
  assign ra = RA'(b0 + idx);
  assign rb = RA'(b0 + idx + 10'd1);

  logic [N-1:0][7:0]  wa, wb;
  logic signed [31:0] ba, bb, ba2, bb2;
  always_ff @(posedge clk) begin
    wa  <= wmem[ra];
    wb  <= wmem[rb];
    ba  <= bmem[ra];
    bb  <= bmem[rb];
    ba2 <= ba;
    bb2 <= bb;
  end

  logic s1_vld, s2_vld, s1_last, s2_last, s1_bok, s2_bok;
  logic [9:0] s1_idx, s2_idx;
  logic signed [ACC_W-1:0] ya, yb;
  vec_mul #(.N(N)) u_vm_a (.clk, .en(s1_vld), .x(x), .w(wa), .y(ya));
  vec_mul #(.N(N)) u_vm_b (.clk, .en(s1_vld), .x(x), .w(wb), .y(yb));

  assign res_valid = s2_vld;
  assign res_idx   = s2_idx;
  assign res_b_ok  = s2_bok;
  assign res_a     = ya + ba2;
  assign res_b     = yb + bb2;
  assign done      = s2_vld && s2_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      idx     <= '0;
      cnt     <= '0;
      b0      <= '0;
      s1_vld  <= 1'b0;
      s2_vld  <= 1'b0;
      s1_last <= 1'b0;
      s2_last <= 1'b0;
      s1_bok  <= 1'b0;
      s2_bok  <= 1'b0;
      s1_idx  <= '0;
      s2_idx  <= '0;
    end else begin
      s1_vld  <= busy;
      s1_idx  <= idx;
      s1_last <= busy && (idx + 10'd2 >= cnt);
      s1_bok  <= (idx + 10'd1 < cnt);
      s2_vld  <= s1_vld;
      s2_idx  <= s1_idx;
      s2_last <= s1_last;
      s2_bok  <= s1_bok;
      if (start && !busy && count != 0) begin
        busy <= 1'b1;
        idx  <= '0;
        cnt  <= count;
        b0   <= base;
      end else if (busy) begin
        if (idx + 10'd2 >= cnt) busy <= 1'b0;
        idx <= idx + 10'd2;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
