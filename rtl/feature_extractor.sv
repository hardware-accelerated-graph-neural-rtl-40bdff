// feature_extractor: the event-graph backbone shared by both tasks.
//
// A graph_generator turns each event into a graph vertex (edge list plus a
// 2-byte averaged-position feature) and four graph_conv layers, chained by
// ready/valid handshakes, compute its embedding: 2 -> C1 -> C2 -> C3 -> C4
// features. Every layer receives the event and the edge list along with the
// previous layer's feature, as in the description's Fig. 2, and the layers
// work on consecutive events at the same time, so throughput is set by the
// slowest layer (11 * C/2 cycles per event) and the per-event latency is
// about 48 + 4 * (11 * C/2 + 5) cycles (about 1470 cycles, 7.3 us at 200 MHz,
// for the 64-feature model). Default layer widths are the description's base
// model (64, 64, 64, 64); the requantisation constants are this design's.
//
// Interface: ready/valid event input; ready/valid output of the event and its
// C4-byte feature vector; wload programs the four layers (select 0..3).
module feature_extractor
  import gnn_pkg::*;
#(
  parameter int unsigned C1    = 64,
  parameter int unsigned C2    = 64,
  parameter int unsigned C3    = 64,
  parameter int unsigned C4    = 64,
  parameter int unsigned NCH   = NUM_CH,
  parameter int unsigned RCH   = R_CH,
  parameter int unsigned STEP  = SKIP,
  parameter int unsigned RT    = R_T,
  parameter int unsigned REQ_M = 1,
  parameter int unsigned REQ_S = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  wload_t         wload,
  input  logic           in_valid,
  output logic           in_ready,
  input  event_t         in_ev,
  output logic           out_valid,
  input  logic           out_ready,
  output event_t         out_ev,
  output logic [C4-1:0][7:0] out_feat
);
  localparam int unsigned NE = 2 * RCH / STEP + 1;

  logic                  g_v, g_r, c1_v, c1_r, c2_v, c2_r, c3_v, c3_r;
  event_t                g_ev, c1_ev, c2_ev, c3_ev;
  edge_t [NE-1:0]        g_ed, c1_ed, c2_ed, c3_ed;
  logic  [1:0][7:0]      g_f;
  logic  [C1-1:0][7:0]   c1_f;
  logic  [C2-1:0][7:0]   c2_f;
  logic  [C3-1:0][7:0]   c3_f;

  graph_generator #(.NCH(NCH), .RCH(RCH), .STEP(STEP), .RT(RT)) u_gen (
    .clk, .rst_n, .in_valid, .in_ready, .in_ev,
    .out_valid(g_v), .out_ready(g_r), .out_ev(g_ev), .out_edges(g_ed), .out_feat(g_f));

  graph_conv #(.IN_F(2), .OUT_F(C1), .NCH(NCH), .RCH(RCH), .STEP(STEP), .RT(RT),
               .REQ_M(REQ_M), .REQ_S(REQ_S), .SEL(SEL_CONV0 + 4'd0)) u_conv1 (
    .clk, .rst_n, .wload, .in_valid(g_v), .in_ready(g_r), .in_ev(g_ev), .in_edges(g_ed),
    .in_feat(g_f), .out_valid(c1_v), .out_ready(c1_r), .out_ev(c1_ev), .out_edges(c1_ed),
    .out_feat(c1_f));

  graph_conv #(.IN_F(C1), .OUT_F(C2), .NCH(NCH), .RCH(RCH), .STEP(STEP), .RT(RT),
               .REQ_M(REQ_M), .REQ_S(REQ_S), .SEL(SEL_CONV0 + 4'd1)) u_conv2 (
    .clk, .rst_n, .wload, .in_valid(c1_v), .in_ready(c1_r), .in_ev(c1_ev), .in_edges(c1_ed),
    .in_feat(c1_f), .out_valid(c2_v), .out_ready(c2_r), .out_ev(c2_ev), .out_edges(c2_ed),
    .out_feat(c2_f));

  graph_conv #(.IN_F(C2), .OUT_F(C3), .NCH(NCH), .RCH(RCH), .STEP(STEP), .RT(RT),
               .REQ_M(REQ_M), .REQ_S(REQ_S), .SEL(SEL_CONV0 + 4'd2)) u_conv3 (
    .clk, .rst_n, .wload, .in_valid(c2_v), .in_ready(c2_r), .in_ev(c2_ev), .in_edges(c2_ed),
    .in_feat(c2_f), .out_valid(c3_v), .out_ready(c3_r), .out_ev(c3_ev), .out_edges(c3_ed),
    .out_feat(c3_f));

  graph_conv #(.IN_F(C3), .OUT_F(C4), .NCH(NCH), .RCH(RCH), .STEP(STEP), .RT(RT),
               .REQ_M(REQ_M), .REQ_S(REQ_S), .SEL(SEL_CONV0 + 4'd3)) u_conv4 (
    .clk, .rst_n, .wload, .in_valid(c3_v), .in_ready(c3_r), .in_ev(c3_ev), .in_edges(c3_ed),
    .in_feat(c3_f), .out_valid, .out_ready, .out_ev, .out_edges(), .out_feat);
endmodule
