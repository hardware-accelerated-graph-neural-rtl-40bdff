// event_gnn_top: event-graph neural network for cochlea audio, classification
// and keyword spotting, in programmable logic.
//
// Events (channel, timestamp, end-of-sample flag) enter a FIFO and then the
// feature extractor (graph generator and four graph convolutions), which
// produces one feature vector per event. Each vector goes to two task heads at
// once, as in the description's overview (its Fig. 2):
//  * classification: global_avg_pool averages all vectors of a sample (closed
//    by the event flagged 'last') and mlp_head maps the mean to class scores;
//    the pooled vector is also brought out (avg_*) for a classifier running
//    in software on the host processor, the description's other variant;
//  * keyword spotting: graph_max_pool takes the element-wise maximum over
//    each 10 ms window and gru_head (STEM, GRU, class and confidence layers)
//    emits a class and a confidence once per window.
// A vector leaves the extractor only when both pools can take it.
//
// Defaults: the base classification model (four 64-feature convolutions,
// 64-unit hidden layer) with the KWS head's STEM and GRU at 72 units, 20
// output classes (the SHD digits in two languages), 10 ms windows at a
// 200 MHz clock, and a 64-entry FIFO. Sharing one extractor between both heads
// is this design's reading of Fig. 2; the description evaluates the KWS
// model with 72-feature convolutions (set C1..C4 = 72).
//
// All weights and biases are written through the byte-wide wload port
// (select 0..3 convolutions, 4 classification MLP, 5 KWS head). Outputs are
// one-cycle pulses except avg_valid, which stays high while the pooled vector
// waits for the classification head.
module event_gnn_top
  import gnn_pkg::*;
#(
  parameter int unsigned C1            = 64,
  parameter int unsigned C2            = 64,
  parameter int unsigned C3            = 64,
  parameter int unsigned C4            = 64,
  parameter int unsigned MLP_H         = 64,
  parameter int unsigned NCLS          = 20,
  parameter int unsigned KWS_H         = 72,
  parameter int unsigned KWS_NCLS      = 20,
  parameter int unsigned WINDOW_CYCLES = 2_000_000,
  parameter int unsigned FIFO_DEPTH    = 64,
  parameter int unsigned REQ_S_CONV    = 8,
  parameter int unsigned REQ_S_HEAD    = 8
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // event input
  input  logic                            ev_valid,
  output logic                            ev_ready,
  input  event_t                          ev_data,
  // weight loading
  input  wload_t                          wload,
  // classification
  output logic                            cls_valid,
  output logic [7:0]                      cls_class,
  output logic signed [NCLS-1:0][31:0]    cls_scores,
  output logic                            avg_valid,
  output logic [C4-1:0][7:0]              avg_feat,
  // keyword spotting
  input  logic                            kws_h_clear,
  output logic                            kws_valid,
  output logic [7:0]                      kws_class,
  output logic [7:0]                      kws_conf,
  output logic signed [KWS_NCLS-1:0][31:0] kws_scores,
  // status
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level,
  output logic                            fe_valid,
  output logic                            fe_ready
);
  logic   f_v, f_r;
  event_t f_ev;

  event_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid(ev_valid), .in_ready(ev_ready), .in_data(ev_data),
    .out_valid(f_v), .out_ready(f_r), .out_data(f_ev), .level(fifo_level));

  event_t            fe_ev;
  logic [C4-1:0][7:0] fe_feat;

  feature_extractor #(.C1(C1), .C2(C2), .C3(C3), .C4(C4), .REQ_S(REQ_S_CONV)) u_fe (
    .clk, .rst_n, .wload, .in_valid(f_v), .in_ready(f_r), .in_ev(f_ev),
    .out_valid(fe_valid), .out_ready(fe_ready), .out_ev(fe_ev), .out_feat(fe_feat));

  // Fork to both pools.
  logic ap_r, mp_r;
  assign fe_ready = ap_r && mp_r;

  // Classification path.
  logic               ap_ov, ap_or;
  logic [15:0]        ap_cnt;
  global_avg_pool #(.F(C4)) u_avg (
    .clk, .rst_n, .in_valid(fe_valid && mp_r), .in_ready(ap_r), .in_feat(fe_feat),
    .in_last(fe_ev.last), .out_valid(ap_ov), .out_ready(ap_or), .out_feat(avg_feat),
    .out_count(ap_cnt));
  assign avg_valid = ap_ov;

  mlp_head #(.F(C4), .H(MLP_H), .C(NCLS), .REQ_S(REQ_S_HEAD)) u_mlp (
    .clk, .rst_n, .wload, .in_valid(ap_ov), .in_ready(ap_or), .in_feat(avg_feat),
    .out_valid(cls_valid), .out_class(cls_class), .out_scores(cls_scores));

  // Keyword-spotting path.
  logic               mp_ov, mp_or;
  logic [C4-1:0][7:0] mp_feat;
  logic [15:0]        mp_nev;
  graph_max_pool #(.F(C4), .WINDOW_CYCLES(WINDOW_CYCLES)) u_max (
    .clk, .rst_n, .in_valid(fe_valid && ap_r), .in_ready(mp_r), .in_feat(fe_feat),
    .out_valid(mp_ov), .out_ready(mp_or), .out_feat(mp_feat), .out_nev(mp_nev));

  gru_head #(.F(C4), .H(KWS_H), .C(KWS_NCLS), .REQ_S_S(REQ_S_HEAD)) u_gru (
    .clk, .rst_n, .wload, .h_clear(kws_h_clear), .in_valid(mp_ov), .in_ready(mp_or),
    .in_feat(mp_feat), .out_valid(kws_valid), .out_class(kws_class), .out_conf(kws_conf),
    .out_scores(kws_scores), .out_h());
endmodule
