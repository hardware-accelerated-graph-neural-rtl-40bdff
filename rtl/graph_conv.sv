// graph_conv: one PointNetConv graph-convolution layer, processed event by event.
//
// For an event i with edge list N(i) the layer computes
//   X'_i = ReLU( max_{j in N(i) + {i}} ( W [X_j || PN(P_j - P_i)] + b ) )
// where X_j is the neighbour's input feature, read from a per-channel feature
// memory, and PN is positional normalisation of the channel and time offsets
// to 8-bit codes: q_dch = (dch + RCH) * 255 / (2*RCH) (a constant per edge
// position) and q_dt = (t_diff * floor(255*2^16/RT)) >> 16, saturated at 255.
// Batch normalisation is assumed folded into W and b.
//
// Datapath, as in the design description (its Fig. 4 and Eq. 5): a two-port
// feature memory (one word of IN_F bytes per channel) delivers two neighbour
// vectors per clock, a two-port weight memory delivers two weight rows per
// clock, and four vec_mul units form the 2 x 2 dot products. The self-loop and
// the 21 candidate edges make 22 vectors = 11 pairs, and every pair is swept
// over the OUT_F/2 row pairs, so a layer takes 11 * OUT_F/2 cycles per event
// (352 for 64 outputs) plus a few pipeline cycles. The running maximum per
// output is kept after requantisation: the requantiser (multiply by REQ_M,
// shift right by REQ_S, clamp to 0..255, which is also the ReLU) is monotonic,
// so this equals requantising the maximum. When the sweep ends the event's own
// input feature is written into the feature memory at its channel (one write)
// for use by later events.
//
// Interface: ready/valid input carrying the event, its edge list and its input
// feature; ready/valid output carrying the event, the same edge list and the
// OUT_F-byte output feature (held until taken; the layer starts the next event
// while its result waits). wload writes weights (col < IN_F+2) and biases
// (col == IN_F+2) of the rows selected by SEL. The requantisation constants,
// the weight zero point and the input ordering [X_j, q_dch, q_dt] are this
// design's choices.
module graph_conv
  import gnn_pkg::*;
#(
  parameter int unsigned IN_F  = 64,
  parameter int unsigned OUT_F = 64,
  parameter int unsigned NCH   = NUM_CH,
  parameter int unsigned RCH   = R_CH,
  parameter int unsigned STEP  = SKIP,
  parameter int unsigned RT    = R_T,
  parameter int unsigned REQ_M = 1,
  parameter int unsigned REQ_S = 8,
  parameter logic [3:0]  SEL   = SEL_CONV0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wload_t wload,
  input  logic   in_valid,
  output logic   in_ready,
  input  event_t in_ev,
  input  edge_t [2*RCH/STEP:0] in_edges,
  input  logic  [IN_F-1:0][7:0] in_feat,
  output logic   out_valid,
  input  logic   out_ready,
  output event_t out_ev,
  output edge_t [2*RCH/STEP:0] out_edges,
  output logic  [OUT_F-1:0][7:0] out_feat
);
  localparam int unsigned NE     = 2 * RCH / STEP + 1;  // candidate edges
  localparam int unsigned HALF   = NE / 2;
  localparam int unsigned NV     = NE + 1;              // plus the self-loop
  localparam int unsigned NP     = NV / 2;              // vector pairs
  localparam int unsigned NO     = OUT_F / 2;           // output row pairs
  localparam int unsigned IN_DIM = IN_F + 2;
  localparam int unsigned PW     = $clog2(NP + 1);
  localparam int unsigned OW     = $clog2(NO + 1);
  localparam int unsigned RW     = $clog2(OUT_F);
  localparam logic [31:0] RT_M   = 32'((255 * 65536) / RT);

  typedef enum logic [1:0] {IDLE, RUN, DRAIN, DONE} state_t;
  state_t state;

  // ---------------------------------------------------------------- memories
  logic [IN_DIM-1:0][7:0] wmem [OUT_F];
  logic signed [31:0]     bmem [OUT_F];
  logic [IN_F-1:0][7:0]   fmem [NCH];

  always_ff @(posedge clk) begin
    if (wload.valid && wload.sel == SEL && 32'(wload.row) < OUT_F) begin
      if (32'(wload.col) < IN_DIM)       wmem[wload.row[RW-1:0]][wload.col] <= wload.data[7:0];
      else if (32'(wload.col) == IN_DIM) bmem[wload.row[RW-1:0]] <= wload.data;
    end
  end

  // ------------------------------------------------------------ event latch
  event_t                 ev;
  edge_t  [NE-1:0]        edges;
  logic   [IN_F-1:0][7:0] feat;
  logic   [NV-1:0][7:0]   q_dch, q_dt;
  logic   [NV-1:0]        vvalid;

  // Positional normalisation of the incoming edge list.
  logic [NV-1:0][7:0] pn_dch, pn_dt;
  logic [NV-1:0]      pn_v;
  always_comb begin
    pn_dch[0] = 8'((RCH * 255) / (2 * RCH));
    pn_dt[0]  = 8'd0;
    pn_v[0]   = 1'b1;
    for (int k = 0; k < NE; k++) begin
      logic [47:0] prod;
      pn_dch[k+1] = 8'(((k * STEP) * 255) / (2 * RCH));  // (dch + RCH) with dch = (k-HALF)*STEP
      prod        = 48'(in_edges[k].t_diff) * 48'(RT_M);
      pn_dt[k+1]  = (prod[47:16] > 255) ? 8'd255 : prod[23:16];
      pn_v[k+1]   = in_edges[k].valid;
    end
  end

  // ------------------------------------------------------------- sweep control
  logic [PW-1:0] p;
  logic [OW-1:0] o;
  logic          last_issue;
  assign last_issue = (p == PW'(NP - 1)) && (o == OW'(NO - 1));

  // Feature-memory addresses of the pair's two vectors (vector v = edge v-1).
  function automatic logic [CH_W-1:0] nb_addr(input logic [CH_W-1:0] ch, input int v);
    int c;
    c = int'(ch) + (v - 1 - int'(HALF)) * int'(STEP);
    if (c < 0 || c >= int'(NCH)) return '0;
    return CH_W'(c);
  endfunction

  logic [CH_W-1:0] fa_addr, fb_addr;
  always_comb begin
    fa_addr = '0;
    fb_addr = '0;
    for (int i = 0; i < NP; i++) begin
      if (p == PW'(i)) begin
        fa_addr = (i == 0) ? '0 : nb_addr(ev.ch, 2*i);
        fb_addr = nb_addr(ev.ch, 2*i + 1);
      end
    end
  end

  // Stage 1: memory outputs.
  logic [IN_F-1:0][7:0]   fa, fb;
  logic [IN_DIM-1:0][7:0] wa, wb;
  logic signed [31:0]     ba, bb;
  logic                   s1_vld, s2_vld;
  logic [PW-1:0]          s1_p;
  logic [OW-1:0]          s1_o, s2_o;
  logic signed [31:0]     s2_ba, s2_bb;

  always_ff @(posedge clk) begin
    fa <= fmem[fa_addr];
    fb <= fmem[fb_addr];
    wa <= wmem[RW'(2*o)];
    wb <= wmem[RW'(2*o + 1)];
    ba <= bmem[RW'(2*o)];
    bb <= bmem[RW'(2*o + 1)];
    s2_ba <= ba;
    s2_bb <= bb;
    if (state == DONE && (!out_valid || out_ready)) fmem[ev.ch] <= feat;
  end

  // Input vectors of the pair: [X_j, q_dch, q_dt].
  logic signed [IN_DIM-1:0][8:0] xa, xb;
  logic                          va, vb;
  always_comb begin
    logic [7:0] dch_a, dt_a, dch_b, dt_b;
    dch_a = '0; dt_a = '0; dch_b = '0; dt_b = '0; va = 1'b0; vb = 1'b0;
    for (int i = 0; i < NP; i++) begin
      if (s1_p == PW'(i)) begin
        dch_a = q_dch[2*i];   dt_a = q_dt[2*i];   va = vvalid[2*i];
        dch_b = q_dch[2*i+1]; dt_b = q_dt[2*i+1]; vb = vvalid[2*i+1];
      end
    end
    for (int j = 0; j < IN_F; j++) begin
      xa[j] = $signed({1'b0, (s1_p == '0) ? feat[j] : fa[j]});
      xb[j] = $signed({1'b0, fb[j]});
    end
    xa[IN_F]   = $signed({1'b0, dch_a});
    xa[IN_F+1] = $signed({1'b0, dt_a});
    xb[IN_F]   = $signed({1'b0, dch_b});
    xb[IN_F+1] = $signed({1'b0, dt_b});
  end

  logic va2, vb2;
  logic signed [ACC_W-1:0] y_aa, y_ab, y_ba, y_bb;
  vec_mul #(.N(IN_DIM)) u_vm_aa (.clk, .en(s1_vld), .x(xa), .w(wa), .y(y_aa));
  vec_mul #(.N(IN_DIM)) u_vm_ab (.clk, .en(s1_vld), .x(xa), .w(wb), .y(y_ab));
  vec_mul #(.N(IN_DIM)) u_vm_ba (.clk, .en(s1_vld), .x(xb), .w(wa), .y(y_ba));
  vec_mul #(.N(IN_DIM)) u_vm_bb (.clk, .en(s1_vld), .x(xb), .w(wb), .y(y_bb));

  // Stage 2: requantise, ReLU, running maximum.
  logic [7:0] r_aa, r_ab, r_ba, r_bb;
  assign r_aa = req_relu_u8(y_aa + s2_ba, REQ_M, REQ_S);
  assign r_ab = req_relu_u8(y_ab + s2_bb, REQ_M, REQ_S);
  assign r_ba = req_relu_u8(y_ba + s2_ba, REQ_M, REQ_S);
  assign r_bb = req_relu_u8(y_bb + s2_bb, REQ_M, REQ_S);

  logic [OUT_F-1:0][7:0] mx;
  logic [1:0]            drain;
  logic [7:0]            m0, m1;

  // New maxima of the two rows of the pair in stage 2.
  always_comb begin
    m0 = mx[2*s2_o];
    m1 = mx[2*s2_o+1];
    if (va2 && r_aa > m0) m0 = r_aa;
    if (vb2 && r_ba > m0) m0 = r_ba;
    if (va2 && r_ab > m1) m1 = r_ab;
    if (vb2 && r_bb > m1) m1 = r_bb;
  end

  assign in_ready = (state == IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      ev        <= '0;
      edges     <= '0;
      feat      <= '0;
      q_dch     <= '0;
      q_dt      <= '0;
      vvalid    <= '0;
      p         <= '0;
      o         <= '0;
      s1_vld    <= 1'b0;
      s1_p      <= '0;
      s1_o      <= '0;
      s2_vld    <= 1'b0;
      s2_o      <= '0;
      va2       <= 1'b0;
      vb2       <= 1'b0;
      mx        <= '0;
      drain     <= '0;
      out_valid <= 1'b0;
      out_ev    <= '0;
      out_edges <= '0;
      out_feat  <= '0;
    end else begin
      s1_vld <= (state == RUN);
      s1_p   <= p;
      s1_o   <= o;
      s2_vld <= s1_vld;
      s2_o   <= s1_o;
      va2    <= va;
      vb2    <= vb;

      if (out_valid && out_ready) out_valid <= 1'b0;

      if (s2_vld) begin
        mx[2*s2_o]   <= m0;
        mx[2*s2_o+1] <= m1;
      end

      unique case (state)
        IDLE: begin
          if (in_valid) begin
            ev     <= in_ev;
            edges  <= in_edges;
            feat   <= in_feat;
            q_dch  <= pn_dch;
            q_dt   <= pn_dt;
            vvalid <= pn_v;
            p      <= '0;
            o      <= '0;
            mx     <= '0;
            state  <= RUN;
          end
        end
        RUN: begin
          if (last_issue) begin
            state <= DRAIN;
            drain <= 2'd2;
          end else if (o == OW'(NO - 1)) begin
            o <= '0;
            p <= p + 1'b1;
          end else begin
            o <= o + 1'b1;
          end
        end
        DRAIN: begin
          drain <= drain - 1'b1;
          if (drain == 2'd1) state <= DONE;
        end
        DONE: begin
          if (!out_valid || out_ready) begin
            out_valid <= 1'b1;
            out_ev    <= ev;
            out_edges <= edges;
            out_feat  <= mx;
            state     <= IDLE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The output register is never overwritten while it still holds a result.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> $stable(out_feat));
endmodule
