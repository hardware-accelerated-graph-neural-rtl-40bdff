// gru_head: the keyword-spotting head, run once per pooling window.
//
// For every pooled window vector f_t it computes, on one shared mv_engine (a
// weight memory with two vec_mul units, two rows per clock), under a state
// machine whose state numbers follow the design description (its Fig. 5):
//   state 1  x1 = ReLU(W1 f_t + b1)                 STEM layer 1 (H rows)
//   state 2  x2 = ReLU(W2 x1 + b2)                  STEM layer 2 (H rows)
//   state 3  gx = W_{r,z,n} x2 + b_{r,z,n}          GRU input part (3H rows)
//   gates    r = sig(gx_r + gh_r), z = sig(gx_z + gh_z)
//            n = tanh(gx_n + r * gh_n)
//            h = z * n + (1 - z) * h_prev            (two elements per clock)
//   state 4  scores = W_cls h + b_cls                class scores (C rows)
//   state 5  conf = sig(w_conf . h + b_conf)         confidence (1 row)
//   state 0  gh = U_{r,z,n} h + b_h{r,z,n}           hidden part for the next
//            window (3H rows); also run once after reset / h_clear with h = 0.
// The reset gate multiplies the already computed U_n h + b_hn, which is what
// precomputing the hidden part in state 0 (as the description's Fig. 5 shows)
// requires; the description's equation writes U_h (r * h) instead. The update
// h = z*n + (1-z)*h_prev follows the description's equation.
//
// Number formats (this design's choice): STEM activations unsigned 8-bit;
// gate pre-activations signed 16-bit Q7.8 (requantised with REQ_M_G/REQ_S_G);
// sigmoid outputs Q0.8 and tanh outputs and the hidden state signed Q0.7; the
// activation tables take Q3.4 codes. The class scores stay 32-bit accumulators
// (argmax gives the class; softmax is left to the reader of the scores).
// Weight-memory rows: W1 at 0, W2 at H, W_{r,z,n} at 2H, U_{r,z,n} at 5H,
// W_cls at 8H, w_conf at 8H+C; inputs zero-padded to max(F, H).
//
// Interface: ready/valid input of one window vector; out_valid pulses for one
// cycle with out_class, out_conf and out_scores once states 1-5 are done;
// state 0 follows, and in_ready returns when it has finished. h_clear (in
// idle) zeroes the hidden state. Latency from acceptance to out_valid is
// H + 3*ceil(H/2) + H/2 + ceil(C/2) + 18 cycles for even H: 244 cycles
// (1.2 us at 200 MHz) for H = 72, C = 20; state 0 then takes 3H/2 + 3 more.
module gru_head
  import gnn_pkg::*;
#(
  parameter int unsigned F        = 72,
  parameter int unsigned H        = 72,
  parameter int unsigned C        = 20,
  parameter int unsigned REQ_M_S  = 1,   // STEM requantisation
  parameter int unsigned REQ_S_S  = 8,
  parameter int unsigned REQ_M_G  = 1,   // gate pre-activations to Q7.8
  parameter int unsigned REQ_S_G  = 0,
  parameter int unsigned REQ_M_C  = 1,   // confidence pre-activation to Q7.8
  parameter int unsigned REQ_S_C  = 0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  wload_t                    wload,
  input  logic                      h_clear,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [F-1:0][7:0]         in_feat,
  output logic                      out_valid,
  output logic [7:0]                out_class,
  output logic [7:0]                out_conf,
  output logic signed [C-1:0][31:0] out_scores,
  output logic signed [H-1:0][7:0]  out_h
);
  localparam int unsigned N        = (F > H) ? F : H;
  localparam int unsigned OFF_L1   = 0;
  localparam int unsigned OFF_L2   = H;
  localparam int unsigned OFF_GX   = 2 * H;
  localparam int unsigned OFF_GH   = 5 * H;
  localparam int unsigned OFF_CLS  = 8 * H;
  localparam int unsigned OFF_CONF = 8 * H + C;
  localparam int unsigned ROWS     = 8 * H + C + 1;
  localparam int unsigned GW       = $clog2(H / 2 + 1);

  typedef enum logic [4:0] {
    ST_INIT, ST0, ST0W, ST_IDLE, ST1, ST1W, ST2, ST2W, ST3, ST3W,
    ST_GATE, ST4, ST4W, ST5, ST5W, ST_EMIT
  } state_t;
  state_t state;

  logic [F-1:0][7:0]               feat;
  logic [H-1:0][7:0]               x1, x2;
  logic signed [3*H-1:0][15:0]     gx, gh;
  logic signed [H-1:0][7:0]        h;
  logic signed [C-1:0][31:0]       sc;
  logic signed [15:0]              conf_pre;
  logic [GW-1:0]                   g;

  // ------------------------------------------------------- shared engine
  logic                     e_start, e_rv, e_bok, e_done;
  logic [9:0]               e_base, e_count, e_idx;
  logic signed [31:0]       e_a, e_b;
  logic signed [N-1:0][8:0] e_x;

  always_comb begin
    e_x     = '0;
    e_start = 1'b0;
    e_base  = '0;
    e_count = '0;
    unique case (state)
      ST1, ST1W: for (int i = 0; i < F; i++) e_x[i] = $signed({1'b0, feat[i]});
      ST2, ST2W: for (int i = 0; i < H; i++) e_x[i] = $signed({1'b0, x1[i]});
      ST3, ST3W: for (int i = 0; i < H; i++) e_x[i] = $signed({1'b0, x2[i]});
      default:   for (int i = 0; i < H; i++) e_x[i] = 9'($signed(h[i]));
    endcase
    unique case (state)
      ST0: begin e_start = 1'b1; e_base = 10'(OFF_GH);   e_count = 10'(3 * H); end
      ST1: begin e_start = 1'b1; e_base = 10'(OFF_L1);   e_count = 10'(H);     end
      ST2: begin e_start = 1'b1; e_base = 10'(OFF_L2);   e_count = 10'(H);     end
      ST3: begin e_start = 1'b1; e_base = 10'(OFF_GX);   e_count = 10'(3 * H); end
      ST4: begin e_start = 1'b1; e_base = 10'(OFF_CLS);  e_count = 10'(C);     end
      ST5: begin e_start = 1'b1; e_base = 10'(OFF_CONF); e_count = 10'd1;      end
      default: ;
    endcase
  end

  mv_engine #(.N(N), .ROWS(ROWS), .SEL(SEL_GRU)) u_eng (
    .clk, .rst_n, .wload, .start(e_start), .base(e_base), .count(e_count), .x(e_x),
    .busy(), .res_valid(e_rv), .res_idx(e_idx), .res_b_ok(e_bok),
    .res_a(e_a), .res_b(e_b), .done(e_done));

  // ------------------------------------------------------- GRU gate lanes
  logic signed [1:0][7:0] h_new;
  for (genvar l = 0; l < 2; l++) begin : g_lane
    int unsigned          j;
    logic signed [15:0]   r_pre, z_pre, n_pre, rgh;
    logic [7:0]           r, z;
    logic signed [7:0]    n;
    logic signed [24:0]   rprod;
    logic signed [17:0]   hsum;
    assign j     = 2 * int'(g) + l;
    assign r_pre = sat_add16($signed(gx[j]), $signed(gh[j]));
    assign z_pre = sat_add16($signed(gx[H + j]), $signed(gh[H + j]));
    sigmoid_lut u_sig_r (.idx(lut_index(r_pre)), .y(r));
    sigmoid_lut u_sig_z (.idx(lut_index(z_pre)), .y(z));
    assign rprod = $signed({1'b0, r}) * $signed(gh[2*H + j]);
    assign rgh   = 16'(rprod >>> 8);
    assign n_pre = sat_add16($signed(gx[2*H + j]), rgh);
    tanh_lut u_tanh (.idx(lut_index(n_pre)), .y(n));
    assign hsum  = (18'($signed({1'b0, z})) * 18'(n) + (18'sd256 - 18'($signed({1'b0, z}))) * 18'($signed(h[j]))) >>> 8;
    assign h_new[l] = 8'(hsum);
  end

  // Confidence sigmoid.
  logic [7:0] conf_sig;
  sigmoid_lut u_sig_conf (.idx(lut_index(conf_pre)), .y(conf_sig));

  // Argmax over the class scores.
  logic [7:0] best;
  always_comb begin
    best = '0;
    for (int i = 1; i < C; i++) if ($signed(sc[i]) > $signed(sc[best])) best = 8'(i);
  end

  assign in_ready = (state == ST_IDLE) && !h_clear;
  assign out_h    = h;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_INIT;
      feat       <= '0;
      x1         <= '0;
      x2         <= '0;
      gx         <= '0;
      gh         <= '0;
      h          <= '0;
      sc         <= '0;
      conf_pre   <= '0;
      g          <= '0;
      out_valid  <= 1'b0;
      out_class  <= '0;
      out_conf   <= '0;
      out_scores <= '0;
    end else begin
      out_valid <= 1'b0;

      // Route engine results to the register of the running state.
      if (e_rv) begin
        unique case (state)
          ST1W: begin
            x1[e_idx] <= req_relu_u8(e_a, REQ_M_S, REQ_S_S);
            if (e_bok) x1[e_idx + 1] <= req_relu_u8(e_b, REQ_M_S, REQ_S_S);
          end
          ST2W: begin
            x2[e_idx] <= req_relu_u8(e_a, REQ_M_S, REQ_S_S);
            if (e_bok) x2[e_idx + 1] <= req_relu_u8(e_b, REQ_M_S, REQ_S_S);
          end
          ST3W: begin
            gx[e_idx] <= req_s16(e_a, REQ_M_G, REQ_S_G);
            if (e_bok) gx[e_idx + 1] <= req_s16(e_b, REQ_M_G, REQ_S_G);
          end
          ST0W: begin
            gh[e_idx] <= req_s16(e_a, REQ_M_G, REQ_S_G);
            if (e_bok) gh[e_idx + 1] <= req_s16(e_b, REQ_M_G, REQ_S_G);
          end
          ST4W: begin
            sc[e_idx] <= e_a;
            if (e_bok) sc[e_idx + 1] <= e_b;
          end
          ST5W: conf_pre <= req_s16(e_a, REQ_M_C, REQ_S_C);
          default: ;
        endcase
      end

      unique case (state)
        ST_INIT: begin h <= '0; state <= ST0; end
        ST0:     state <= ST0W;
        ST0W:    if (e_done) state <= ST_IDLE;
        ST_IDLE: begin
          if (h_clear) begin
            h     <= '0;
            state <= ST0;
          end else if (in_valid) begin
            feat  <= in_feat;
            state <= ST1;
          end
        end
        ST1:     state <= ST1W;
        ST1W:    if (e_done) state <= ST2;
        ST2:     state <= ST2W;
        ST2W:    if (e_done) state <= ST3;
        ST3:     state <= ST3W;
        ST3W:    if (e_done) begin g <= '0; state <= ST_GATE; end
        ST_GATE: begin
          h[2*g]     <= h_new[0];
          h[2*g + 1] <= h_new[1];
          if (g == GW'(H / 2 - 1)) state <= ST4;
          else                     g <= g + 1'b1;
        end
        ST4:     state <= ST4W;
        ST4W:    if (e_done) state <= ST5;
        ST5:     state <= ST5W;
        ST5W:    if (e_done) state <= ST_EMIT;
        ST_EMIT: begin
          out_valid  <= 1'b1;
          out_class  <= best;
          out_conf   <= conf_sig;
          out_scores <= sc;
          state      <= ST0;
        end
        default: state <= ST_INIT;
      endcase
    end
  end
endmodule
