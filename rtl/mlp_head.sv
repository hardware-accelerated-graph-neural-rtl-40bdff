// mlp_head: the classification head in programmable logic.
//
// Two fully connected layers map the pooled feature vector (F bytes) to H
// hidden units with ReLU and then to C class scores; the predicted class is
// the index of the largest score. Both layers run on one mv_engine (a weight
// memory with two vec_mul units, two rows per clock), as in the description's
// PL-head variant with 8-bit weights and activations. The hidden layer is
// requantised to 8 bits (REQ_M, REQ_S); the class scores are left as 32-bit
// accumulators, since softmax does not change which class is largest. The
// memory layout (rows 0..H-1 first layer, rows H..H+C-1 second layer, inputs
// zero-padded to max(F, H)), argmax instead of softmax and the requantisation
// constants are this design's choices.
//
// Interface: ready/valid input vector; out_valid pulses for one cycle with
// out_class and out_scores. Latency from acceptance to out_valid is ceil(H/2) + ceil(C/2) + 8 cycles.
module mlp_head
  import gnn_pkg::*;
#(
  parameter int unsigned F     = 64,
  parameter int unsigned H     = 64,
  parameter int unsigned C     = 20,
  parameter int unsigned REQ_M = 1,
  parameter int unsigned REQ_S = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  wload_t               wload,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [F-1:0][7:0]    in_feat,
  output logic                 out_valid,
  output logic [7:0]           out_class,
  output logic signed [C-1:0][31:0] out_scores
);
  localparam int unsigned N = (F > H) ? F : H;

  typedef enum logic [2:0] {IDLE, L1, L1W, L2, L2W, ARG} state_t;
  state_t state;

  logic [F-1:0][7:0]  feat;
  logic [H-1:0][7:0]  hid;
  logic signed [C-1:0][31:0] sc;

  logic                     e_start, e_busy, e_rv, e_bok, e_done;
  logic [9:0]               e_base, e_count, e_idx;
  logic signed [31:0]       e_a, e_b;
  logic signed [N-1:0][8:0] e_x;

  always_comb begin
    e_x = '0;
    if (state == L2 || state == L2W) begin
      for (int i = 0; i < H; i++) e_x[i] = $signed({1'b0, hid[i]});
    end else begin
      for (int i = 0; i < F; i++) e_x[i] = $signed({1'b0, feat[i]});
    end
    e_start = (state == L1) || (state == L2);
    e_base  = (state == L2) ? 10'(H) : 10'd0;
    e_count = (state == L2) ? 10'(C) : 10'(H);
  end

  mv_engine #(.N(N), .ROWS(H + C), .SEL(SEL_MLP)) u_eng (
    .clk, .rst_n, .wload, .start(e_start), .base(e_base), .count(e_count), .x(e_x),
    .busy(e_busy), .res_valid(e_rv), .res_idx(e_idx), .res_b_ok(e_bok),
    .res_a(e_a), .res_b(e_b), .done(e_done));

  // Argmax over the class scores (first index wins a tie).
  logic [7:0] best;
  always_comb begin
    best = '0;
    for (int i = 1; i < C; i++) if ($signed(sc[i]) > $signed(sc[best])) best = 8'(i);
  end

  assign in_ready = (state == IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      feat       <= '0;
      hid        <= '0;
      sc         <= '0;
      out_valid  <= 1'b0;
      out_class  <= '0;
      out_scores <= '0;
    end else begin
      out_valid <= 1'b0;
      if (e_rv) begin
        if (state == L1W) begin
          hid[e_idx] <= req_relu_u8(e_a, REQ_M, REQ_S);
          if (e_bok) hid[e_idx + 1] <= req_relu_u8(e_b, REQ_M, REQ_S);
        end else begin
          sc[e_idx] <= e_a;
          if (e_bok) sc[e_idx + 1] <= e_b;
        end
      end
      unique case (state)
        IDLE: if (in_valid) begin feat <= in_feat; state <= L1; end
        L1:   state <= L1W;
        L1W:  if (e_done) state <= L2;
        L2:   state <= L2W;
        L2W:  if (e_done) state <= ARG;
        ARG: begin
          out_valid  <= 1'b1;
          out_class  <= best;
          out_scores <= sc;
          state      <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
