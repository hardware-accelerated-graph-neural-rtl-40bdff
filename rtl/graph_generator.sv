// graph_generator: builds the spectro-temporal event graph, one event at a time.
//
// A 1-D context memory, addressed by channel, holds the timestamp of the most
// recent event on every cochlea channel. For a new event (ch, t) the module
// reads the 2*R_CH/SKIP+1 = 21 channels ch + k*SKIP, k = -10..10 (the
// "skip-step" pattern), two per clock through the memory's two read ports, so
// the channel search takes 11 cycles. A neighbour becomes an edge when its
// channel exists, has seen an event, and t - t_neighbour <= R_T (temporal
// search). The channels and timestamps of the valid neighbours are summed and
// two sequential dividers (32 cycles) produce their mean (ch_avg, t_avg), the
// event's input feature. The new timestamp is then written at address ch
// (one write cycle). These steps, their cycle counts and the parameter values
// follow the design description (its Fig. 3 and Eq. 2).
//
// This design's own choices: when no neighbour qualifies, the feature is the
// event's own (ch, t); the feature is quantised to two 8-bit codes,
// q_ch = ch_avg*255/(NCH-1) and q_t = t_avg >> (TS_W-8) (time normalised to
// the 2^TS_W us span); the valid bits of the context memory are registers so
// that an event flagged 'last' can clear the whole graph in one cycle, ready
// for the next sample; timestamps compare modulo 2^TS_W.
//
// Interface: ready/valid input of event_t; ready/valid output of the event,
// its edge list (edge_t per candidate, index k+10) and the 2-byte feature.
// Timing: one event every NPAIR + DIV_W + 5 = 48 cycles, output held until
// taken; a new event is accepted only once the previous result has left.
module graph_generator
  import gnn_pkg::*;
#(
  parameter int unsigned NCH    = NUM_CH,
  parameter int unsigned RCH    = R_CH,
  parameter int unsigned STEP   = SKIP,
  parameter int unsigned RT     = R_T,
  parameter int unsigned DIV_W  = 32
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  event_t  in_ev,
  output logic    out_valid,
  input  logic    out_ready,
  output event_t  out_ev,
  output edge_t [2*RCH/STEP:0] out_edges,
  output logic  [1:0][7:0]     out_feat
);
  localparam int unsigned NE    = 2 * RCH / STEP + 1;
  localparam int unsigned HALF  = NE / 2;
  localparam int unsigned NPAIR = (NE + 1) / 2;
  localparam int unsigned PW    = $clog2(NPAIR + 1);
  localparam logic [31:0] QCH_M = 32'((255 * 65536) / (NCH - 1));

  typedef enum logic [2:0] {IDLE, SEARCH, WRITE, DSTART, DIV, OUT} state_t;
  state_t state;

  // Context memory (BRAM): timestamp per channel; valid bits in registers.
  logic [TS_W-1:0] ctx [NCH];
  logic [NCH-1:0]  ctx_v;

  event_t          ev;
  logic [PW-1:0]   pair;
  edge_t [NE-1:0]  edges;
  logic [31:0]     sum_ch, sum_t;
  logic [5:0]      n_nb;

  // Read issue: candidate channels for the two ports.
  logic signed [CH_W+1:0] cha, chb;
  logic                   ina, inb;
  logic [CH_W-1:0]        addra, addrb;
  always_comb begin
    cha   = $signed({2'b0, ev.ch}) + $signed((CH_W+2)'(2*int'(pair) - int'(HALF))) * $signed((CH_W+2)'(STEP));
    chb   = cha + $signed((CH_W+2)'(STEP));
    ina   = (cha >= 0) && (cha < $signed((CH_W+2)'(NCH)));
    inb   = (chb >= 0) && (chb < $signed((CH_W+2)'(NCH))) && ((2*pair + 1) < NE);
    addra = ina ? cha[CH_W-1:0] : '0;
    addrb = inb ? chb[CH_W-1:0] : '0;
  end

  // Registered read data (one-cycle BRAM latency).
  logic            rd_vld;
  logic [PW-1:0]   rd_pair;
  logic [TS_W-1:0] rd_ta, rd_tb;
  logic            rd_oka, rd_okb;
  logic [CH_W-1:0] rd_cha, rd_chb;

  always_ff @(posedge clk) begin
    rd_ta <= ctx[addra];
    rd_tb <= ctx[addrb];
    if (state == WRITE && !ev.last) ctx[ev.ch] <= ev.t;
  end

  // Temporal search of the two read neighbours.
  logic [TS_W-1:0] dta, dtb;
  logic            eda, edb;
  assign dta = ev.t - rd_ta;
  assign dtb = ev.t - rd_tb;
  assign eda = rd_vld && rd_oka && (dta <= TS_W'(RT));
  assign edb = rd_vld && rd_okb && (dtb <= TS_W'(RT));

  // Dividers for the mean neighbour position.
  logic             div_start, div_done_c, div_done_t;
  logic [DIV_W-1:0] q_c, q_t;
  seq_divider #(.W(DIV_W)) u_div_ch (
    .clk, .rst_n, .start(div_start), .dividend(DIV_W'(sum_ch)), .divisor(DIV_W'(n_nb)),
    .busy(), .done(div_done_c), .quotient(q_c), .remainder());
  seq_divider #(.W(DIV_W)) u_div_t (
    .clk, .rst_n, .start(div_start), .dividend(DIV_W'(sum_t)), .divisor(DIV_W'(n_nb)),
    .busy(), .done(div_done_t), .quotient(q_t), .remainder());
  assign div_start = (state == DSTART) && (n_nb != 0);

  assign in_ready  = (state == IDLE);
  assign out_valid = (state == OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      ctx_v    <= '0;
      ev       <= '0;
      pair     <= '0;
      edges    <= '0;
      sum_ch   <= '0;
      sum_t    <= '0;
      n_nb     <= '0;
      rd_vld   <= 1'b0;
      rd_pair  <= '0;
      rd_oka   <= 1'b0;
      rd_okb   <= 1'b0;
      rd_cha   <= '0;
      rd_chb   <= '0;
      out_ev   <= '0;
      out_edges <= '0;
      out_feat <= '0;
    end else begin
      // Read pipeline bookkeeping.
      rd_vld  <= (state == SEARCH);
      rd_pair <= pair;
      rd_oka  <= ina && ctx_v[addra];
      rd_okb  <= inb && ctx_v[addrb];
      rd_cha  <= addra;
      rd_chb  <= addrb;

      // Temporal search results feed the edge list and the accumulator.
      if (rd_vld) begin
        edges[2*rd_pair] <= '{valid: eda, t_diff: dta};
        if ((2*rd_pair + 1) < NE) edges[2*rd_pair+1] <= '{valid: edb, t_diff: dtb};
        sum_ch <= sum_ch + (eda ? 32'(rd_cha) : 32'd0) + (edb ? 32'(rd_chb) : 32'd0);
        sum_t  <= sum_t  + (eda ? 32'(rd_ta)  : 32'd0) + (edb ? 32'(rd_tb)  : 32'd0);
        n_nb   <= n_nb + 6'(eda) + 6'(edb);
      end

      unique case (state)
        IDLE: begin
          if (in_valid) begin
            ev     <= in_ev;
            pair   <= '0;
            sum_ch <= '0;
            sum_t  <= '0;
            n_nb   <= '0;
            edges  <= '0;
            state  <= SEARCH;
          end
        end
        SEARCH: begin
          if (pair == PW'(NPAIR - 1)) state <= WRITE;
          else                        pair  <= pair + 1'b1;
        end
        WRITE: begin
          // The last read pair is accumulated at the end of this cycle.
          state <= DSTART;
        end
        DSTART: state <= DIV;
        DIV: begin
          if (n_nb == 0) begin
            out_feat[0] <= 8'((32'(ev.ch) * QCH_M) >> 16);
            out_feat[1] <= 8'(ev.t >> (TS_W - 8));
            out_ev      <= ev;
            out_edges   <= edges;
            state       <= OUT;
          end else if (div_done_c && div_done_t) begin
            out_feat[0] <= 8'((32'(q_c[CH_W-1:0]) * QCH_M) >> 16);
            out_feat[1] <= 8'(q_t[TS_W-1:0] >> (TS_W - 8));
            out_ev      <= ev;
            out_edges   <= edges;
            state       <= OUT;
          end
        end
        OUT: begin
          if (out_ready) state <= IDLE;
        end
        default: state <= IDLE;
      endcase

      // Context valid bits: set on the write; a sample's last event clears all.
      if (state == WRITE) begin
        if (ev.last) ctx_v <= '0;
        else         ctx_v[ev.ch] <= 1'b1;
      end
    end
  end
endmodule
