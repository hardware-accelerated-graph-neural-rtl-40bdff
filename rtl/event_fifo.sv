// event_fifo: synchronous first-in first-out buffer for cochlea events.
//
// Events arrive asynchronously and in bursts; the FIFO decouples their arrival
// from the graph generator, which takes one event roughly every 45 cycles.
// The design description only says that events enter a FIFO; the depth (64),
// the ready/valid handshake on both sides and the first-word-fall-through
// output are this design's choices.
//
// Interface: in_valid/in_ready/in_data on the write side, out_valid/out_ready/
// out_data on the read side; a transfer happens when valid and ready are both
// high at a rising clock edge. out_data shows the oldest entry whenever
// out_valid is high. Latency from write to out_valid is one cycle.
module event_fifo
  import gnn_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  event_t in_data,
  output logic   out_valid,
  input  logic   out_ready,
  output event_t out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);

  event_t        mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;

  logic do_wr, do_rd;
  assign in_ready  = (count < DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];
  assign level     = count;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A full FIFO never takes a write and an empty one never gives a read.
  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
