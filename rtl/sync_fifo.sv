// sync_fifo: single-clock first-in first-out queue.
//
// Used for the handshake FIFOs that carry dependency tokens between a data
// producer and its consumer (LOAD_INP/COMP, LOAD_WGT/COMP, COMP/SAVE, one
// FIFO per direction), for the per-module instruction queues filled by the
// controller, and for the in-flight request tags of the load modules.
// A word pushed in cycle t is visible on rd_data from cycle t+1 (first-word
// fall-through on a registered array). push is ignored when full and pop when
// empty; the assertions flag a caller that does either. The FIFO itself is
// named by the architecture; depth and timing are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rp];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= incr(wp);
      if (do_pop)  rp <= incr(rp);
      count <= count + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

`ifndef SYNTHESIS
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("sync_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");
`endif
endmodule
