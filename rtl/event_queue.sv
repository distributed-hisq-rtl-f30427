// event_queue: first-word-fall-through FIFO holding timed events.
//
// The timing control unit keeps one of these per codeword port and one for
// sync events. Instructions are pushed when the classical pipeline reaches
// them, which is at an imprecise time; the head is inspected every cycle and
// popped at the precise time-point stored in it. The reference
// implementation uses a 38-bit x 1024-entry queue in block RAM, which is the
// default size here.
//
// How it works: the storage array is written at wr_ptr and read synchronously
// every cycle at the address of the head-to-be (rd_ptr, or rd_ptr+1 when the
// head is popped), so the registered read data is always the current head.
// A push into the slot being read is forwarded straight to the head register.
// This gives one push and one pop per cycle with no bubble, so events on the
// same port may be issued on consecutive cycles.
//
// Interface: push/din (ignored when full unless the head is popped in the same cycle), pop (ignored when empty),
// head/head_valid, full, count. Timing: a pushed entry is visible at the head
// one cycle after the push. Reset empties the queue; the array itself is not
// reset.
module event_queue #(
  parameter int W     = 38,
  parameter int DEPTH = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] head,
  output logic         head_valid,
  output logic         full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr, rd_addr;
  logic          do_push, do_pop;

  assign head_valid = (count != '0);
  assign full       = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push    = push && (!full || do_pop);
  assign do_pop     = pop && head_valid;
  assign rd_addr    = do_pop ? AW'(rd_ptr + 1'b1) : rd_ptr;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (do_push && (wr_ptr == rd_addr)) head <= din;
    else                                head <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= AW'(wr_ptr + 1'b1);
      if (do_pop)  rd_ptr <= AW'(rd_ptr + 1'b1);
      count <= count + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("event_queue: push while full");
endmodule
