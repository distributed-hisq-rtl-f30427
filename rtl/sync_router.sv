// sync_router: router node of the tree that carries region-level
// synchronisation.
//
// Every controller (leaf) and every router has a parent router, except the
// root. A region-level sync request is a time-point addressed to one
// ancestor router. The router follows these rules:
//   - a message from the parent is broadcast to all children;
//   - a message from a child is buffered (one slot per child);
//   - once every participating child has delivered its time-point, the router
//     takes the latest of them; if the request is addressed to this router it
//     broadcasts that time-point to all children, otherwise it sends it on to
//     its own parent, still addressed to the same router.
// Children that take part are selected by child_mask (all of them by
// default in the system top); the architecture speaks of "all children" in
// its routing rules and of "a subset of controllers" for the sync
// instruction, and the mask reconciles the two.
//
// Interface: one message in per child and from the parent, each a valid bit
// plus a sync_msg_t; one broadcast output to the children and one output to
// the parent. All outputs are registered: a message that completes a group in
// cycle c leaves in cycle c+1 ... c+2 (buffer, then output register). A child
// that sends a second time-point before its group is complete, or a
// broadcast from the parent colliding with one of this router's own, sets the
// sticky err flag (the parent's broadcast wins). The latest time-point is
// chosen with wrap-around-safe comparison of absolute time.
module sync_router
  import hisq_pkg::*;
#(
  parameter int               N_CHILD = 4,
  parameter logic [ADDR_W-1:0] MY_ADDR = 8'h80
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_CHILD-1:0] child_mask,
  input  logic [N_CHILD-1:0] c_in_valid,
  input  sync_msg_t          c_in [N_CHILD],
  output logic               c_out_valid,   // broadcast to all children
  output sync_msg_t          c_out,
  input  logic               p_in_valid,
  input  sync_msg_t          p_in,
  output logic               p_out_valid,
  output sync_msg_t          p_out,
  output logic               err
);
  logic [N_CHILD-1:0] bv;             // buffered time-point valid
  logic [ABS_W-1:0]   btp [N_CHILD];
  logic [ADDR_W-1:0]  bdest;
  logic               all_in;
  logic [ABS_W-1:0]   tmax;

  assign all_in = (child_mask != '0) && ((bv & child_mask) == child_mask);

  always_comb begin
    logic first;
    first = 1'b1;
    tmax  = '0;
    for (int c = 0; c < N_CHILD; c++)
      if (child_mask[c] && (first || abs_later(btp[c], tmax))) begin
        tmax  = btp[c];
        first = 1'b0;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bv          <= '0;
      bdest       <= '0;
      c_out_valid <= 1'b0;
      c_out       <= '0;
      p_out_valid <= 1'b0;
      p_out       <= '0;
      err         <= 1'b0;
      for (int c = 0; c < N_CHILD; c++) btp[c] <= '0;
    end else begin
      c_out_valid <= 1'b0;
      p_out_valid <= 1'b0;

      if (all_in) begin
        bv <= bv & ~child_mask;
        if (bdest == MY_ADDR) begin
          c_out_valid <= 1'b1;
          c_out       <= '{dest: bdest, tp: tmax};
        end else begin
          p_out_valid <= 1'b1;
          p_out       <= '{dest: bdest, tp: tmax};
        end
      end

      for (int c = 0; c < N_CHILD; c++)
        if (c_in_valid[c]) begin
          if (bv[c] && !(all_in && child_mask[c])) err <= 1'b1;
          bv[c]  <= 1'b1;
          btp[c] <= c_in[c].tp;
          bdest  <= c_in[c].dest;
        end

      if (p_in_valid) begin
        if (all_in && bdest == MY_ADDR) err <= 1'b1;
        c_out_valid <= 1'b1;
        c_out       <= p_in;
      end
    end
  end
endmodule
