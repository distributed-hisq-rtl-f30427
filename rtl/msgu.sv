// msgu: message unit, executes the HISQ send and recv instructions.
//
// Classical data such as measurement results travels between neighbouring
// controllers over point-to-point links. send rs1,rs2 looks up the link whose
// configured neighbour address equals rs1 and puts the 32-bit value rs2 on it
// for one cycle. Every link has a small receive FIFO; recv rd,src takes the
// oldest word from the FIFO of the link to neighbour src, and the pipeline
// stalls while that FIFO is empty.
//
// The architecture only names this unit and the two instructions and leaves
// its working out; everything here (one word per message, per-link FIFOs of
// RXDEPTH words, addressing by neighbour address, sends never blocking) is the
// simplest scheme that does the job and is this design's own. A send to an
// unknown address and a word arriving at a full FIFO set the sticky err flag
// and are dropped.
//
// Results from the node's own analog part (for example measurement outcomes
// of a readout board, the "Results" path from the analog implementation back
// to the core) enter through res_valid/res_data into one more FIFO of the same
// kind, which recv reads when src is the node's own address my_id. Feeding
// results through recv is this design's choice; the architecture shows the
// path but not how programs read it.
//
// Timing: send_ready is always high and the word leaves in the cycle of the
// send; a word arriving in cycle c can be received from cycle c+1.
module msgu
  import hisq_pkg::*;
#(
  parameter int NB      = 4,
  parameter int RXDEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] nb_id [NB],
  input  logic [ADDR_W-1:0] my_id,
  // results from the local analog part
  input  logic              res_valid,
  input  logic [XLEN-1:0]   res_data,
  // pipeline side
  input  logic              send_valid,
  input  logic [ADDR_W-1:0] send_dst,
  input  logic [XLEN-1:0]   send_data,
  output logic              send_ready,
  input  logic              recv_req,
  input  logic [ADDR_W-1:0] recv_src,
  output logic              recv_valid,
  output logic [XLEN-1:0]   recv_data,
  // links
  output logic [NB-1:0]     tx_valid,
  output logic [XLEN-1:0]   tx_data,
  input  logic [NB-1:0]     rx_valid,
  input  logic [XLEN-1:0]   rx_data [NB],
  output logic              err
);
  localparam int PW = $clog2(RXDEPTH);
  localparam int NC = NB + 1;     // receive channels: NB links + local results

  logic [XLEN-1:0] buf_q [NC][RXDEPTH];
  logic [PW-1:0]   wp [NC], rp [NC];
  logic [PW:0]     cnt [NC];

  logic [NB-1:0]   dst_hit;
  logic [NC-1:0]   src_hit, pop, in_v;
  logic [XLEN-1:0] in_d [NC];
  always_comb begin
    for (int k = 0; k < NB; k++) begin
      dst_hit[k] = (nb_id[k] == send_dst);
      src_hit[k] = (nb_id[k] == recv_src);
      in_v[k]    = rx_valid[k];
      in_d[k]    = rx_data[k];
    end
    src_hit[NB] = (my_id == recv_src);
    in_v[NB]    = res_valid;
    in_d[NB]    = res_data;
  end

  assign send_ready = 1'b1;
  assign tx_valid   = send_valid ? dst_hit : '0;
  assign tx_data    = send_data;

  always_comb begin
    recv_valid = 1'b0;
    recv_data  = '0;
    pop        = '0;
    for (int k = NC-1; k >= 0; k--)
      if (src_hit[k]) begin
        recv_valid = (cnt[k] != '0);
        recv_data  = buf_q[k][rp[k]];
        pop        = recv_req ? (NC'(cnt[k] != '0) << k) : '0;
      end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NC; k++)
      if (in_v[k] && cnt[k] != (PW+1)'(RXDEPTH)) buf_q[k][wp[k]] <= in_d[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NC; k++) begin
        wp[k] <= '0; rp[k] <= '0; cnt[k] <= '0;
      end
      err <= 1'b0;
    end else begin
      if (send_valid && dst_hit == '0) err <= 1'b1;
      for (int k = 0; k < NC; k++) begin
        logic in_ok;
        in_ok = in_v[k] && (cnt[k] != (PW+1)'(RXDEPTH));
        if (in_v[k] && !in_ok) err <= 1'b1;
        if (in_ok)  wp[k] <= PW'(wp[k] + 1'b1);
        if (pop[k]) rp[k] <= PW'(rp[k] + 1'b1);
        cnt[k] <= cnt[k] + (in_ok ? 1'b1 : 1'b0) - (pop[k] ? 1'b1 : 1'b0);
      end
    end
  end
endmodule
