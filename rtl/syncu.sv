// syncu: synchronisation unit implementing the booking-based instruction
// synchronisation protocol (BISP).
//
// A sync instruction is scheduled in the TCU like any event; the cycle in
// which it is issued is the booking time B. The sync point lies a fixed,
// pre-configured number of cycles after B, and the code between the sync
// instruction and the synchronous operation must span exactly that many
// cycles. At B this unit sends its announcement and starts counting. At the
// sync point (Condition I: the count is complete) it checks Condition II; if
// that is not yet met it raises pause, which freezes the TCU timer, and drops
// pause in the cycle Condition II becomes true, so the synchronous event is
// issued in that cycle.
//
// Nearby synchronisation (target is a neighbouring controller, link k):
//   at B a one-cycle pulse goes out on sync_out[k]; the count is nb_lat[k],
//   the calibrated transmission delay of that link. An incoming pulse on
//   sync_in[k] sets sync flag k; Condition II is "flag k set, or the pulse
//   arrives in this very cycle"; the flag is cleared when it is consumed.
//   Both controllers then resume in the cycle the later of the two pulses
//   arrives, which is the later of the two sync points.
// Remote synchronisation (target is an ancestor router, entry j):
//   at B a request {router, T = abs_time + anc_lat[j]} goes up to the parent
//   router; the count is anc_lat[j], which must cover the round trip to that
//   router and back. The router answers with Tm, the latest T of the group,
//   which is stored in the absolute-timer buffer. Condition II is "Tm has been
//   received and the absolute timer has reached Tm", so every member resumes
//   exactly at Tm.
//
// The absolute timer is a free-running counter started by the global
// trigger; all nodes receive the trigger in the same cycle and therefore
// share absolute time. One synchronisation may be outstanding at a time; a
// second booking before the first completes, a target that matches no link or
// ancestor, and a Tm that arrives after it has passed set the sticky err flag
// (the late Tm releases at once). A Tm that arrives while no remote
// synchronisation is outstanding is ignored. The two conditions, the counter, the flags
// and the absolute-timer buffer follow the architecture; the address
// comparison tables, widths and the error flag are this design's choices.
//
// Interface timing: sync_out and up_valid are combinational in the booking
// cycle; pause is combinational from the state and sync_in.
module syncu
  import hisq_pkg::*;
#(
  parameter int NB = 4,   // neighbour links
  parameter int NA = 2    // ancestor routers
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trig,
  // configuration
  input  logic [ADDR_W-1:0] nb_id   [NB],
  input  logic [LAT_W-1:0]  nb_lat  [NB],
  input  logic [ADDR_W-1:0] anc_id  [NA],
  input  logic [LAT_W-1:0]  anc_lat [NA],
  // from the TCU
  input  logic              evt_valid,
  input  logic [ADDR_W-1:0] evt_tgt,
  output logic              pause,
  // nearby sync signals
  output logic [NB-1:0]     sync_out,
  input  logic [NB-1:0]     sync_in,
  // remote sync messages
  output logic              up_valid,
  output sync_msg_t         up_msg,
  input  logic              down_valid,
  input  sync_msg_t         down_msg,
  // status
  output logic [ABS_W-1:0]  abs_time,
  output logic              abs_run,
  output logic [NB-1:0]     flags,
  output logic              busy,
  output logic              err
);
  typedef enum logic [1:0] {S_IDLE, S_COUNT, S_WAIT} state_e;

  state_e                 state;
  logic                   remote;      // outstanding sync is remote
  logic [$clog2(NB)-1:0]  link;        // ... on neighbour link
  logic [LAT_W-1:0]       cnt;
  logic [ABS_W-1:0]       tm;          // absolute-timer buffer
  logic                   tm_valid;

  // target lookup
  logic                   hit_nb, hit_anc;
  logic [$clog2(NB)-1:0]  hit_k;
  logic [$clog2(NA)-1:0]  hit_j;
  always_comb begin
    hit_nb = 1'b0; hit_anc = 1'b0; hit_k = '0; hit_j = '0;
    for (int k = NB-1; k >= 0; k--)
      if (nb_id[k] == evt_tgt) begin hit_nb = 1'b1; hit_k = k[$clog2(NB)-1:0]; end
    for (int j = NA-1; j >= 0; j--)
      if (anc_id[j] == evt_tgt) begin hit_anc = 1'b1; hit_j = j[$clog2(NA)-1:0]; end
  end

  logic book_nb, book_anc;
  assign book_nb  = evt_valid && hit_nb && !hit_anc;
  assign book_anc = evt_valid && hit_anc;

  assign sync_out = book_nb ? (NB'(1) << hit_k) : '0;
  assign up_valid = book_anc;
  assign up_msg   = '{dest: evt_tgt, tp: abs_time + ABS_W'(anc_lat[hit_j])};

  // Condition II, evaluated combinationally
  logic cond2, at_point, release_now;
  always_comb begin
    if (remote) cond2 = tm_valid && !abs_later(tm, abs_time);
    else        cond2 = flags[link] || sync_in[link];
  end
  assign at_point    = (state == S_COUNT) && (cnt == '0);
  assign release_now = (at_point || state == S_WAIT) && cond2;
  assign pause       = (at_point || state == S_WAIT) && !cond2;
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      remote   <= 1'b0;
      link     <= '0;
      cnt      <= '0;
      tm       <= '0;
      tm_valid <= 1'b0;
      flags    <= '0;
      abs_time <= '0;
      abs_run  <= 1'b0;
      err      <= 1'b0;
    end else begin
      if (trig) abs_run <= 1'b1;
      if (abs_run || trig) abs_time <= abs_time + 1'b1;

      // sync flags: set by an incoming pulse, cleared when consumed
      for (int k = 0; k < NB; k++)
        if (sync_in[k]) flags[k] <= 1'b1;
      if (release_now && !remote) flags[link] <= 1'b0;

      // absolute-timer buffer
      if (down_valid && busy && remote) begin
        tm       <= down_msg.tp;
        tm_valid <= 1'b1;
        if (abs_later(abs_time, down_msg.tp)) err <= 1'b1;
      end

      unique case (state)
        S_IDLE: ;
        S_COUNT: begin
          if (cnt != '0) cnt <= cnt - 1'b1;
          else if (cond2) state <= S_IDLE;
          else state <= S_WAIT;
        end
        S_WAIT: if (cond2) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (release_now && remote) tm_valid <= 1'b0;

      if (book_nb || book_anc) begin
        if (state != S_IDLE && !release_now) err <= 1'b1;
        state  <= S_COUNT;
        remote <= book_anc;
        link   <= hit_k;
        cnt    <= (book_anc ? anc_lat[hit_j] : nb_lat[hit_k]) - 1'b1;
      end else if (evt_valid) begin
        err <= 1'b1;   // target matches no neighbour and no ancestor
      end
    end
  end

  a_one_outstanding: assert property (@(posedge clk) disable iff (!rst_n)
      evt_valid |-> (state == S_IDLE || release_now))
    else $error("syncu: sync booked while another is outstanding");
endmodule
