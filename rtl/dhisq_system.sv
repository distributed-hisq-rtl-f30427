// dhisq_system: a distributed HISQ control system, the top of the design.
//
// Leaf controllers (HISQ cores) are grouped under routers that form a tree;
// within the controller layer, neighbouring controllers are wired directly to
// each other in a mesh-like way. Two kinds of synchronisation result:
//   - nearby: a 1-bit sync pulse over a direct neighbour link;
//   - region-level: time-points sent up the tree, reduced to their maximum by
//     the addressed router and broadcast back down.
// Classical messages (send/recv) use separate data links between the same
// neighbours.
//
// Default configuration: three groups, each of one readout board (8 ports)
// and three control boards (28 ports: 8 XY + 20 Z). Twelve boards is what the
// 66-qubit device of the reference system needs (66 XY lines / 8 = 9 control
// boards, which also give 180 >= 176 Z lines; 11 readout lines / 4 = 3
// readout boards); the grouping into three regions is this design's choice.
// Each group has a leaf router; a root router sits above the three.
//
// Node numbering: node n = g*(CB_PER_GROUP+1) + p, with p = 0 the readout
// board of group g and p = 1..CB_PER_GROUP its control boards; the node's
// address is n. Leaf router g has address 0x81+g, the root 0x80.
// Neighbour links of a node (index k of its NB links):
//   readout board: k < CB_PER_GROUP  -> control board p = k+1 of its group
//   control board: k = 0 -> its group's readout board,
//                  k = 1 -> next control board, k = 2 -> previous one
// The readout-to-control-board links mirror the reference back-plane, where
// each readout board reaches each control board; the chain between control
// boards stands in for the qubit-topology mesh.
//
// Link latencies are parameters (link_delay models the wires). The nearby
// sync counter of each link is set to that link's latency; the defaults 8
// (control to readout) and 6 (readout to control) are the waits that follow
// the sync instructions in the reference two-board experiment. The remote
// sync latency of each ancestor is the round trip through the tree, computed
// below from the link latencies and the router's two register stages.
//
// Ports: run/trig (global start of pipelines and of timers), a program
// loading bus addressed by node, codeword triggers per board, result words
// from each board's analog part (node_res_*, read by the node's program with
// recv from its own address), and per-node status. All ports are plain signals and arrays.
module dhisq_system
  import hisq_pkg::*;
#(
  parameter int N_GROUPS     = 3,
  parameter int CB_PER_GROUP = 3,
  parameter int CB_PORTS     = 28,
  parameter int RO_PORTS     = 8,
  parameter int NB           = 4,
  parameter int MEM_WORDS    = 32768,
  parameter int QDEPTH       = 1024,
  parameter int SYNC_QDEPTH  = 16,
  parameter int LAT_CB2RO    = 8,
  parameter int LAT_RO2CB    = 6,
  parameter int LAT_CB2CB    = 4,
  parameter int LAT_TREE     = 4,   // controller <-> leaf router
  parameter int LAT_RR       = 4    // leaf router <-> root router
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 run,
  input  logic                 trig,
  input  logic                 prog_we,
  input  logic [7:0]           prog_node,
  input  logic [$clog2(MEM_WORDS)-1:0] prog_addr,
  input  logic [31:0]          prog_data,
  output logic [CB_PORTS-1:0]  cb_cw_valid [N_GROUPS*CB_PER_GROUP],
  output logic [CW_W-1:0]      cb_cw_data  [N_GROUPS*CB_PER_GROUP][CB_PORTS],
  input  logic                 node_res_valid [N_GROUPS*(CB_PER_GROUP+1)],
  input  logic [31:0]          node_res_data  [N_GROUPS*(CB_PER_GROUP+1)],
  output logic [RO_PORTS-1:0]  ro_cw_valid [N_GROUPS],
  output logic [CW_W-1:0]      ro_cw_data  [N_GROUPS][RO_PORTS],
  output logic [31:0]          node_pc     [N_GROUPS*(CB_PER_GROUP+1)],
  output logic [3:0]           node_err    [N_GROUPS*(CB_PER_GROUP+1)],
  output logic                 node_pause  [N_GROUPS*(CB_PER_GROUP+1)],
  output logic [ABS_W-1:0]     abs_time,
  output logic [N_GROUPS:0]    router_err
);
  localparam int GS   = CB_PER_GROUP + 1;
  localparam int N    = N_GROUPS * GS;
  localparam int MW   = $bits(sync_msg_t);
  localparam int LAT_LEAF = 2*LAT_TREE + 3;
  localparam int LAT_ROOT = 2*LAT_TREE + 2*LAT_RR + 6;
  localparam logic [ADDR_W-1:0] NO_ADDR   = 8'h7F;
  localparam logic [ADDR_W-1:0] ROOT_ADDR = 8'h80;

  // ---- static wiring tables ------------------------------------------------
  function automatic int peer_node(int n, int k);
    int p;
    p = n % GS;
    if (p == 0) return (k < CB_PER_GROUP) ? n + 1 + k : -1;
    if (k == 0) return n - p;
    if (k == 1) return (p < CB_PER_GROUP) ? n + 1 : -1;
    if (k == 2) return (p > 1) ? n - 1 : -1;
    return -1;
  endfunction

  function automatic int peer_link(int n, int k);
    int p;
    p = n % GS;
    if (p == 0) return 0;
    if (k == 0) return p - 1;
    if (k == 1) return 2;
    return 1;
  endfunction

  function automatic int link_lat(int n, int k);
    if (n % GS == 0) return LAT_RO2CB;
    if (k == 0)      return LAT_CB2RO;
    return LAT_CB2CB;
  endfunction

  // ---- node-side nets ------------------------------------------------------
  logic [NB-1:0]     s_out [N], s_in [N];
  logic [NB-1:0]     m_txv [N], m_rxv [N];
  logic [XLEN-1:0]   m_txd [N];
  logic [XLEN-1:0]   m_rxd [N][NB];
  logic              up_v [N], dn_v [N];
  sync_msg_t         up_m [N], dn_m [N];
  logic [ABS_W-1:0]  n_abs [N];

  assign abs_time = n_abs[0];

  for (genvar n = 0; n < N; n++) begin : g_node
    localparam int G = n / GS;
    localparam int P = n % GS;
    logic [ADDR_W-1:0] nb_id   [NB];
    logic [LAT_W-1:0]  nb_lat  [NB];
    logic [ADDR_W-1:0] anc_id  [2];
    logic [LAT_W-1:0]  anc_lat [2];
    logic [TS_W-1:0]   timer_unused;
    logic [ABS_W-1:0]  abs_n;

    for (genvar k = 0; k < NB; k++) begin : g_cfg
      localparam int PN = peer_node(n, k);
      assign nb_id[k]  = (PN >= 0) ? ADDR_W'(PN) : NO_ADDR;
      assign nb_lat[k] = (PN >= 0) ? LAT_W'(link_lat(n, k)) : LAT_W'(1);
    end
    assign anc_id[0]  = ADDR_W'(8'h81 + G);
    assign anc_lat[0] = LAT_W'(LAT_LEAF);
    assign anc_id[1]  = ROOT_ADDR;
    assign anc_lat[1] = LAT_W'(LAT_ROOT);
    assign n_abs[n]   = abs_n;

    if (P == 0) begin : g_ro
      hisq_core #(.NUM_PORTS(RO_PORTS), .NB(NB), .NA(2), .MEM_WORDS(MEM_WORDS),
                  .QDEPTH(QDEPTH), .SYNC_QDEPTH(SYNC_QDEPTH)) u_core (
        .clk, .rst_n, .run, .trig,
        .prog_we(prog_we && prog_node == 8'(n)), .prog_addr, .prog_data,
        .my_id(ADDR_W'(n)), .nb_id, .nb_lat, .anc_id, .anc_lat,
        .res_valid(node_res_valid[n]), .res_data(node_res_data[n]),
        .sync_out(s_out[n]), .sync_in(s_in[n]),
        .msg_tx_valid(m_txv[n]), .msg_tx_data(m_txd[n]),
        .msg_rx_valid(m_rxv[n]), .msg_rx_data(m_rxd[n]),
        .up_valid(up_v[n]), .up_msg(up_m[n]), .down_valid(dn_v[n]), .down_msg(dn_m[n]),
        .cw_valid(ro_cw_valid[G]), .cw_data(ro_cw_data[G]),
        .pc(node_pc[n]), .timer(timer_unused), .abs_time(abs_n),
        .pause(node_pause[n]), .errors(node_err[n]));
    end else begin : g_cb
      localparam int C = G * CB_PER_GROUP + P - 1;
      hisq_core #(.NUM_PORTS(CB_PORTS), .NB(NB), .NA(2), .MEM_WORDS(MEM_WORDS),
                  .QDEPTH(QDEPTH), .SYNC_QDEPTH(SYNC_QDEPTH)) u_core (
        .clk, .rst_n, .run, .trig,
        .prog_we(prog_we && prog_node == 8'(n)), .prog_addr, .prog_data,
        .my_id(ADDR_W'(n)), .nb_id, .nb_lat, .anc_id, .anc_lat,
        .res_valid(node_res_valid[n]), .res_data(node_res_data[n]),
        .sync_out(s_out[n]), .sync_in(s_in[n]),
        .msg_tx_valid(m_txv[n]), .msg_tx_data(m_txd[n]),
        .msg_rx_valid(m_rxv[n]), .msg_rx_data(m_rxd[n]),
        .up_valid(up_v[n]), .up_msg(up_m[n]), .down_valid(dn_v[n]), .down_msg(dn_m[n]),
        .cw_valid(cb_cw_valid[C]), .cw_data(cb_cw_data[C]),
        .pc(node_pc[n]), .timer(timer_unused), .abs_time(abs_n),
        .pause(node_pause[n]), .errors(node_err[n]));
    end

    // outgoing neighbour links: sync pulse and message word, per direction
    for (genvar k = 0; k < NB; k++) begin : g_link
      localparam int PN = peer_node(n, k);
      localparam int PK = peer_link(n, k);
      if (PN >= 0) begin : g_wire
        link_delay #(.W(1), .LAT(link_lat(n, k))) u_sync_link (
          .clk, .rst_n, .in_valid(s_out[n][k]), .in_data(1'b0),
          .out_valid(s_in[PN][PK]), .out_data());
        link_delay #(.W(XLEN), .LAT(link_lat(n, k))) u_msg_link (
          .clk, .rst_n, .in_valid(m_txv[n][k]), .in_data(m_txd[n]),
          .out_valid(m_rxv[PN][PK]), .out_data(m_rxd[PN][PK]));
      end else begin : g_open
        assign s_in[n][k]  = 1'b0;
        assign m_rxv[n][k] = 1'b0;
        assign m_rxd[n][k] = '0;
      end
    end
  end

  // ---- router tree ---------------------------------------------------------
  logic      lr_pin_v [N_GROUPS], lr_pout_v [N_GROUPS], lr_cout_v [N_GROUPS];
  sync_msg_t lr_pin   [N_GROUPS], lr_pout   [N_GROUPS], lr_cout   [N_GROUPS];
  logic [N_GROUPS-1:0] root_cin_v;
  sync_msg_t root_cin [N_GROUPS];
  logic      root_cout_v;
  sync_msg_t root_cout;

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_leaf
    logic [GS-1:0] cin_v;
    sync_msg_t     cin [GS];
    for (genvar p = 0; p < GS; p++) begin : g_child
      logic [MW-1:0] up_d, dn_d;
      link_delay #(.W(MW), .LAT(LAT_TREE)) u_up (
        .clk, .rst_n, .in_valid(up_v[g*GS+p]), .in_data(up_m[g*GS+p]),
        .out_valid(cin_v[p]), .out_data(up_d));
      assign cin[p] = sync_msg_t'(up_d);
      link_delay #(.W(MW), .LAT(LAT_TREE)) u_dn (
        .clk, .rst_n, .in_valid(lr_cout_v[g]), .in_data(lr_cout[g]),
        .out_valid(dn_v[g*GS+p]), .out_data(dn_d));
      assign dn_m[g*GS+p] = sync_msg_t'(dn_d);
    end

    sync_router #(.N_CHILD(GS), .MY_ADDR(ADDR_W'(8'h81 + g))) u_router (
      .clk, .rst_n, .child_mask({GS{1'b1}}),
      .c_in_valid(cin_v), .c_in(cin),
      .c_out_valid(lr_cout_v[g]), .c_out(lr_cout[g]),
      .p_in_valid(lr_pin_v[g]), .p_in(lr_pin[g]),
      .p_out_valid(lr_pout_v[g]), .p_out(lr_pout[g]),
      .err(router_err[g]));

    logic [MW-1:0] pu_d, pd_d;
    link_delay #(.W(MW), .LAT(LAT_RR)) u_pup (
      .clk, .rst_n, .in_valid(lr_pout_v[g]), .in_data(lr_pout[g]),
      .out_valid(root_cin_v[g]), .out_data(pu_d));
    assign root_cin[g] = sync_msg_t'(pu_d);
    link_delay #(.W(MW), .LAT(LAT_RR)) u_pdn (
      .clk, .rst_n, .in_valid(root_cout_v), .in_data(root_cout),
      .out_valid(lr_pin_v[g]), .out_data(pd_d));
    assign lr_pin[g] = sync_msg_t'(pd_d);
  end

  sync_msg_t root_pout_unused;
  logic      root_pout_v_unused;
  sync_router #(.N_CHILD(N_GROUPS), .MY_ADDR(ROOT_ADDR)) u_root (
    .clk, .rst_n, .child_mask({N_GROUPS{1'b1}}),
    .c_in_valid(root_cin_v), .c_in(root_cin),
    .c_out_valid(root_cout_v), .c_out(root_cout),
    .p_in_valid(1'b0), .p_in('0),
    .p_out_valid(root_pout_v_unused), .p_out(root_pout_unused),
    .err(router_err[N_GROUPS]));
endmodule
