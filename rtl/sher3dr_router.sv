// sher3dr_router: the SHER-3DR soft-error and hard-fault tolerant 3D router.
//
// Seven ports (0 local, 1 north, 2 east, 3 south, 4 west, 5 up, 6 down),
// each with an input_port (ECC check, Random Access Buffer, LAFT routing,
// SER manager), one switch_allocator with its monitor, a crossbar with
// Bypass-Link-on-Demand, seven ARQ buffers on the outputs and a
// fault_manager.
//
// Pipeline, as in the original time chart:
//   cycle 1  buffer writing, with ECC check and correction;
//   cycle 2  next-port computation and switch allocation, in parallel
//            (possible because routing is look-ahead);
//   cycle 3  redundant next-port computation and switch allocation; if both
//            agree, crossbar traversal into the ARQ buffers in this cycle;
//   cycle 4  the flit is on the output link. After a disagreement the
//            whole router spends cycle 4 on a third computation and
//            commits the majority, crossbar traversal included.
// The C1/C2(/C3) phases run continuously, so one allocation round takes
// two cycles (three with a correction) and can move up to seven flits.
//
// Link protocol (this design's choice): out_valid_o/out_flit_o come from
// the ARQ buffer register; the downstream answers in the same cycle with
// out_stop_i (its buffer is full) or out_arq_i (uncorrectable flit). The
// router answers its own upstream links with in_stop_o/in_arq_o.
//
// Neighbour status (prev_node/next_node in the block diagram): status_o
// tells every neighbour which output links this router has declared faulty
// and which output registers are busy (congestion); nbr_status_i[p] is the
// status of the neighbour on port p, used by LAFT.
//
// The router's coordinates come in on pos_i (tied to constants by the
// network) rather than as parameters, so all routers of a mesh are one
// module.
//
// Fault-injection inputs, not part of the original hardware, model physical
// defects and upsets for test: buf_defect_i (per input port and slot),
// xbar_defect_i (per crossbar output channel), seu_i (bits 0-6: next-port
// computation of input port i, bit 7: switch allocation).
module sher3dr_router
  import feto_pkg::*;
#(
  parameter int MESH_X = 4,
  parameter int MESH_Y = 4,
  parameter int MESH_Z = 4,
  parameter int DEPTH  = 4,
  parameter int NBYPASS = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            pos_i,         // this router's (x, y, z)
  // input links
  input  logic [NPORTS-1:0] in_valid_i,
  input  flit_t             in_flit_i [NPORTS],
  output logic [NPORTS-1:0] in_stop_o,
  output logic [NPORTS-1:0] in_arq_o,
  // output links
  output logic [NPORTS-1:0] out_valid_o,
  output flit_t             out_flit_o [NPORTS],
  input  logic [NPORTS-1:0] out_stop_i,
  input  logic [NPORTS-1:0] out_arq_i,
  // neighbour status
  input  node_status_t      nbr_status_i [NPORTS],
  output node_status_t      status_o,
  // fault injection
  input  logic [DEPTH-1:0]  buf_defect_i [NPORTS],
  input  logic [NPORTS-1:0] xbar_defect_i,
  input  logic [NPORTS:0]   seu_i,
  // observation
  output logic [NPORTS-1:0] corrected_o,   // ECC corrected an input flit
  output logic              ser_retry_o,   // a soft error was voted out
  output logic              perm_ev_o,     // permanent fault detected
  output logic [NPORTS-1:0] arq_ev_o,      // ARQ received on an output
  output logic [NPORTS-1:0] drop_o,        // flit dropped after detection
  output logic [NPORTS-1:0] rerouted_o,
  output logic [NPORTS-1:0] bypass_active_o,
  output logic [DEPTH-1:0]  slot_faulty_o [NPORTS]
);
  localparam coord_t DIMS = '{z: COORD_W'(MESH_Z), y: COORD_W'(MESH_Y), x: COORD_W'(MESH_X)};

  logic [NPORTS-1:0] req, mism_ip, granted, out_free, out_load;
  port_e             req_port [NPORTS];
  flit_t             xin [NPORTS];
  flit_t             xout [NPORTS];
  buf_pos_t          ip_pos [NPORTS];
  buf_pos_t          ab_pos [NPORTS];
  buf_pos_t          ld_pos [NPORTS];
  logic [NPORTS*NPORTS-1:0] grant;
  logic              sa_commit, sa_mism, retry;
  logic [1:0]        sa_phase;
  logic [NPORTS-1:0] link_fault, bypass_req, sent, arq_ev, drop;
  logic              rab_mark;
  buf_pos_t          rab_mark_pos;

  assign retry = sa_mism || |mism_ip;
  assign ser_retry_o = retry;
  assign status_o = '{link_fault: link_fault, congested: ~out_free};

  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    assign granted[p] = sa_commit && |{grant[0*NPORTS+p], grant[1*NPORTS+p], grant[2*NPORTS+p],
                                       grant[3*NPORTS+p], grant[4*NPORTS+p], grant[5*NPORTS+p],
                                       grant[6*NPORTS+p]};
    input_port #(.DEPTH(DEPTH), .PORT(3'(p))) ip (
      .clk, .rst_n, .cur_i(pos_i), .dims_i(DIMS),
      .in_valid_i(in_valid_i[p]), .in_flit_i(in_flit_i[p]),
      .stop_o(in_stop_o[p]), .arq_o(in_arq_o[p]), .corrected_o(corrected_o[p]),
      .own_fault_i(link_fault), .own_cong_i(~out_free), .nbr_status_i,
      .mark_i(rab_mark && rab_mark_pos.port == 3'(p)),
      .mark_slot_i($clog2(DEPTH)'(rab_mark_pos.slot)),
      .slot_faulty_o(slot_faulty_o[p]), .slot_defect_i(buf_defect_i[p]),
      .seu_i(seu_i[p]), .retry_i(retry), .mismatch_o(mism_ip[p]),
      .req_o(req[p]), .req_port_o(req_port[p]), .granted_i(granted[p]),
      .xbar_flit_o(xin[p]), .pos_o(ip_pos[p]), .rerouted_o(rerouted_o[p]));
  end

  switch_allocator sa (
    .clk, .rst_n, .req_i(req), .req_port_i(req_port), .out_free_i(out_free),
    .seu_i(seu_i[NPORTS]), .retry_i(retry), .mismatch_o(sa_mism),
    .phase_o(sa_phase), .commit_o(sa_commit), .grant_o(grant));

  crossbar_blod #(.NBYPASS(NBYPASS)) xbar (
    .in_flit_i(xin), .commit_i(sa_commit), .grant_i(grant),
    .bypass_req_i(bypass_req), .xbar_defect_i,
    .bypass_active_o, .out_flit_o(xout), .out_load_o(out_load));

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    always_comb begin
      ld_pos[o] = '0;
      for (int i = 0; i < NPORTS; i++)
        if (grant[o*NPORTS + i]) ld_pos[o] = ip_pos[i];
    end
    arq_buffer ab (
      .clk, .rst_n, .load_i(out_load[o]), .load_flit_i(xout[o]), .load_pos_i(ld_pos[o]),
      .free_o(out_free[o]), .pos_o(ab_pos[o]),
      .out_valid_o(out_valid_o[o]), .out_flit_o(out_flit_o[o]),
      .stop_i(out_stop_i[o]), .arq_i(out_arq_i[o]),
      .sent_o(sent[o]), .arq_ev_o(arq_ev[o]), .drop_i(drop[o]));
  end

  fault_manager fm (
    .clk, .rst_n, .arq_ev_i(arq_ev), .sent_i(sent), .pos_i(ab_pos),
    .bypass_active_i(bypass_active_o), .drop_o(drop),
    .rab_mark_o(rab_mark), .rab_mark_pos_o(rab_mark_pos),
    .bypass_req_o(bypass_req), .link_fault_o(link_fault), .perm_ev_o);

  assign drop_o   = drop;
  assign arq_ev_o = arq_ev;

  // every input port and the allocator stay in the same redundancy phase
  for (genvar p = 0; p < NPORTS; p++) begin : g_lockstep
    assert property (@(posedge clk) disable iff (!rst_n) g_in[p].ip.phase == sa_phase);
  end
endmodule
