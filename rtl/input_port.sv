// input_port: one of the seven input ports of the SHER-3DR router.
//
// Buffer writing (pipeline stage 1): the flit arriving on the link is
// checked by the ECC decoder. A clean or corrected flit is written into the
// Random Access Buffer; an uncorrectable one is refused with arq_o so the
// upstream router sends it again. stop_o (buffer full) is the input port
// manager's back-pressure to the upstream router.
//
// Next-port computation (stage 2, with its redundant copy): the LAFT unit
// works on the flit at the head of the buffer and yields the output to
// request in this router and the port the flit will take in the next
// router. That pair, with the request bit, goes through a ser_manager:
// computed in phase C1 from the live head/status (which are snapshotted),
// recomputed in C2 from the snapshot, voted in C3 after a disagreement in
// any stage of the router. The request (req_o, req_port_o) is recomputed in
// every phase so the switch allocator's redundant pass sees it again.
//
// Crossbar traversal (stage 3): when the committed grant arrives
// (granted_i, only during a commit), the head is popped and offered on
// xbar_flit_o with its next-port field replaced by the committed result.
// The parity is adjusted by encoding only the changed bits (the code is
// linear), so an error already present in the flit stays detectable.
//
// seu_i flips the lowest bit of the computed new-next-port in the cycle it
// is set (fault injection for a transient upset). The structure (ECC,
// buffer with RAB, LAFT, SER manager, request) follows the original block
// diagram; snapshots and the header rewrite are this design's details.
module input_port
  import feto_pkg::*;
#(
  parameter int  DEPTH = 4,
  parameter logic [2:0] PORT = 3'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            cur_i,
  input  coord_t            dims_i,
  // link from upstream
  input  logic              in_valid_i,
  input  flit_t             in_flit_i,
  output logic              stop_o,
  output logic              arq_o,
  output logic              corrected_o,
  // routing status
  input  logic [NPORTS-1:0] own_fault_i,
  input  logic [NPORTS-1:0] own_cong_i,
  input  node_status_t      nbr_status_i [NPORTS],
  // fault manager control (Input_port_cntrl)
  input  logic              mark_i,
  input  logic [$clog2(DEPTH)-1:0] mark_slot_i,
  output logic [DEPTH-1:0]  slot_faulty_o,
  input  logic [DEPTH-1:0]  slot_defect_i,
  // soft-error redundancy
  input  logic              seu_i,
  input  logic              retry_i,
  output logic              mismatch_o,
  // switch allocation and crossbar
  output logic              req_o,
  output port_e             req_port_o,
  input  logic              granted_i,
  output flit_t             xbar_flit_o,
  output buf_pos_t          pos_o,
  output logic              rerouted_o    // a granted flit was re-routed here
);
  flit_t        dec_flit;
  logic         dec_arq;
  logic         full;
  logic         head_valid;
  flit_t        head_flit;
  logic [$clog2(DEPTH)-1:0] head_slot;
  logic [1:0]   phase;
  logic         commit;
  logic [6:0]   npc_res, npc_commit;

  // snapshot for the redundant computations
  logic              snap_valid;
  logic [NPORTS-1:0] snap_fault, snap_cong;
  node_status_t      snap_nbr [NPORTS];
  logic              use_valid;
  logic [NPORTS-1:0] use_fault, use_cong;
  node_status_t      use_nbr [NPORTS];
  port_e             r_out, r_nnp;
  logic              r_rer;

  ecc_decoder ecc (.flit_i(in_flit_i), .flit_o(dec_flit), .status_o(),
                   .corrected_o(corrected_o), .arq_o(dec_arq));

  assign stop_o = full;
  assign arq_o  = in_valid_i && !full && dec_arq;

  rab #(.DEPTH(DEPTH)) buffer (
    .clk, .rst_n,
    .wr_i(in_valid_i && !full && !dec_arq), .wr_flit_i(dec_flit),
    .rd_i(granted_i),
    .head_valid_o(head_valid), .head_flit_o(head_flit), .head_slot_o(head_slot),
    .full_o(full), .count_o(),
    .mark_i, .mark_slot_i, .faulty_o(slot_faulty_o), .slot_defect_i);

  always_comb begin
    if (phase == 2'd1) begin
      use_valid = head_valid;
      use_fault = own_fault_i;
      use_cong  = own_cong_i;
      use_nbr   = nbr_status_i;
    end else begin
      use_valid = snap_valid;
      use_fault = snap_fault;
      use_cong  = snap_cong;
      use_nbr   = snap_nbr;
    end
  end

  laft_routing laft (
    .cur_i, .dims_i, .in_port_i(port_e'(PORT)), .hdr_i(head_flit.hdr),
    .own_fault_i(use_fault), .own_cong_i(use_cong), .nbr_status_i(use_nbr),
    .out_port_o(r_out), .new_next_port_o(r_nnp), .rerouted_o(r_rer));

  // with no flit at the head the result is all zero, so a flit that arrives
  // between two computations of a round cannot cause a false mismatch
  assign npc_res = use_valid ? {1'b1, r_out, r_nnp ^ {2'b00, seu_i}} : '0;

  ser_manager #(.W(7)) ser (
    .clk, .rst_n, .result_i(npc_res), .retry_i, .phase_o(phase),
    .mismatch_o, .commit_o(commit), .result_o(npc_commit));

  assign rerouted_o = granted_i && r_rer;
  assign req_o      = npc_res[6];
  assign req_port_o = port_e'(npc_res[5:3]);

  // Crossbar traversal: rewrite next-port with the committed value.
  always_comb begin
    flit_t   f;
    header_t h_new;
    f = head_flit;
    h_new = head_flit.hdr;
    h_new.next_port = npc_commit[2:0];
    f.hdr = h_new;
    f.parity = head_flit.parity ^
               ecc_parity({head_flit.hdr ^ h_new, {PAY_W{1'b0}}});
    xbar_flit_o = f;
    pos_o = '{port: PORT, slot: SLOT_W'(head_slot)};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      snap_valid <= 1'b0;
      snap_fault <= '0;
      snap_cong  <= '0;
      for (int p = 0; p < NPORTS; p++) snap_nbr[p] <= '0;
    end else if (phase == 2'd1) begin
      snap_valid <= head_valid;
      snap_fault <= own_fault_i;
      snap_cong  <= own_cong_i;
      snap_nbr   <= nbr_status_i;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) granted_i |-> commit && npc_commit[6]);
endmodule
