// laft_routing: Look-Ahead Fault-Tolerant routing (LAFT) for one input port.
//
// Look-ahead routing: the flit already carries the output port it must take
// in this router (next-port, chosen by the previous router). This unit
// computes the port the flit will take in the NEXT router (new-next-port),
// so that routing there can run in parallel with switch allocation:
//   1. next node = this node moved one hop through next-port;
//   2. read the next node's link-fault and congestion status
//      (each neighbour reports them, selected by next-port);
//   3. the at most three minimal directions (one per X/Y/Z dimension)
//      that are healthy at the next node;
//   4. several left: if their path diversities (minimal directions left
//      one hop further) are all equal, take the least congested one,
//      otherwise the one with the largest diversity; exactly one left:
//      take it; none left: take a healthy non-minimal direction.
// Steps 1-4 follow the original algorithm. Tie-breaking (lowest port
// number), the choice among non-minimal directions (uncongested first,
// never back where the flit came from unless nothing else is left) and the
// diversity measure are this design's choices.
//
// If this router has itself declared the link next-port points to faulty
// (the previous router chose it before it learned that), the flit is
// re-routed here with the same selection applied to this node (rerouted_o);
// this local fallback is also this design's addition.
//
// Purely combinational; its result is checked by temporal redundancy in the
// input port (ser_manager).
module laft_routing
  import feto_pkg::*;
(
  input  coord_t            cur_i,        // this node
  input  coord_t            dims_i,       // mesh size (x, y, z counts)
  input  port_e             in_port_i,    // port the flit arrived on
  input  header_t           hdr_i,
  input  logic [NPORTS-1:0] own_fault_i,  // this router's faulty output links
  input  logic [NPORTS-1:0] own_cong_i,
  input  node_status_t      nbr_status_i [NPORTS],  // status of each neighbour
  output port_e             out_port_o,   // port to take in this router
  output port_e             new_next_port_o,
  output logic              rerouted_o
);
  always_comb begin
    port_e  np;
    coord_t nxt;
    np = port_e'(hdr_i.next_port);
    rerouted_o = 1'b0;
    out_port_o = np;
    if (np != P_LOCAL && own_fault_i[np]) begin
      out_port_o = laft_select(cur_i, hdr_i.dest, dims_i, own_fault_i, own_cong_i, in_port_i);
      rerouted_o = 1'b1;
    end
    nxt = step(cur_i, out_port_o);
    if (out_port_o == P_LOCAL) begin
      new_next_port_o = P_LOCAL;
    end else begin
      new_next_port_o = laft_select(nxt, hdr_i.dest, dims_i,
                                    nbr_status_i[out_port_o].link_fault,
                                    nbr_status_i[out_port_o].congested,
                                    opposite(out_port_o));
    end
  end
endmodule
