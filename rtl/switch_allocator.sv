// switch_allocator: the router's switch allocator with its soft-error
// monitor.
//
// Allocation: each of the 7 outputs is given to at most one of the input
// ports requesting it, by a round-robin arbiter per output (the arbitration
// policy is this design's choice; the original design names the allocator
// only). An output is only offered while its output register (ARQ buffer)
// is free. The 7x7 grant matrix is computed combinationally.
//
// Monitor: the grant matrix goes through a ser_manager, so it is computed
// twice (SA and redundant SA) and voted over three computations after a
// disagreement. The requests are recomputed by the input ports in every
// phase (from their own snapshots), so an upset in a request is caught here
// too; the output-free flags are taken live in C1 and from a snapshot in
// C2 and C3. Round-robin pointers move only when the grants
// are committed. seu_i flips grant bit [0][0] in the cycle it is set: a
// fault-injection input modelling a transient upset in the allocation
// logic.
//
// Interface: req_i[i] with req_port_i[i] per input; out_free_i per output.
// grant_o[o][i] is valid while commit_o is high (phase C2, or C3 after a
// retry). retry_i/mismatch_o/phase_o connect to the other ser_managers of
// the router.
module switch_allocator
  import feto_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NPORTS-1:0]       req_i,
  input  port_e                   req_port_i [NPORTS],
  input  logic [NPORTS-1:0]       out_free_i,
  input  logic                    seu_i,
  input  logic                    retry_i,
  output logic                    mismatch_o,
  output logic [1:0]              phase_o,
  output logic                    commit_o,
  output logic [NPORTS*NPORTS-1:0] grant_o   // [o*NPORTS + i]
);
  logic [NPORTS-1:0] snap_free;
  logic [NPORTS-1:0] use_free;
  logic [2:0]        rr [NPORTS];   // input with highest priority, per output
  logic [NPORTS*NPORTS-1:0] grant_c;

  assign use_free = (phase_o == 2'd1) ? out_free_i : snap_free;

  always_comb begin
    grant_c = '0;
    for (int o = 0; o < NPORTS; o++) begin
      logic done;
      done = 1'b0;
      for (int k = 0; k < NPORTS; k++) begin
        int i;
        i = (int'(rr[o]) + k) % NPORTS;
        if (!done && use_free[o] && req_i[i] && req_port_i[i] == port_e'(o)) begin
          grant_c[o*NPORTS + i] = 1'b1;
          done = 1'b1;
        end
      end
    end
    grant_c[0] = grant_c[0] ^ seu_i;
  end

  ser_manager #(.W(NPORTS*NPORTS)) monitor (
    .clk, .rst_n, .result_i(grant_c), .retry_i,
    .phase_o, .mismatch_o, .commit_o, .result_o(grant_o));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      snap_free <= '0;
      for (int o = 0; o < NPORTS; o++) rr[o] <= '0;
    end else begin
      if (phase_o == 2'd1) snap_free <= out_free_i;
      if (commit_o) begin
        for (int o = 0; o < NPORTS; o++)
          for (int i = 0; i < NPORTS; i++)
            if (grant_o[o*NPORTS + i]) rr[o] <= 3'((i + 1) % NPORTS);
      end
    end
  end
endmodule
