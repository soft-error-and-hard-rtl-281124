// crossbar_blod: 7x7 crossbar with Bypass-Link-on-Demand (BLoD).
//
// Each output normally takes its flit through its own crossbar channel, a
// 7:1 multiplexer steered by the committed grant column of that output. The
// BLoD part adds NBYPASS spare channels. When the fault manager asks for a
// bypass for an output (bypass_req_i), the controller assigns the spare
// channels to the requesting outputs in port order; an output that got one
// (bypass_active_o) takes its flit through the spare multiplexer instead of
// its own channel. Outputs beyond the number of spares get none, and the
// fault manager then gives up on that output's link, as in the original
// design ("the number of faulty links are larger than the number of backup
// links"). The number of spare channels is not given in the original
// design; 2 is this design's choice.
//
// xbar_defect_i is a fault-injection input: a set bit makes that output's
// own channel flip DEFECT_MASK, modelling a broken crossbar link; spare
// channels are not affected.
//
// Combinational; flits leave on out_flit_o with out_load_o during a commit
// and are captured by the ARQ buffers.
module crossbar_blod
  import feto_pkg::*;
#(
  parameter int NBYPASS = 2
) (
  input  flit_t                     in_flit_i [NPORTS],
  input  logic                      commit_i,
  input  logic [NPORTS*NPORTS-1:0]  grant_i,   // [o*NPORTS + i]
  input  logic [NPORTS-1:0]         bypass_req_i,
  input  logic [NPORTS-1:0]         xbar_defect_i,
  output logic [NPORTS-1:0]         bypass_active_o,
  output flit_t                     out_flit_o [NPORTS],
  output logic [NPORTS-1:0]         out_load_o
);
  flit_t      main_ch [NPORTS];
  flit_t      byp_ch  [NBYPASS];
  logic [2:0] byp_out [NBYPASS];   // output served by each spare channel
  logic [NBYPASS-1:0] byp_used;
  int unsigned        chan_of [NPORTS];

  // BLoD controller: spare channels to requesting outputs, in port order.
  always_comb begin
    int unsigned k;
    k = 0;
    bypass_active_o = '0;
    byp_used = '0;
    for (int b = 0; b < NBYPASS; b++) byp_out[b] = '0;
    for (int o = 0; o < NPORTS; o++) begin
      chan_of[o] = 0;
      if (bypass_req_i[o] && k < NBYPASS) begin
        bypass_active_o[o] = 1'b1;
        chan_of[o]   = k;
        byp_out[k]   = 3'(o);
        byp_used[k]  = 1'b1;
        k++;
      end
    end
  end

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      main_ch[o] = '0;
      for (int i = 0; i < NPORTS; i++)
        if (grant_i[o*NPORTS + i]) main_ch[o] = in_flit_i[i];
      if (xbar_defect_i[o]) main_ch[o] = flit_t'(main_ch[o] ^ DEFECT_MASK);
    end
    for (int b = 0; b < NBYPASS; b++) begin
      byp_ch[b] = '0;
      for (int i = 0; i < NPORTS; i++)
        if (byp_used[b] && grant_i[int'(byp_out[b])*NPORTS + i]) byp_ch[b] = in_flit_i[i];
    end
    for (int o = 0; o < NPORTS; o++) begin
      out_flit_o[o] = bypass_active_o[o] ? byp_ch[chan_of[o]] : main_ch[o];
      out_load_o[o] = commit_i && |grant_i[o*NPORTS +: NPORTS];
    end
  end
endmodule
