// rab: Random Access Buffer, the input buffer of one router input port.
//
// A DEPTH-slot flit store whose controller keeps a fault flag per slot and
// leaves flagged slots out when it picks write and read addresses, so a
// buffer with a failed slot keeps working with one slot less. Slots are
// filled in circular order: the write address is the first healthy free
// slot at or after the write pointer, the read address the first occupied
// slot at or after the read pointer, which keeps flits in arrival order.
// Avoiding flagged slots follows the original design; the circular search
// order is this design's choice.
//
// Interface: wr_i/wr_flit_i write one flit (ignored when full_o); rd_i pops
// the head shown on head_flit_o/head_slot_o while head_valid_o. mark_i with
// mark_slot_i sets a slot's fault flag (from the fault manager); a slot that
// still holds a flit is read once more and then skipped. slot_defect_i is a
// fault-injection input: a set bit makes that slot return its content with
// DEFECT_MASK flipped, modelling a broken storage cell.
//
// Timing: a write is visible at the head in the next cycle; the head and
// full_o come from registers only. Reset (synchronous, active low) empties the buffer and clears all
// fault flags.
module rab
  import feto_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_i,
  input  flit_t                    wr_flit_i,
  input  logic                     rd_i,
  output logic                     head_valid_o,
  output flit_t                    head_flit_o,
  output logic [$clog2(DEPTH)-1:0] head_slot_o,
  output logic                     full_o,
  output logic [$clog2(DEPTH):0]   count_o,
  input  logic                     mark_i,
  input  logic [$clog2(DEPTH)-1:0] mark_slot_i,
  output logic [DEPTH-1:0]         faulty_o,
  input  logic [DEPTH-1:0]         slot_defect_i
);
  localparam int AW = $clog2(DEPTH);

  flit_t            mem   [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [DEPTH-1:0] faulty;
  logic [AW-1:0]    wp, rp;
  logic [AW-1:0]    waddr, raddr;
  logic             wfound, rfound;

  // First slot at or after a pointer (circularly) with the wanted property.
  always_comb begin
    waddr  = wp;
    wfound = 1'b0;
    raddr  = rp;
    rfound = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      logic [AW-1:0] s;
      s = AW'((int'(wp) + i) % DEPTH);
      if (!wfound && !valid[s] && !faulty[s]) begin
        waddr  = s;
        wfound = 1'b1;
      end
      s = AW'((int'(rp) + i) % DEPTH);
      if (!rfound && valid[s]) begin
        raddr  = s;
        rfound = 1'b1;
      end
    end
  end

  assign full_o       = !wfound;
  assign head_valid_o = rfound;
  assign head_slot_o  = raddr;
  assign head_flit_o  = slot_defect_i[raddr] ? flit_t'(mem[raddr] ^ DEFECT_MASK) : mem[raddr];
  assign faulty_o     = faulty;
  assign count_o      = ($clog2(DEPTH)+1)'($countones(valid));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid  <= '0;
      faulty <= '0;
      wp     <= '0;
      rp     <= '0;
    end else begin
      if (wr_i && wfound) begin
        valid[waddr] <= 1'b1;
        wp           <= AW'((int'(waddr) + 1) % DEPTH);
      end
      if (rd_i && rfound) begin
        valid[raddr] <= 1'b0;
        rp           <= AW'((int'(raddr) + 1) % DEPTH);
      end
      if (mark_i) faulty[mark_slot_i] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_i && wfound) mem[waddr] <= wr_flit_i;
  end

  // A pop needs a head.
  assert property (@(posedge clk) disable iff (!rst_n) rd_i |-> rfound);
endmodule
