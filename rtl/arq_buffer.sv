// arq_buffer: output register of one router output (one of the seven ARQ
// buffers), placed after the crossbar.
//
// It holds the flit it drives on the link until the downstream router takes
// it. The downstream checks the flit with its ECC decoder in the same cycle:
//   stop_i high  - downstream buffer full, nothing happens, flit held;
//   arq_i high   - uncorrectable error: the flit stays and is sent again in
//                  the next cycle (Automatic Retransmission Request);
//   otherwise    - accepted (sent_o), the register is free.
// drop_i (from the fault manager, after it has declared a permanent fault)
// discards the held flit. The register also remembers where the flit came
// from in this router (input port and buffer slot), which the fault
// manager needs to locate a faulty buffer slot.
//
// Holding a copy for retransmission follows the original design; the
// valid/stop/arq link handshake and dropping after diagnosis are this
// design's choices. load_i may only be raised while free_o.
module arq_buffer
  import feto_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     load_i,
  input  flit_t    load_flit_i,
  input  buf_pos_t load_pos_i,
  output logic     free_o,
  output buf_pos_t pos_o,
  // link
  output logic     out_valid_o,
  output flit_t    out_flit_o,
  input  logic     stop_i,
  input  logic     arq_i,
  // to the fault manager
  output logic     sent_o,
  output logic     arq_ev_o,
  input  logic     drop_i
);
  logic     valid;
  flit_t    flit;
  buf_pos_t pos;

  assign free_o      = !valid;
  assign out_valid_o = valid;
  assign out_flit_o  = flit;
  assign pos_o       = pos;
  assign arq_ev_o    = valid && !stop_i && arq_i;
  assign sent_o      = valid && !stop_i && !arq_i;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid <= 1'b0;
      flit  <= '0;
      pos   <= '0;
    end else if (load_i) begin
      valid <= 1'b1;
      flit  <= load_flit_i;
      pos   <= load_pos_i;
    end else if (drop_i || sent_o) begin
      valid <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) load_i |-> !valid);
endmodule
