// fault_manager: online detection, diagnosis and recovery of permanent
// faults (DDRM) for one router.
//
// Detection, per output: the downstream router checks every flit with its
// ECC decoder and answers an uncorrectable one with an ARQ. The output's
// ARQ counter counts consecutive ARQs and is cleared by a flit that gets
// through. A soft error is gone when the flit is sent again; a second ARQ
// in a row (counter reaches 2) means a permanent fault somewhere between
// this router's input buffer and the downstream input buffer: this
// router's buffer slot, its crossbar channel, or the link. The flit is then
// dropped (drop_o) and diagnosis starts.
//
// Diagnosis and recovery, as in the original algorithm:
//   buffer check   - the buffer position (input port, slot) of the failed
//                    flit is remembered. If the next permanent failure
//                    comes from the same position, that slot is broken and
//                    is handed to the Random Access Buffer (rab_mark_o).
//                    If it comes from another position the fault is in the
//                    crossbar or the link of the failing output:
//   crossbar check - a bypass channel is requested for that output
//                    (bypass_req_o). If the next flit on it gets through,
//                    the bypass has fixed it and stays. If it fails
//                    permanently again, or no bypass channel was free, the
//                    bypass is released and the link is declared faulty
//                    (link_fault_o), which LAFT routing then avoids.
// One remembered position is shared by all outputs (the buffer is checked
// through "the following flits", whatever output they take). Only one
// permanent failure is handled per cycle (lowest port first); the others
// keep being retransmitted and are handled in later cycles. Dropping the
// flit, the shared position register and the one-per-cycle rule are this
// design's choices; the original does not say what happens to the flit.
// The local output (port 0) is monitored like the others.
module fault_manager
  import feto_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPORTS-1:0] arq_ev_i,       // ARQ received on an output
  input  logic [NPORTS-1:0] sent_i,         // flit accepted downstream
  input  buf_pos_t          pos_i [NPORTS], // origin of each output's flit
  input  logic [NPORTS-1:0] bypass_active_i,
  output logic [NPORTS-1:0] drop_o,
  output logic              rab_mark_o,
  output buf_pos_t          rab_mark_pos_o,
  output logic [NPORTS-1:0] bypass_req_o,
  output logic [NPORTS-1:0] link_fault_o,
  output logic              perm_ev_o       // a permanent fault was detected
);
  typedef enum logic [1:0] {
    S_NORMAL   = 2'd0,
    S_XCHECK   = 2'd1,   // crossbar check: bypass in use, on trial
    S_BYPASSED = 2'd2,   // bypass fixed it
    S_LINKDEAD = 2'd3
  } out_state_e;

  out_state_e        st [NPORTS];
  logic [1:0]        cnt [NPORTS];
  logic              sus_valid;
  buf_pos_t          sus_pos;
  logic [NPORTS-1:0] perm;
  logic              found;
  int unsigned       sel;

  always_comb begin
    found = 1'b0;
    sel   = 0;
    for (int o = 0; o < NPORTS; o++) begin
      perm[o] = arq_ev_i[o] && cnt[o] != 2'd0;
      if (perm[o] && !found) begin
        found = 1'b1;
        sel   = o;
      end
    end
    drop_o = '0;
    if (found) drop_o[sel] = 1'b1;
    for (int o = 0; o < NPORTS; o++) begin
      bypass_req_o[o] = (st[o] == S_XCHECK) || (st[o] == S_BYPASSED);
      link_fault_o[o] = st[o] == S_LINKDEAD;
    end
    perm_ev_o = found;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sus_valid      <= 1'b0;
      sus_pos        <= '0;
      rab_mark_o     <= 1'b0;
      rab_mark_pos_o <= '0;
      for (int o = 0; o < NPORTS; o++) begin
        st[o]  <= S_NORMAL;
        cnt[o] <= '0;
      end
    end else begin
      rab_mark_o <= 1'b0;
      for (int o = 0; o < NPORTS; o++) begin
        if (sent_i[o] || drop_o[o]) cnt[o] <= '0;
        else if (arq_ev_i[o] && cnt[o] != 2'd2) cnt[o] <= cnt[o] + 2'd1;
        // a crossbar check that found no free bypass channel
        if (st[o] == S_XCHECK && !bypass_active_i[o]) st[o] <= S_LINKDEAD;
        // a flit got through the bypass: the crossbar fault is fixed
        else if (st[o] == S_XCHECK && sent_i[o]) st[o] <= S_BYPASSED;
      end
      if (found) begin
        case (st[sel])
          S_NORMAL, S_BYPASSED: begin
            if (sus_valid && sus_pos == pos_i[sel]) begin
              rab_mark_o     <= 1'b1;      // same slot again: buffer fault
              rab_mark_pos_o <= pos_i[sel];
              sus_valid      <= 1'b0;
            end else if (!sus_valid) begin
              sus_valid <= 1'b1;           // start the buffer check
              sus_pos   <= pos_i[sel];
            end else begin
              sus_valid <= 1'b0;           // another slot: crossbar or link
              st[sel]   <= (st[sel] == S_NORMAL) ? S_XCHECK : S_LINKDEAD;
            end
          end
          S_XCHECK: st[sel] <= S_LINKDEAD; // bypass did not help: the link
          default: ;
        endcase
      end
    end
  end
endmodule
