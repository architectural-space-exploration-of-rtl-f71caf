// issue_queue: out-of-order instruction issue queue (integer or floating
// point), with optional component-level TMR.
//
// ENTRIES slots hold renamed instructions (two source tags with ready bits,
// a destination tag and an opaque payload).  Each cycle:
//  * insert: when ins_ready is high (at least DISP_W free slots) every lane
//    with ins_valid is written into the lowest-numbered free slot; its source
//    ready bits also see this cycle's wakeup broadcast.
//  * wakeup: every WAKE_W broadcast tag sets the matching source ready bits.
//  * select: entries whose sources are both ready are granted to the issue
//    lanes whose fu_ready is high, lowest slot first, and leave the queue at
//    the next edge.  An entry woken in cycle t can issue in cycle t+1.
//  * flush empties the queue.
// Selection by slot position rather than by age, and the timing above, are
// this design's choices; the paper gives the size (64 entries) and names the
// queue as a hardenable component.  HARDEN=1 triplicates all state and votes
// the outputs.  The fault port flips bit fi_bitpos of slot fi_idx (bit
// IQ_ENTRY_W is the slot's valid bit) in replica fi_rep.
module issue_queue
  import hrm_pkg::iq_entry_t, hrm_pkg::PREG_W, hrm_pkg::IQ_ENTRY_W;
#(
  parameter int ENTRIES = 64,
  parameter int DISP_W  = 4,
  parameter int ISSUE_W = 4,
  parameter int WAKE_W  = 6,
  parameter bit HARDEN  = 1'b0,
  localparam int CW     = $clog2(ENTRIES + 1)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             flush,
  input  logic      [DISP_W-1:0]           ins_valid,
  input  iq_entry_t [DISP_W-1:0]           ins_entry,
  output logic                             ins_ready,
  input  logic      [WAKE_W-1:0]           wake_valid,
  input  logic      [WAKE_W-1:0][PREG_W-1:0] wake_tag,
  input  logic      [ISSUE_W-1:0]          fu_ready,
  output logic      [ISSUE_W-1:0]          iss_valid,
  output iq_entry_t [ISSUE_W-1:0]          iss_entry,
  output logic      [CW-1:0]               count,
  input  logic                             fi_en,
  input  logic [1:0]                       fi_rep,
  input  logic [15:0]                      fi_idx,
  input  logic [15:0]                      fi_bitpos,
  output logic                             mismatch
);
  localparam int NREP = HARDEN ? 3 : 1;
  localparam int OW   = 1 + ISSUE_W + ISSUE_W * IQ_ENTRY_W + CW;

  logic [2:0][OW-1:0] rep_out;

  function automatic iq_entry_t wake(iq_entry_t e, logic [WAKE_W-1:0] wv,
                                     logic [WAKE_W-1:0][PREG_W-1:0] wt);
    iq_entry_t o = e;
    for (int w = 0; w < WAKE_W; w++) begin
      if (wv[w] && wt[w] == e.src1) o.src1_rdy = 1'b1;
      if (wv[w] && wt[w] == e.src2) o.src2_rdy = 1'b1;
    end
    return o;
  endfunction

  for (genvar r = 0; r < 3; r++) begin : g_rep
    if (r < NREP) begin : g_on
      logic      [ENTRIES-1:0] v_q, v_d;
      iq_entry_t               e_q [ENTRIES];
      iq_entry_t               e_d [ENTRIES];
      logic      [ISSUE_W-1:0] iv;
      iq_entry_t [ISSUE_W-1:0] ie;
      logic                    rdy;
      logic      [CW-1:0]      cnt;

      always_comb begin
        logic [ISSUE_W-1:0] used;
        logic [ENTRIES-1:0] taken;
        logic               placed;
        logic               granted;
        v_d   = v_q;
        e_d   = e_q;
        iv    = '0;
        ie    = '0;
        used  = '0;
        placed  = 1'b0;
        granted = 1'b0;
        taken = '0;
        cnt   = '0;
        for (int i = 0; i < ENTRIES; i++) cnt += CW'(v_q[i]);
        rdy = (int'(cnt) + DISP_W <= ENTRIES);
        // select
        for (int i = 0; i < ENTRIES; i++) begin
          if (v_q[i] && e_q[i].src1_rdy && e_q[i].src2_rdy) begin
            granted = 1'b0;
            for (int l = 0; l < ISSUE_W; l++) begin
              if (!granted && fu_ready[l] && !used[l]) begin
                used[l] = 1'b1;
                iv[l]   = 1'b1;
                ie[l]   = e_q[i];
                v_d[i]  = 1'b0;
                granted = 1'b1;
              end
            end
          end
        end
        // wakeup of waiting entries
        for (int i = 0; i < ENTRIES; i++) e_d[i] = wake(e_d[i], wake_valid, wake_tag);
        // insert into free slots (slots freed this cycle are reused next cycle)
        if (rdy) begin
          for (int d = 0; d < DISP_W; d++) begin
            if (ins_valid[d]) begin
              placed = 1'b0;
              for (int i = 0; i < ENTRIES; i++) begin
                if (!placed && !v_q[i] && !taken[i]) begin
                  taken[i] = 1'b1;
                  v_d[i]   = 1'b1;
                  e_d[i]   = wake(ins_entry[d], wake_valid, wake_tag);
                  placed   = 1'b1;
                end
              end
            end
          end
        end
        if (flush) v_d = '0;
        // soft error in this replica
        if (fi_en && fi_rep == 2'(r) && int'(fi_idx) < ENTRIES) begin
          if (int'(fi_bitpos) < IQ_ENTRY_W)
            e_d[fi_idx[$clog2(ENTRIES)-1:0]] = e_d[fi_idx[$clog2(ENTRIES)-1:0]] ^ (IQ_ENTRY_W'(1) << fi_bitpos);
          else if (int'(fi_bitpos) == IQ_ENTRY_W)
            v_d[fi_idx[$clog2(ENTRIES)-1:0]] = ~v_d[fi_idx[$clog2(ENTRIES)-1:0]];
        end
      end

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          v_q <= '0;
          for (int i = 0; i < ENTRIES; i++) e_q[i] <= '0;
        end else begin
          v_q <= v_d;
          e_q <= e_d;
        end
      end

      assign rep_out[r] = {rdy, iv, ie, cnt};
    end else begin : g_off
      assign rep_out[r] = '0;
    end
  end

  tmr_merge #(.W(OW), .HARDEN(HARDEN)) u_merge (
    .rep_out(rep_out), .y({ins_ready, iss_valid, iss_entry, count}), .mismatch(mismatch)
  );

  // lanes are offered only while the queue has room for a whole group
  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n) (|ins_valid) |-> ins_ready)
    else $error("issue_queue: insert while not ready, instructions dropped");
endmodule
