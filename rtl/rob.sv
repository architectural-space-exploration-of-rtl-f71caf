// rob: re-order buffer, with optional component-level TMR.
//
// A circular buffer of ENTRIES in-flight instructions kept in program order.
//  * dispatch: when disp_ready is high (room for DISP_W more) the lanes with
//    disp_valid, which must be packed from lane 0, are written at the tail;
//    disp_idx[k] gives the slot that lane k receives, for the pipeline to
//    carry to completion.
//  * complete: each cmp_valid port marks slot cmp_idx as done.
//  * commit: the oldest entries, up to COMMIT_W of them and stopping at the
//    first that is not done, are presented on commit_valid/commit_payload
//    and leave the buffer at the next edge.  An entry completed in cycle t
//    commits in cycle t+1 at the earliest.
//  * flush empties the buffer (a squash of all in-flight work).
// The payload (destination register, old mapping, type bits) is carried
// unchanged.  The paper gives the size (192 entries) and names the ROB as the
// component whose hardening cuts vulnerability most; the port counts and the
// flush-all recovery are this design's own.  HARDEN=1 triplicates all state
// and votes the outputs.  The fault port flips bit fi_bitpos of slot fi_idx
// (bit PW is the slot's done bit) in replica fi_rep.
module rob #(
  parameter int ENTRIES  = 192,
  parameter int DISP_W   = 4,
  parameter int CMP_W    = 6,
  parameter int COMMIT_W = 4,
  parameter int PW       = 32,
  parameter bit HARDEN   = 1'b0,
  localparam int IW      = $clog2(ENTRIES),
  localparam int CW      = $clog2(ENTRIES + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         flush,
  input  logic [DISP_W-1:0]            disp_valid,
  input  logic [DISP_W-1:0][PW-1:0]    disp_payload,
  output logic                         disp_ready,
  output logic [DISP_W-1:0][IW-1:0]    disp_idx,
  input  logic [CMP_W-1:0]             cmp_valid,
  input  logic [CMP_W-1:0][IW-1:0]     cmp_idx,
  output logic [COMMIT_W-1:0]          commit_valid,
  output logic [COMMIT_W-1:0][PW-1:0]  commit_payload,
  output logic [CW-1:0]                count,
  input  logic                         fi_en,
  input  logic [1:0]                   fi_rep,
  input  logic [15:0]                  fi_idx,
  input  logic [15:0]                  fi_bitpos,
  output logic                         mismatch
);
  localparam int NREP = HARDEN ? 3 : 1;
  localparam int OW   = 1 + DISP_W * IW + COMMIT_W + COMMIT_W * PW + CW;

  function automatic logic [IW-1:0] wrap(int x);
    return IW'((x >= ENTRIES) ? x - ENTRIES : x);
  endfunction

  logic [2:0][OW-1:0] rep_out;

  for (genvar r = 0; r < 3; r++) begin : g_rep
    if (r < NREP) begin : g_on
      logic [IW-1:0] head_q, tail_q;
      logic [CW-1:0] cnt_q;
      logic [ENTRIES-1:0] done_q;
      logic [PW-1:0] pay_q [ENTRIES];

      logic                        rdy;
      logic [DISP_W-1:0][IW-1:0]   didx;
      logic [COMMIT_W-1:0]         cv;
      logic [COMMIT_W-1:0][PW-1:0] cp;
      int                          ncommit, ndisp;

      always_comb begin
        logic stop;
        rdy     = (int'(cnt_q) + DISP_W <= ENTRIES);
        stop    = 1'b0;
        ncommit = 0;
        ndisp   = 0;
        cv      = '0;
        cp      = '0;
        for (int k = 0; k < DISP_W; k++) begin
          didx[k] = wrap(int'(tail_q) + k);
          if (disp_valid[k] && rdy) ndisp = k + 1;
        end
        for (int k = 0; k < COMMIT_W; k++) begin
          if (!stop && k < int'(cnt_q) && done_q[wrap(int'(head_q) + k)]) begin
            cv[k]   = 1'b1;
            cp[k]   = pay_q[wrap(int'(head_q) + k)];
            ncommit = k + 1;
          end else begin
            stop = 1'b1;
          end
        end
      end

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          head_q <= '0;
          tail_q <= '0;
          cnt_q  <= '0;
          done_q <= '0;
          for (int i = 0; i < ENTRIES; i++) pay_q[i] <= '0;
        end else if (flush) begin
          head_q <= '0;
          tail_q <= '0;
          cnt_q  <= '0;
          done_q <= '0;
        end else begin
          for (int p = 0; p < CMP_W; p++)
            if (cmp_valid[p]) done_q[cmp_idx[p]] <= 1'b1;
          for (int k = 0; k < DISP_W; k++) begin
            if (k < ndisp) begin
              pay_q[didx[k]]  <= disp_payload[k];
              done_q[didx[k]] <= 1'b0;
            end
          end
          head_q <= wrap(int'(head_q) + ncommit);
          tail_q <= wrap(int'(tail_q) + ndisp);
          cnt_q  <= CW'(int'(cnt_q) + ndisp - ncommit);
          if (fi_en && fi_rep == 2'(r) && int'(fi_idx) < ENTRIES) begin
            if (int'(fi_bitpos) < PW)
              pay_q[fi_idx[IW-1:0]] <= pay_q[fi_idx[IW-1:0]] ^ (PW'(1) << fi_bitpos);
            else if (int'(fi_bitpos) == PW)
              done_q[fi_idx[IW-1:0]] <= ~done_q[fi_idx[IW-1:0]];
          end
        end
      end

      assign rep_out[r] = {rdy, didx, cv, cp, cnt_q};
    end else begin : g_off
      assign rep_out[r] = '0;
    end
  end

  tmr_merge #(.W(OW), .HARDEN(HARDEN)) u_merge (
    .rep_out(rep_out),
    .y({disp_ready, disp_idx, commit_valid, commit_payload, count}),
    .mismatch(mismatch)
  );

  a_packed: assert property (@(posedge clk) disable iff (!rst_n)
                             ((disp_valid & (disp_valid + 1'b1)) == '0))
    else $error("rob: dispatch lanes must be packed from lane 0");
  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n) (|disp_valid) |-> disp_ready)
    else $error("rob: dispatch while full");
endmodule
