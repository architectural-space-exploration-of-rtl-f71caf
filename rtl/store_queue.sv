// store_queue: in-flight stores in program order, with store-to-load
// forwarding, in-order drain to the data cache and optional component-level
// TMR.
//
// A circular queue of ENTRIES stores.
//  * allocate: as in the load queue; tail_pos is the tail before this
//    cycle's allocation, which a load records to know its older stores.
//  * execute: each wr_en port writes address and data of slot wr_idx.
//  * commit: commit_n of the oldest not-yet-committed stores become
//    committed (the re-order buffer retired them).
//  * drain: while the oldest store is committed and executed, drain_valid
//    offers it to the data cache; it leaves when drain_ready is high.
//  * forward: fwd_valid presents a load's address and the store-queue tail
//    recorded for it; fwd_hit/fwd_data return the youngest older store to
//    the same 8-byte word.  Combinational.
//  * flush drops the stores that are not committed; committed ones still
//    drain.
// The size (32) is the paper's; everything about the protocol is this
// design's own.  HARDEN=1 triplicates all state and votes the outputs.  The
// fault port flips bit fi_bitpos of slot fi_idx's {committed, executed,
// address, data} word in replica fi_rep.
module store_queue #(
  parameter int ENTRIES  = 32,
  parameter int ALLOC_W  = 4,
  parameter int AP       = 2,
  parameter int FWD_P    = 2,
  parameter int COMMIT_W = 4,
  parameter int AW       = 64,
  parameter int DW       = 64,
  parameter bit HARDEN   = 1'b0,
  localparam int IW      = $clog2(ENTRIES),
  localparam int CW      = $clog2(ENTRIES + 1),
  localparam int NW      = $clog2(COMMIT_W + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         flush,
  input  logic [ALLOC_W-1:0]           alloc_valid,
  output logic                         alloc_ready,
  output logic [ALLOC_W-1:0][IW-1:0]   alloc_idx,
  output logic [IW-1:0]                tail_pos,
  input  logic [AP-1:0]                wr_en,
  input  logic [AP-1:0][IW-1:0]        wr_idx,
  input  logic [AP-1:0][AW-1:0]        wr_addr,
  input  logic [AP-1:0][DW-1:0]        wr_data,
  input  logic [NW-1:0]                commit_n,
  output logic                         drain_valid,
  output logic [AW-1:0]                drain_addr,
  output logic [DW-1:0]                drain_data,
  input  logic                         drain_ready,
  input  logic [FWD_P-1:0]             fwd_valid,
  input  logic [FWD_P-1:0][AW-1:0]     fwd_addr,
  input  logic [FWD_P-1:0][IW-1:0]     fwd_pos,
  output logic [FWD_P-1:0]             fwd_hit,
  output logic [FWD_P-1:0][DW-1:0]     fwd_data,
  output logic [CW-1:0]                count,
  input  logic                         fi_en,
  input  logic [1:0]                   fi_rep,
  input  logic [15:0]                  fi_idx,
  input  logic [15:0]                  fi_bitpos,
  output logic                         mismatch
);
  localparam int NREP = HARDEN ? 3 : 1;
  localparam int EW   = 2 + AW + DW;        // {committed, executed, addr, data}
  localparam int OW   = 1 + ALLOC_W * IW + IW + 1 + AW + DW + FWD_P + FWD_P * DW + CW;

  function automatic logic [IW-1:0] wrap(int x);
    return IW'(x % ENTRIES);
  endfunction

  logic [2:0][OW-1:0] rep_out;

  for (genvar r = 0; r < 3; r++) begin : g_rep
    if (r < NREP) begin : g_on
      logic [IW-1:0] head_q, tail_q;
      logic [CW-1:0] cnt_q, ccnt_q;          // occupancy, committed occupancy
      logic [EW-1:0] ent_q [ENTRIES];

      logic                       rdy;
      logic [ALLOC_W-1:0][IW-1:0] aidx;
      logic                       dv;
      logic [FWD_P-1:0]           fh;
      logic [FWD_P-1:0][DW-1:0]   fd;
      int                         nalloc, ncommit, ndrain;

      always_comb begin
        logic [IW-1:0] i;
        int ldist;
        rdy     = (int'(cnt_q) + ALLOC_W <= ENTRIES);
        nalloc  = 0;
        for (int k = 0; k < ALLOC_W; k++) begin
          aidx[k] = wrap(int'(tail_q) + k);
          if (alloc_valid[k] && rdy) nalloc = k + 1;
        end
        ncommit = (int'(commit_n) < int'(cnt_q) - int'(ccnt_q)) ? int'(commit_n)
                                                              : int'(cnt_q) - int'(ccnt_q);
        dv      = (cnt_q != '0) && ent_q[head_q][EW-1] && ent_q[head_q][EW-2];
        ndrain  = (dv && drain_ready) ? 1 : 0;
        fh      = '0;
        fd      = '0;
        for (int p = 0; p < FWD_P; p++) begin
          ldist = (int'(fwd_pos[p]) - int'(head_q) + ENTRIES) % ENTRIES;
          if (cnt_q == CW'(ENTRIES) && fwd_pos[p] == head_q) ldist = ENTRIES;
          for (int d = 0; d < ENTRIES; d++) begin
            i = wrap(int'(head_q) + d);
            if (fwd_valid[p] && d < ldist && d < int'(cnt_q) && ent_q[i][EW-2] &&
                ent_q[i][DW+AW-1:DW+3] == fwd_addr[p][AW-1:3]) begin
              fh[p] = 1'b1;
              fd[p] = ent_q[i][DW-1:0];
            end
          end
        end
      end

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          head_q <= '0;
          tail_q <= '0;
          cnt_q  <= '0;
          ccnt_q <= '0;
          for (int i = 0; i < ENTRIES; i++) ent_q[i] <= '0;
        end else begin
          for (int k = 0; k < ALLOC_W; k++)
            if (k < nalloc && !flush) ent_q[aidx[k]] <= '0;
          for (int p = 0; p < AP; p++)
            if (wr_en[p]) ent_q[wr_idx[p]][EW-2:0] <= {1'b1, wr_addr[p], wr_data[p]};
          for (int k = 0; k < COMMIT_W; k++)
            if (k < ncommit) ent_q[wrap(int'(head_q) + int'(ccnt_q) + k)][EW-1] <= 1'b1;
          head_q <= wrap(int'(head_q) + ndrain);
          ccnt_q <= CW'(int'(ccnt_q) + ncommit - ndrain);
          if (flush) begin
            // keep only committed stores (commits of this cycle included)
            tail_q <= wrap(int'(head_q) + int'(ccnt_q) + ncommit);
            cnt_q  <= CW'(int'(ccnt_q) + ncommit - ndrain);
          end else begin
            tail_q <= wrap(int'(tail_q) + nalloc);
            cnt_q  <= CW'(int'(cnt_q) + nalloc - ndrain);
          end
          if (fi_en && fi_rep == 2'(r) && int'(fi_idx) < ENTRIES && int'(fi_bitpos) < EW)
            ent_q[fi_idx[IW-1:0]] <= ent_q[fi_idx[IW-1:0]] ^ (EW'(1) << fi_bitpos);
        end
      end

      assign rep_out[r] = {rdy, aidx, tail_q, dv, ent_q[head_q][DW+AW-1:DW],
                           ent_q[head_q][DW-1:0], fh, fd, cnt_q};
    end else begin : g_off
      assign rep_out[r] = '0;
    end
  end

  tmr_merge #(.W(OW), .HARDEN(HARDEN)) u_merge (
    .rep_out(rep_out),
    .y({alloc_ready, alloc_idx, tail_pos, drain_valid, drain_addr, drain_data,
        fwd_hit, fwd_data, count}),
    .mismatch(mismatch)
  );

  a_packed: assert property (@(posedge clk) disable iff (!rst_n)
                             ((alloc_valid & (alloc_valid + 1'b1)) == '0))
    else $error("store_queue: allocation lanes must be packed from lane 0");
endmodule
