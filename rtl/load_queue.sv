// load_queue: in-flight loads in program order, with a memory-order check
// and optional component-level TMR.
//
// A circular queue of ENTRIES loads.
//  * allocate: when alloc_ready is high the lanes with alloc_valid (packed
//    from lane 0) get slots at the tail; alloc_idx[k] names lane k's slot and
//    tail_pos is the tail before this cycle's allocation, which a store
//    records so that the loads younger than it are known.
//  * address: each addr_en port writes the executed load's address into slot
//    addr_idx and marks it as having executed.
//  * order check: chk_valid presents a store whose address has just resolved,
//    with chk_pos = the load-queue tail recorded when the store was
//    allocated.  If an executed load younger than the store read the same
//    8-byte word, violation is raised and viol_idx names the oldest such
//    load, which the pipeline must replay.  Combinational.
//  * retire: the retire_n oldest loads leave at the edge.  flush empties it.
// The size (32) is the paper's; the protocol, word-granular compare and the
// port counts are this design's own.  HARDEN=1 triplicates all state and
// votes the outputs.  The fault port flips bit fi_bitpos of slot fi_idx's
// {executed, address} word in replica fi_rep.
module load_queue #(
  parameter int ENTRIES = 32,
  parameter int ALLOC_W = 4,
  parameter int AP      = 2,
  parameter int CP      = 2,
  parameter int RET_W   = 4,
  parameter int AW      = 64,
  parameter bit HARDEN  = 1'b0,
  localparam int IW     = $clog2(ENTRIES),
  localparam int CW     = $clog2(ENTRIES + 1),
  localparam int RW     = $clog2(RET_W + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        flush,
  input  logic [ALLOC_W-1:0]          alloc_valid,
  output logic                        alloc_ready,
  output logic [ALLOC_W-1:0][IW-1:0]  alloc_idx,
  output logic [IW-1:0]               tail_pos,
  input  logic [AP-1:0]               addr_en,
  input  logic [AP-1:0][IW-1:0]       addr_idx,
  input  logic [AP-1:0][AW-1:0]       addr,
  input  logic [CP-1:0]               chk_valid,
  input  logic [CP-1:0][AW-1:0]       chk_addr,
  input  logic [CP-1:0][IW-1:0]       chk_pos,
  output logic [CP-1:0]               violation,
  output logic [CP-1:0][IW-1:0]       viol_idx,
  input  logic [RW-1:0]               retire_n,
  output logic [CW-1:0]               count,
  input  logic                        fi_en,
  input  logic [1:0]                  fi_rep,
  input  logic [15:0]                 fi_idx,
  input  logic [15:0]                 fi_bitpos,
  output logic                        mismatch
);
  localparam int NREP = HARDEN ? 3 : 1;
  localparam int EW   = AW + 1;                       // {executed, address}
  localparam int OW   = 1 + ALLOC_W * IW + IW + CP + CP * IW + CW;

  function automatic logic [IW-1:0] wrap(int x);
    return IW'(x % ENTRIES);
  endfunction

  logic [2:0][OW-1:0] rep_out;

  for (genvar r = 0; r < 3; r++) begin : g_rep
    if (r < NREP) begin : g_on
      logic [IW-1:0] head_q, tail_q;
      logic [CW-1:0] cnt_q;
      logic [EW-1:0] ent_q [ENTRIES];

      logic                       rdy;
      logic [ALLOC_W-1:0][IW-1:0] aidx;
      logic [CP-1:0]              vio;
      logic [CP-1:0][IW-1:0]      vidx;
      int                         nalloc, nret;

      always_comb begin
        logic [IW-1:0] i;
        int sdist;
        rdy    = (int'(cnt_q) + ALLOC_W <= ENTRIES);
        nalloc = 0;
        nret   = (int'(retire_n) < int'(cnt_q)) ? int'(retire_n) : int'(cnt_q);
        for (int k = 0; k < ALLOC_W; k++) begin
          aidx[k] = wrap(int'(tail_q) + k);
          if (alloc_valid[k] && rdy) nalloc = k + 1;
        end
        vio  = '0;
        vidx = '0;
        for (int p = 0; p < CP; p++) begin
          sdist = (int'(chk_pos[p]) - int'(head_q) + ENTRIES) % ENTRIES;
          for (int d = ENTRIES - 1; d >= 0; d--) begin
            i = wrap(int'(head_q) + d);
            if (chk_valid[p] && d < int'(cnt_q) && d >= sdist && ent_q[i][AW] &&
                ent_q[i][AW-1:3] == chk_addr[p][AW-1:3]) begin
              vio[p]  = 1'b1;
              vidx[p] = i;
            end
          end
        end
      end

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          head_q <= '0;
          tail_q <= '0;
          cnt_q  <= '0;
          for (int i = 0; i < ENTRIES; i++) ent_q[i] <= '0;
        end else if (flush) begin
          head_q <= '0;
          tail_q <= '0;
          cnt_q  <= '0;
        end else begin
          for (int k = 0; k < ALLOC_W; k++)
            if (k < nalloc) ent_q[aidx[k]] <= '0;
          for (int p = 0; p < AP; p++)
            if (addr_en[p]) ent_q[addr_idx[p]] <= {1'b1, addr[p]};
          head_q <= wrap(int'(head_q) + nret);
          tail_q <= wrap(int'(tail_q) + nalloc);
          cnt_q  <= CW'(int'(cnt_q) + nalloc - nret);
          if (fi_en && fi_rep == 2'(r) && int'(fi_idx) < ENTRIES && int'(fi_bitpos) < EW)
            ent_q[fi_idx[IW-1:0]] <= ent_q[fi_idx[IW-1:0]] ^ (EW'(1) << fi_bitpos);
        end
      end

      assign rep_out[r] = {rdy, aidx, tail_q, vio, vidx, cnt_q};
    end else begin : g_off
      assign rep_out[r] = '0;
    end
  end

  tmr_merge #(.W(OW), .HARDEN(HARDEN)) u_merge (
    .rep_out(rep_out),
    .y({alloc_ready, alloc_idx, tail_pos, violation, viol_idx, count}),
    .mismatch(mismatch)
  );

  a_packed: assert property (@(posedge clk) disable iff (!rst_n)
                             ((alloc_valid & (alloc_valid + 1'b1)) == '0))
    else $error("load_queue: allocation lanes must be packed from lane 0");
endmodule
