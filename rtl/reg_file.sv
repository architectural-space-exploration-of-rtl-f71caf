// reg_file: physical register file (integer or floating point), with
// optional component-level TMR.
//
// NREGS registers of W bits, NR combinational read ports and NW write ports
// that write on the rising clock edge; when two write ports name the same
// register in one cycle the higher-numbered port wins.  Reads see the value
// written at the previous edge (no write-to-read bypass; a bypass network
// belongs to the pipeline).  Reset clears every register.
//
// HARDEN=1 builds three identical copies of the storage, fed by the same
// inputs, and votes every read port bit by bit (the paper's component-level
// TMR with one majority voter); HARDEN=0 builds one copy.  The fault port
// flips bit fi_bitpos of register fi_idx in replica fi_rep for one cycle,
// modelling a soft error in a storage cell; it has no effect on a replica
// that does not exist.  Sizes come from the paper (256 + 256 registers);
// the port counts are this design's choice.
module reg_file #(
  parameter int NREGS  = 256,
  parameter int W      = 64,
  parameter int NR     = 8,
  parameter int NW     = 6,
  parameter bit HARDEN = 1'b0,
  localparam int AW    = $clog2(NREGS),
  localparam int BW    = $clog2(W)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NR-1:0][AW-1:0]  rd_addr,
  output logic [NR-1:0][W-1:0]   rd_data,
  input  logic [NW-1:0]          wr_en,
  input  logic [NW-1:0][AW-1:0]  wr_addr,
  input  logic [NW-1:0][W-1:0]   wr_data,
  input  logic                   fi_en,
  input  logic [1:0]             fi_rep,
  input  logic [15:0]            fi_idx,
  input  logic [15:0]            fi_bitpos,
  output logic                   mismatch
);
  localparam int NREP = HARDEN ? 3 : 1;

  logic [2:0][NR*W-1:0] rep_out;

  for (genvar r = 0; r < 3; r++) begin : g_rep
    if (r < NREP) begin : g_on
      logic [W-1:0] regs [NREGS];

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < NREGS; i++) regs[i] <= '0;
        end else begin
          for (int p = 0; p < NW; p++)
            if (wr_en[p]) regs[wr_addr[p]] <= wr_data[p];
          if (fi_en && fi_rep == 2'(r) && int'(fi_idx) < NREGS && int'(fi_bitpos) < W)
            regs[fi_idx[AW-1:0]][fi_bitpos[BW-1:0]] <= ~regs[fi_idx[AW-1:0]][fi_bitpos[BW-1:0]];
        end
      end

      always_comb
        for (int p = 0; p < NR; p++) rep_out[r][p*W +: W] = regs[rd_addr[p]];
    end else begin : g_off
      assign rep_out[r] = '0;
    end
  end

  tmr_merge #(.W(NR*W), .HARDEN(HARDEN)) u_merge (
    .rep_out(rep_out), .y(rd_data), .mismatch(mismatch)
  );
endmodule
