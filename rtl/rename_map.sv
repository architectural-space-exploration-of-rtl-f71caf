// rename_map: register rename map table (integer or floating point), with
// optional component-level TMR.
//
// ARCH entries, one per architectural register, each holding the physical
// register that currently carries it.  NL combinational lookup ports read the
// table (a renamer uses them for the two sources and the old destination of
// each instruction); NU update ports write new mappings on the rising edge,
// the higher-numbered port winning on a clash, so a rename group whose later
// instruction redefines a register leaves the later mapping.  Dependences
// inside one rename group are resolved by the renamer, not here.  Reset maps
// architectural register i to physical register i.
//
// HARDEN=1 triplicates the table and votes the lookup results.  The fault
// port flips one bit of one entry in one replica.  Table size (32 Alpha
// registers) and port counts are this design's choice; the paper names the
// component and lists it among the hardenable ones.
module rename_map #(
  parameter int ARCH   = 32,
  parameter int PW     = 8,
  parameter int NL     = 12,
  parameter int NU     = 4,
  parameter bit HARDEN = 1'b0,
  localparam int AW    = $clog2(ARCH),
  localparam int BW    = (PW > 1) ? $clog2(PW) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NL-1:0][AW-1:0]  lk_areg,
  output logic [NL-1:0][PW-1:0]  lk_preg,
  input  logic [NU-1:0]          up_en,
  input  logic [NU-1:0][AW-1:0]  up_areg,
  input  logic [NU-1:0][PW-1:0]  up_preg,
  input  logic                   fi_en,
  input  logic [1:0]             fi_rep,
  input  logic [15:0]            fi_idx,
  input  logic [15:0]            fi_bitpos,
  output logic                   mismatch
);
  localparam int NREP = HARDEN ? 3 : 1;

  logic [2:0][NL*PW-1:0] rep_out;

  for (genvar r = 0; r < 3; r++) begin : g_rep
    if (r < NREP) begin : g_on
      logic [PW-1:0] map [ARCH];

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < ARCH; i++) map[i] <= PW'(i);
        end else begin
          for (int p = 0; p < NU; p++)
            if (up_en[p]) map[up_areg[p]] <= up_preg[p];
          if (fi_en && fi_rep == 2'(r) && int'(fi_idx) < ARCH && int'(fi_bitpos) < PW)
            map[fi_idx[AW-1:0]][fi_bitpos[BW-1:0]] <= ~map[fi_idx[AW-1:0]][fi_bitpos[BW-1:0]];
        end
      end

      always_comb
        for (int p = 0; p < NL; p++) rep_out[r][p*PW +: PW] = map[lk_areg[p]];
    end else begin : g_off
      assign rep_out[r] = '0;
    end
  end

  tmr_merge #(.W(NL*PW), .HARDEN(HARDEN)) u_merge (
    .rep_out(rep_out), .y(lk_preg), .mismatch(mismatch)
  );
endmodule
