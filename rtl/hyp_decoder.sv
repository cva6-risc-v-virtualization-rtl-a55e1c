// hyp_decoder: decoder extension for the hypervisor instructions.
//
// Recognises, in a 32-bit instruction, the hypervisor virtual-machine
// load/stores HLV.{B,BU,H,HU,W,WU,D}, HLVX.{HU,WU}, HSV.{B,H,W,D} and the
// memory-management fences SFENCE.VMA, HFENCE.VVMA and HFENCE.GVMA, and
// checks whether the current mode may execute them:
//   HLV/HLVX/HSV  virtual instruction in VS/VU; illegal in U unless
//                 hstatus.HU=1
//   HFENCE.*      virtual instruction in VS/VU; illegal in U;
//                 HFENCE.GVMA illegal in HS when mstatus.TVM=1
//   SFENCE.VMA    illegal in U; virtual instruction in VU, and in VS when
//                 hstatus.VTVM=1; illegal in HS when mstatus.TVM=1
// For the load/stores it drives hyp_ldst_o, the signal that travels with the
// instruction to the load/store unit and makes the MMU translate the access
// as a guest access (V=1, privilege hstatus.SPVP); hlvx_o asks for execute
// instead of read permission. size_o is log2 of the access bytes; unsigned_o
// marks zero-extending loads. Purely combinational.
// The paper states that the decoder decodes these instructions and raises
// their VS-mode related exceptions; the encodings and the exception rules are
// those of the RISC-V Hypervisor specification v1.0.
module hyp_decoder
  import hyp_pkg::*;
(
  input  logic [31:0] instr_i,
  input  priv_e       priv_lvl_i,
  input  logic        v_i,
  input  logic        tvm_i,     // mstatus.TVM
  input  logic        vtvm_i,    // hstatus.VTVM
  input  logic        hu_i,      // hstatus.HU
  output logic        valid_o,   // one of the instructions above
  output logic        hyp_ldst_o,
  output logic        is_load_o,
  output logic        is_store_o,
  output logic        hlvx_o,
  output logic [1:0]  size_o,
  output logic        unsigned_o,
  output logic        sfence_o,
  output logic        hfence_vvma_o,
  output logic        hfence_gvma_o,
  output logic        illegal_o,
  output logic        virtual_o
);
  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic [4:0] rs2, rd;
  logic       system, virt;

  assign opcode = instr_i[6:0];
  assign rd     = instr_i[11:7];
  assign funct3 = instr_i[14:12];
  assign rs2    = instr_i[24:20];
  assign funct7 = instr_i[31:25];
  assign system = (opcode == 7'b1110011);
  assign virt   = v_i && (priv_lvl_i != PRIV_M);

  always_comb begin
    is_load_o     = 1'b0;
    is_store_o    = 1'b0;
    hlvx_o        = 1'b0;
    size_o        = 2'd0;
    unsigned_o    = 1'b0;
    sfence_o      = 1'b0;
    hfence_vvma_o = 1'b0;
    hfence_gvma_o = 1'b0;
    if (system && (funct3 == 3'b100)) begin
      // funct7 = 0110 sz 0 : loads (rs2 selects variant), 0110 sz 1 : stores
      if ((funct7[6:3] == 4'b0110) && !funct7[0]) begin
        size_o = funct7[2:1];
        unique case (rs2)
          5'b00000: is_load_o = 1'b1;
          5'b00001: begin is_load_o = (funct7[2:1] != 2'd3); unsigned_o = 1'b1; end
          5'b00011: begin
            is_load_o  = (funct7[2:1] == 2'd1) || (funct7[2:1] == 2'd2);
            hlvx_o     = is_load_o;
            unsigned_o = 1'b1;
          end
          default: ;
        endcase
      end else if ((funct7[6:3] == 4'b0110) && funct7[0] && (rd == 5'd0)) begin
        size_o     = funct7[2:1];
        is_store_o = 1'b1;
      end
    end else if (system && (funct3 == 3'b000) && (rd == 5'd0)) begin
      sfence_o      = (funct7 == 7'b0001001);
      hfence_vvma_o = (funct7 == 7'b0010001);
      hfence_gvma_o = (funct7 == 7'b0110001);
    end
  end

  assign hyp_ldst_o = is_load_o || is_store_o;
  assign valid_o    = hyp_ldst_o || sfence_o || hfence_vvma_o || hfence_gvma_o;

  always_comb begin
    illegal_o = 1'b0;
    virtual_o = 1'b0;
    if (hyp_ldst_o) begin
      if (virt)                                   virtual_o = 1'b1;
      else if ((priv_lvl_i == PRIV_U) && !hu_i)   illegal_o = 1'b1;
    end else if (hfence_vvma_o || hfence_gvma_o) begin
      if (virt)                                   virtual_o = 1'b1;
      else if (priv_lvl_i == PRIV_U)              illegal_o = 1'b1;
      else if (hfence_gvma_o && (priv_lvl_i == PRIV_S) && tvm_i) illegal_o = 1'b1;
    end else if (sfence_o) begin
      if (priv_lvl_i == PRIV_U)                   begin if (v_i) virtual_o = 1'b1; else illegal_o = 1'b1; end
      else if ((priv_lvl_i == PRIV_S) && v_i && vtvm_i)  virtual_o = 1'b1;
      else if ((priv_lvl_i == PRIV_S) && !v_i && tvm_i)  illegal_o = 1'b1;
    end
  end
endmodule
