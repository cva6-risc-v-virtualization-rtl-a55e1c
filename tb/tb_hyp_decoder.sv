// tb_hyp_decoder: self-checking testbench of the hypervisor instruction
// decoder.
//
// Builds every HLV/HLVX/HSV/SFENCE.VMA/HFENCE encoding with random register
// fields and checks the decoded kind, size and sign, then checks the
// exception rules in all five privilege modes (M, HS, U, VS, VU) with the
// TVM, VTVM and HU controls. Other SYSTEM and non-SYSTEM instructions must
// not be claimed. The decoder is combinational: outputs are sampled 1 ns
// after the inputs change.
module tb_hyp_decoder;
  import hyp_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] instr;
  priv_e       priv;
  logic        v, tvm, vtvm, hu;
  logic        valid, hldst, ld, st, hlvx, uns, sf, hv, hg, ill, virt;
  logic [1:0]  size;

  hyp_decoder dut (
    .instr_i(instr), .priv_lvl_i(priv), .v_i(v), .tvm_i(tvm), .vtvm_i(vtvm), .hu_i(hu),
    .valid_o(valid), .hyp_ldst_o(hldst), .is_load_o(ld), .is_store_o(st), .hlvx_o(hlvx), .size_o(size),
    .unsigned_o(uns), .sfence_o(sf), .hfence_vvma_o(hv), .hfence_gvma_o(hg), .illegal_o(ill), .virtual_o(virt));

  // kind: 0 load, 1 store, 2 sfence, 3 hfence.vvma, 4 hfence.gvma
  typedef struct { string name; logic [6:0] f7; logic [4:0] rs2; int kind; logic [1:0] sz; bit u; bit x; } op_t;
  op_t ops [17];

  function automatic logic [31:0] enc(op_t o);
    logic [4:0] rs1, rd, rs2;
    rs1 = 5'($urandom);
    rd  = (o.kind == 0) ? 5'($urandom_range(31, 1)) : 5'd0;
    rs2 = (o.kind == 0) ? o.rs2 : 5'($urandom);
    return {o.f7, rs2, rs1, (o.kind <= 1) ? 3'b100 : 3'b000, rd, 7'b1110011};
  endfunction

  task automatic mode(int m);   // 0 M, 1 HS, 2 U, 3 VS, 4 VU
    case (m)
      0: begin priv = PRIV_M; v = 0; end
      1: begin priv = PRIV_S; v = 0; end
      2: begin priv = PRIV_U; v = 0; end
      3: begin priv = PRIV_S; v = 1; end
      default: begin priv = PRIV_U; v = 1; end
    endcase
  endtask

  initial begin
    ops[0]  = '{"HLV.B",    7'b0110000, 5'd0, 0, 2'd0, 0, 0};
    ops[1]  = '{"HLV.BU",   7'b0110000, 5'd1, 0, 2'd0, 1, 0};
    ops[2]  = '{"HLV.H",    7'b0110010, 5'd0, 0, 2'd1, 0, 0};
    ops[3]  = '{"HLV.HU",   7'b0110010, 5'd1, 0, 2'd1, 1, 0};
    ops[4]  = '{"HLVX.HU",  7'b0110010, 5'd3, 0, 2'd1, 1, 1};
    ops[5]  = '{"HLV.W",    7'b0110100, 5'd0, 0, 2'd2, 0, 0};
    ops[6]  = '{"HLV.WU",   7'b0110100, 5'd1, 0, 2'd2, 1, 0};
    ops[7]  = '{"HLVX.WU",  7'b0110100, 5'd3, 0, 2'd2, 1, 1};
    ops[8]  = '{"HLV.D",    7'b0110110, 5'd0, 0, 2'd3, 0, 0};
    ops[9]  = '{"HSV.B",    7'b0110001, 5'd0, 1, 2'd0, 0, 0};
    ops[10] = '{"HSV.H",    7'b0110011, 5'd0, 1, 2'd1, 0, 0};
    ops[11] = '{"HSV.W",    7'b0110101, 5'd0, 1, 2'd2, 0, 0};
    ops[12] = '{"HSV.D",    7'b0110111, 5'd0, 1, 2'd3, 0, 0};
    ops[13] = '{"SFENCE.VMA",  7'b0001001, 5'd0, 2, 2'd0, 0, 0};
    ops[14] = '{"HFENCE.VVMA", 7'b0010001, 5'd0, 3, 2'd0, 0, 0};
    ops[15] = '{"HFENCE.GVMA", 7'b0110001, 5'd0, 4, 2'd0, 0, 0};
    ops[16] = '{"HFENCE.GVMA", 7'b0110001, 5'd0, 4, 2'd0, 0, 0};
    tvm = 0; vtvm = 0; hu = 0; mode(0);

    // ---- decode of every encoding
    foreach (ops[i]) begin
      for (int k = 0; k < 8; k++) begin
        instr = enc(ops[i]); #1;
        check(valid && ld == (ops[i].kind == 0) && st == (ops[i].kind == 1) && sf == (ops[i].kind == 2)
              && hv == (ops[i].kind == 3) && hg == (ops[i].kind == 4), {ops[i].name, ": kind"});
        if (ops[i].kind <= 1)
          check(hldst && size == ops[i].sz && uns == ops[i].u && hlvx == ops[i].x, {ops[i].name, ": size/sign"});
      end
    end

    // ---- exception rules in every mode
    for (int m = 0; m < 5; m++) begin
      for (int c = 0; c < 8; c++) begin
        bit e_ill, e_virt;
        tvm = c[0]; vtvm = c[1]; hu = c[2]; mode(m);
        foreach (ops[i]) begin
          instr = enc(ops[i]); #1;
          e_ill = 0; e_virt = 0;
          case (ops[i].kind)
            0, 1: begin
              if (m >= 3) e_virt = 1;
              else if (m == 2 && !hu) e_ill = 1;
            end
            2: begin
              if (m == 2) e_ill = 1;
              else if (m == 4) e_virt = 1;
              else if (m == 1 && tvm) e_ill = 1;
              else if (m == 3 && vtvm) e_virt = 1;
            end
            3: begin
              if (m >= 3) e_virt = 1; else if (m == 2) e_ill = 1;
            end
            default: begin
              if (m >= 3) e_virt = 1; else if (m == 2) e_ill = 1; else if (m == 1 && tvm) e_ill = 1;
            end
          endcase
          check(ill == e_ill && virt == e_virt,
                $sformatf("%s mode %0d tvm %0d vtvm %0d hu %0d: ill %0d virt %0d", ops[i].name, m, tvm, vtvm, hu, ill, virt));
        end
      end
    end

    // ---- not claimed: ordinary loads, CSR ops, ECALL, WFI, reserved rs2, HLV.DU, HSV with rd != 0
    begin
      logic [31:0] others [8];
      others[0] = 32'h0000_3083;                        // ld
      others[1] = 32'h3000_2073;                        // csrrs mstatus
      others[2] = 32'h0000_0073;                        // ecall
      others[3] = 32'h1050_0073;                        // wfi
      others[4] = {7'b0110000, 5'd2, 5'd1, 3'b100, 5'd3, 7'b1110011};   // reserved rs2
      others[5] = {7'b0110110, 5'd1, 5'd1, 3'b100, 5'd3, 7'b1110011};   // HLV.DU (not defined)
      others[6] = {7'b0110001, 5'd2, 5'd1, 3'b100, 5'd3, 7'b1110011};   // HSV.B with rd != 0
      others[7] = {7'b0110000, 5'd3, 5'd1, 3'b100, 5'd3, 7'b1110011};   // HLVX.BU (not defined)
      mode(1);
      foreach (others[i]) begin
        instr = others[i]; #1;
        check(!valid && !ill && !virt, $sformatf("instruction %08h not claimed", others[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
