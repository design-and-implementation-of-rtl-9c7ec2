// bitserial_core: bit-serial RV32I microprocessor (the unprotected NCM core).
//
// The datapath is one bit wide. Three 32-bit shift registers hold all wide
// state: PC, BUF (branch/load/store address or the operand of a shift) and
// DAT (instruction word after fetch, store data shifted in from rs2, load
// data shifted out to rd). Every operation streams its operands LSB first,
// one bit per clock, through small serial adders whose carries are kept in
// flip-flops.
//
// Instruction timing (clock = the core clock):
//   FETCH  (1)  memory address = PC[11:2]
//   LDIR   (1)  DAT <= instruction word
//   PRE0/1 (2)  decoder latches DAT; first register-file words are read
//   EXEC   (32) phase 1: ALU, PC+4 (or jump target) and BUF/DAT shifting
// One-phase instructions (ALU, LUI, AUIPC, JAL, JALR, FENCE) take 36 cycles.
// A store adds one memory cycle (37). A load adds a memory cycle, a capture
// cycle and a 32-cycle phase 2 that shifts DAT into rd (70). A taken branch
// adds a 32-cycle phase 2 that shifts the target from BUF into PC (68);
// a branch not taken takes 36. SLT/SLTU write their one-bit result in a
// 32-cycle phase 2 (68). Shifts run phase 2 for 32 cycles, right shifts after
// a further prelude of shamt cycles that pre-shifts BUF.
//
// Register file: a dual-port SRAM of 2-bit words, address {reg, bitpair}.
// The single read port alternates between rs1 and rs2 (even/odd cycles), so
// each operand gets one bit per cycle; the write port stores two result bits
// every second cycle. x0 is never written, so it reads as zero as long as
// its 16 words are cleared before the core starts.
//
// Memory: single-port synchronous SRAM of 32-bit words, byte enables for SB
// and SH, read data valid the cycle after the request. Accesses must be
// naturally aligned. CSRs, interrupts, ECALL/EBREAK and M-extension are not
// implemented (SYSTEM and FENCE execute as no-operations).
//
// The block structure (PC, BUF, DAT, decoder, serial ALU, 2-bit RF) and the
// 36/70-cycle figures follow the chip's description; the exact phase
// sequencing, the immediate multiplexer and the shift/SLT handling are this
// design's own. Reset is asynchronous and active low, and clock and reset are
// used as nothing but clock and reset, so the netlist can be masked.
module bitserial_core
  import secure_rv_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // main memory
  output logic                 mem_en,
  output logic                 mem_we,
  output logic [3:0]           mem_be,
  output logic [MEM_AW-1:0]    mem_addr,
  output logic [MEM_DW-1:0]    mem_wdata,
  input  logic [MEM_DW-1:0]    mem_rdata,
  // register file SRAM
  output logic                 rf_re,
  output logic [RF_AW-1:0]     rf_raddr,
  input  logic [RF_DW-1:0]     rf_rdata,
  output logic                 rf_we,
  output logic [RF_AW-1:0]     rf_waddr,
  output logic [RF_DW-1:0]     rf_wdata
);

  typedef enum logic [2:0] {
    S_FETCH, S_LDIR, S_PRE0, S_PRE1, S_EXEC, S_MEM, S_MEMW, S_PH2
  } state_e;

  state_e      state;
  logic [4:0]  cnt;
  logic [31:0] pc, bufr, dat, ir;
  logic        c_alu, c_tgt, c_pc4;   // serial adder carries
  logic        neq_q;                 // rs1 != rs2 seen so far
  logic        lt_q;                  // latched comparison result
  logic        sgn_q;                 // rs1[31] (SRA fill) / load sign
  logic [4:0]  sh_q;                  // shift amount, counts down in phase 2
  logic [1:0]  rs1_q;                 // rs1 bit pair
  logic        rs2_hi;                // odd bit of the rs2 pair
  logic        wlo_q;                 // even result bit waiting for its pair

  // ---------------------------------------------------------------- decode
  logic [4:0] opc;
  logic [2:0] f3;
  logic [4:0] rd, rs1, rs2;
  assign opc = ir[6:2];
  assign f3  = ir[14:12];
  assign rd  = ir[11:7];
  assign rs1 = ir[19:15];
  assign rs2 = ir[24:20];

  logic is_load, is_store, is_opimm, is_op, is_lui, is_auipc, is_br, is_jal, is_jalr;
  assign is_load  = (opc == OPC_LOAD);
  assign is_store = (opc == OPC_STORE);
  assign is_opimm = (opc == OPC_OPIMM);
  assign is_op    = (opc == OPC_OP);
  assign is_lui   = (opc == OPC_LUI);
  assign is_auipc = (opc == OPC_AUIPC);
  assign is_br    = (opc == OPC_BRANCH);
  assign is_jal   = (opc == OPC_JAL);
  assign is_jalr  = (opc == OPC_JALR);

  logic is_alu, is_shift, is_sra_srl, is_slt, is_sub;
  assign is_alu     = is_op | is_opimm;
  assign is_shift   = is_alu & (f3[1:0] == 2'b01);
  assign is_sra_srl = is_shift & f3[2];
  assign is_slt     = is_alu & (f3[2:1] == 2'b01);
  assign is_sub     = (is_op & ir[30] & (f3 == 3'b000)) | is_br | is_slt;

  // Immediate, one bit per cycle, selected by the instruction format.
  logic imm_bit;
  always_comb begin
    imm_bit = ir[31];
    if (is_store) begin
      if (cnt <= 5'd4)       imm_bit = ir[5'd7 + cnt];
      else if (cnt <= 5'd10) imm_bit = ir[5'd20 + cnt];
    end else if (is_br) begin
      if (cnt == 5'd0)       imm_bit = 1'b0;
      else if (cnt <= 5'd4)  imm_bit = ir[5'd7 + cnt];
      else if (cnt <= 5'd10) imm_bit = ir[5'd20 + cnt];
      else if (cnt == 5'd11) imm_bit = ir[7];
    end else if (is_lui | is_auipc) begin
      imm_bit = (cnt < 5'd12) ? 1'b0 : ir[cnt];
    end else if (is_jal) begin
      if (cnt == 5'd0)       imm_bit = 1'b0;
      else if (cnt <= 5'd10) imm_bit = ir[5'd20 + cnt];
      else if (cnt == 5'd11) imm_bit = ir[20];
      else if (cnt <= 5'd19) imm_bit = ir[cnt];
    end else begin // I-type
      if (cnt <= 5'd10)      imm_bit = ir[5'd20 + cnt];
    end
  end

  // ------------------------------------------------------ register operands
  logic [4:0] rc;          // read sequencer, two cycles ahead of cnt
  logic [4:0] rd_rs1, rd_rs2;
  always_comb begin
    unique case (state)
      S_PRE0:  rc = 5'd0;
      S_PRE1:  rc = 5'd1;
      default: rc = cnt + 5'd2;
    endcase
  end
  // In PRE0 the decoder register is not loaded yet: use DAT directly.
  assign rd_rs1 = (state == S_PRE0) ? dat[19:15] : rs1;
  assign rd_rs2 = (state == S_PRE0) ? dat[24:20] : rs2;
  assign rf_re    = (state == S_PRE0) | (state == S_PRE1) | (state == S_EXEC);
  assign rf_raddr = rc[0] ? {rd_rs2, rc[4:1]} : {rd_rs1, rc[4:1]};

  logic rs1_bit, rs2_bit;
  assign rs1_bit = (rs1 != 5'd0) & (cnt[0] ? rs1_q[1] : rs1_q[0]);
  assign rs2_bit = (rs2 != 5'd0) & (cnt[0] ? rs2_hi : rf_rdata[0]);

  // ------------------------------------------------------------ serial ALU
  logic op_b, a_in, b_in, c_in, alu_sum, alu_cout, alu_bit;
  assign op_b     = (is_op | is_br) ? rs2_bit : imm_bit;
  assign a_in     = rs1_bit;
  assign b_in     = op_b ^ is_sub;
  assign c_in     = (cnt == 5'd0) ? is_sub : c_alu;
  assign alu_sum  = a_in ^ b_in ^ c_in;
  assign alu_cout = (a_in & b_in) | (c_in & (a_in ^ b_in));
  always_comb begin
    unique case (f3)
      3'b100:  alu_bit = a_in ^ op_b;
      3'b110:  alu_bit = a_in | op_b;
      3'b111:  alu_bit = a_in & op_b;
      default: alu_bit = alu_sum;
    endcase
  end

  // Comparison at the last bit: rs1 - rs2 (or rs1 - imm for SLTI[U]).
  logic unsigned_cmp, lt_now, eq_now, br_taken;
  assign unsigned_cmp = is_br ? f3[1] : f3[0];
  assign lt_now = unsigned_cmp ? ~alu_cout
                               : ((a_in ^ op_b) ? a_in : ~alu_cout);
  assign eq_now = ~(neq_q | (a_in ^ op_b));
  always_comb begin
    unique case (f3)
      3'b000:  br_taken = eq_now;
      3'b001:  br_taken = ~eq_now;
      3'b100,
      3'b110:  br_taken = lt_now;
      default: br_taken = ~lt_now;
    endcase
  end

  // PC + 4 and PC + imm serial adders.
  logic pc_bit, pc4_b, pc4_c, tgt_c, pc4_sum, tgt_sum;
  assign pc_bit  = pc[0];
  assign pc4_b   = (cnt == 5'd2);
  assign pc4_c   = (cnt != 5'd0) & c_pc4;
  assign tgt_c   = (cnt != 5'd0) & c_tgt;
  assign pc4_sum = pc_bit ^ pc4_b ^ pc4_c;
  assign tgt_sum = pc_bit ^ imm_bit ^ tgt_c;

  // ---------------------------------------------------------- phase 2 data
  logic [1:0] ld_size;
  logic       ld_in_range, sh_fill;
  assign ld_size     = f3[1:0];
  assign ld_in_range = (ld_size == 2'b00) ? (cnt < 5'd8) :
                       (ld_size == 2'b01) ? (cnt < 5'd16) : 1'b1;
  assign sh_fill     = ir[30] & sgn_q;  // SRA fills with the sign

  // ----------------------------------------------------- result bit and rd
  logic rd_bit, wr_bit_cycle, ph2_write;
  always_comb begin
    rd_bit       = 1'b0;
    wr_bit_cycle = 1'b0;
    ph2_write    = 1'b0;
    if (state == S_EXEC) begin
      wr_bit_cycle = (is_alu & ~is_shift & ~is_slt) | is_lui | is_auipc | is_jal | is_jalr;
      if (is_lui)                 rd_bit = imm_bit;
      else if (is_auipc)          rd_bit = tgt_sum;
      else if (is_jal | is_jalr)  rd_bit = pc4_sum;
      else                        rd_bit = alu_bit;
    end else if (state == S_PH2) begin
      if (is_load) begin
        ph2_write = 1'b1;
        rd_bit    = ld_in_range ? dat[0] : (~f3[2] & sgn_q);
      end else if (is_slt) begin
        ph2_write = 1'b1;
        rd_bit    = (cnt == 5'd0) & lt_q;
      end else if (is_shift & ~f3[2]) begin
        ph2_write = 1'b1;
        rd_bit    = (sh_q != 5'd0) ? 1'b0 : bufr[0];
      end else if (is_sra_srl) begin
        ph2_write = (sh_q == 5'd0);
        rd_bit    = bufr[0];
      end
      wr_bit_cycle = ph2_write;
    end
  end

  assign rf_we    = wr_bit_cycle & cnt[0] & (rd != 5'd0);
  assign rf_waddr = {rd, cnt[4:1]};
  assign rf_wdata = {rd_bit, wlo_q};

  // ----------------------------------------------------------- memory port
  logic [1:0] boff;
  assign boff     = bufr[1:0];
  assign mem_en   = (state == S_FETCH) | (state == S_MEM);
  assign mem_we   = (state == S_MEM) & is_store;
  assign mem_addr = (state == S_FETCH) ? pc[MEM_AW+1:2] : bufr[MEM_AW+1:2];
  always_comb begin
    unique case (f3[1:0])
      2'b00:   begin mem_wdata = {4{dat[7:0]}};  mem_be = 4'b0001 << boff; end
      2'b01:   begin mem_wdata = {2{dat[15:0]}}; mem_be = boff[1] ? 4'b1100 : 4'b0011; end
      default: begin mem_wdata = dat;            mem_be = 4'b1111; end
    endcase
  end

  // ------------------------------------------------------------ sequencing
  logic next_pc_bit;
  assign next_pc_bit = is_jal  ? tgt_sum :
                       is_jalr ? (alu_sum & (cnt != 5'd0)) : pc4_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_FETCH;
      cnt   <= '0;
      pc    <= RESET_PC;
      bufr  <= '0;
      dat   <= '0;
      ir    <= '0;
      c_alu <= 1'b0;
      c_tgt <= 1'b0;
      c_pc4 <= 1'b0;
      neq_q <= 1'b0;
      lt_q  <= 1'b0;
      sgn_q <= 1'b0;
      sh_q  <= '0;
      rs1_q <= '0;
      rs2_hi <= 1'b0;
      wlo_q <= 1'b0;
    end else begin
      if (wr_bit_cycle & ~cnt[0]) wlo_q <= rd_bit;
      if (rf_re) begin
        if (rc[0]) rs1_q <= rf_rdata;
        else       rs2_hi <= rf_rdata[1];
      end
      unique case (state)
        S_FETCH: state <= S_LDIR;
        S_LDIR: begin
          dat   <= mem_rdata;
          state <= S_PRE0;
        end
        S_PRE0: begin
          ir    <= dat;
          state <= S_PRE1;
        end
        S_PRE1: begin
          cnt   <= '0;
          neq_q <= 1'b0;
          state <= S_EXEC;
        end
        S_EXEC: begin
          c_alu <= alu_cout;
          c_tgt <= (pc_bit & imm_bit) | (tgt_c & (pc_bit ^ imm_bit));
          c_pc4 <= (pc_bit & pc4_b) | (pc4_c & (pc_bit ^ pc4_b));
          neq_q <= neq_q | (a_in ^ op_b);
          pc    <= {next_pc_bit, pc[31:1]};
          bufr  <= {(is_load | is_store) ? alu_sum : is_br ? tgt_sum : rs1_bit, bufr[31:1]};
          if (is_store) dat <= {rs2_bit, dat[31:1]};
          if (cnt < 5'd5) sh_q[cnt[2:0]] <= op_b;
          cnt <= cnt + 5'd1;
          if (cnt == 5'd31) begin
            lt_q  <= lt_now;
            sgn_q <= rs1_bit;
            cnt   <= '0;
            if (is_load | is_store)            state <= S_MEM;
            else if (is_br)                    state <= br_taken ? S_PH2 : S_FETCH;
            else if (is_shift | is_slt)        state <= S_PH2;
            else                               state <= S_FETCH;
          end
        end
        S_MEM: state <= is_store ? S_FETCH : S_MEMW;
        S_MEMW: begin
          dat   <= mem_rdata >> {boff, 3'b000};
          state <= S_PH2;
        end
        S_PH2: begin
          if (is_br) begin
            pc   <= {bufr[0], pc[31:1]};
            bufr <= {1'b0, bufr[31:1]};
          end else if (is_load) begin
            dat <= {1'b0, dat[31:1]};
            if ((ld_size == 2'b00 && cnt == 5'd7) || (ld_size == 2'b01 && cnt == 5'd15))
              sgn_q <= dat[0];
          end else if (is_shift) begin
            if (sh_q != 5'd0) sh_q <= sh_q - 5'd1;
            if (f3[2] | (sh_q == 5'd0)) bufr <= {sh_fill, bufr[31:1]};
          end
          if (!(is_sra_srl && sh_q != 5'd0)) begin
            cnt <= cnt + 5'd1;
            if (cnt == 5'd31) state <= S_FETCH;
          end
        end
        default: state <= S_FETCH;
      endcase
    end
  end

endmodule
