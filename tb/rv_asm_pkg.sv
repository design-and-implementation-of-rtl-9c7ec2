// rv_asm_pkg: RV32I instruction encoders and a reference instruction-set
// model used by the testbenches of the bit-serial core and of the chip top.
//
// rv_iss_step executes one instruction on an architectural state (32
// registers, a word-addressed memory image) exactly as the RV32I
// specification defines it, and returns the number of core clock cycles the
// bit-serial core is expected to spend on it, so that a testbench can check
// both results and timing in lock step with the hardware.
package rv_asm_pkg;

  function automatic logic [31:0] enc_r(input logic [6:0] f7, input logic [4:0] rs2, rs1,
                                        input logic [2:0] f3, input logic [4:0] rd);
    return {f7, rs2, rs1, f3, rd, 7'b0110011};
  endfunction
  function automatic logic [31:0] enc_i(input logic [11:0] imm, input logic [4:0] rs1,
                                        input logic [2:0] f3, input logic [4:0] rd,
                                        input logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] enc_s(input logic [11:0] imm, input logic [4:0] rs2, rs1,
                                        input logic [2:0] f3);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] enc_b(input logic [12:0] imm, input logic [4:0] rs2, rs1,
                                        input logic [2:0] f3);
    return {imm[12], imm[10:5], rs2, rs1, f3, imm[4:1], imm[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] enc_u(input logic [19:0] imm, input logic [4:0] rd,
                                        input logic [6:0] opc);
    return {imm, rd, opc};
  endfunction
  function automatic logic [31:0] enc_j(input logic [20:0] imm, input logic [4:0] rd);
    return {imm[20], imm[10:1], imm[11], imm[19:12], rd, 7'b1101111};
  endfunction

  typedef struct {
    logic [31:0] x [32];
    logic [31:0] pc;
  } rv_state_t;

  // Execute the instruction at st.pc. mem is a word array (index = addr[11:2]).
  function automatic int rv_iss_step(ref rv_state_t st, ref logic [31:0] mem [1024]);
    logic [31:0] in, a, b, r, ea, w, imm_i, imm_s, imm_b, imm_u, imm_j, npc;
    logic [2:0]  f3;
    logic [4:0]  rd;
    int          cyc;
    logic        wr;
    in    = mem[st.pc[11:2]];
    f3    = in[14:12];
    rd    = in[11:7];
    a     = st.x[in[19:15]];
    b     = st.x[in[24:20]];
    imm_i = {{20{in[31]}}, in[31:20]};
    imm_s = {{20{in[31]}}, in[31:25], in[11:7]};
    imm_b = {{19{in[31]}}, in[31], in[7], in[30:25], in[11:8], 1'b0};
    imm_u = {in[31:12], 12'b0};
    imm_j = {{11{in[31]}}, in[31], in[19:12], in[20], in[30:21], 1'b0};
    npc   = st.pc + 4;
    r     = '0;
    wr    = 1'b0;
    cyc   = 36;
    case (in[6:0])
      7'b0110111: begin r = imm_u; wr = 1; end
      7'b0010111: begin r = st.pc + imm_u; wr = 1; end
      7'b1101111: begin r = npc; wr = 1; npc = st.pc + imm_j; end
      7'b1100111: begin r = npc; wr = 1; npc = (a + imm_i) & ~32'd1; end
      7'b1100011: begin
        logic t;
        case (f3)
          3'b000: t = (a == b);
          3'b001: t = (a != b);
          3'b100: t = ($signed(a) < $signed(b));
          3'b101: t = ($signed(a) >= $signed(b));
          3'b110: t = (a < b);
          default: t = (a >= b);
        endcase
        if (t) begin npc = st.pc + imm_b; cyc = 68; end
      end
      7'b0000011: begin
        ea = a + imm_i;
        w  = mem[ea[11:2]] >> (8 * ea[1:0]);
        case (f3)
          3'b000: r = {{24{w[7]}}, w[7:0]};
          3'b001: r = {{16{w[15]}}, w[15:0]};
          3'b100: r = {24'b0, w[7:0]};
          3'b101: r = {16'b0, w[15:0]};
          default: r = w;
        endcase
        wr = 1; cyc = 70;
      end
      7'b0100011: begin
        ea = a + imm_s;
        w  = mem[ea[11:2]];
        case (f3)
          3'b000: w[8*ea[1:0] +: 8] = b[7:0];
          3'b001: w[8*ea[1] * 2 +: 16] = b[15:0];
          default: w = b;
        endcase
        mem[ea[11:2]] = w;
        cyc = 37;
      end
      7'b0010011, 7'b0110011: begin
        logic [31:0] o2;
        logic [4:0]  sh;
        o2 = in[5] ? b : imm_i;
        sh = o2[4:0];
        wr = 1;
        case (f3)
          3'b000: r = (in[5] && in[30]) ? a - o2 : a + o2;
          3'b001: begin r = a << sh; cyc = 68; end
          3'b010: begin r = {31'b0, $signed(a) < $signed(o2)}; cyc = 68; end
          3'b011: begin r = {31'b0, a < o2}; cyc = 68; end
          3'b100: r = a ^ o2;
          3'b101: begin
            r = in[30] ? 32'($signed(a) >>> sh) : a >> sh;
            cyc = 68 + int'(sh);
          end
          3'b110: r = a | o2;
          default: r = a & o2;
        endcase
      end
      default: ;
    endcase
    if (wr && rd != 0) st.x[rd] = r;
    st.pc = npc;
    return cyc;
  endfunction

  // Build a random self-contained test program at word 0 and random data at
  // words 256..319 (byte 0x400). Registers x1..x15 are the working set, x20
  // holds the data base address and x21 is a scratch register for JALR. All
  // control transfers go forward, and the program ends in a jump-to-self at
  // the returned byte address. Every instruction class of RV32I (except
  // SYSTEM) appears.
  function automatic logic [31:0] rv_gen_program(ref logic [31:0] mem [1024], input int n);
    int          pcw;
    logic [4:0]  rd, r1, r2;
    logic [2:0]  f3;
    int          kind;
    pcw = 0;
    for (int i = 256; i < 320; i++) mem[i] = $urandom;
    mem[pcw++] = enc_i(12'd1024, 5'd0, 3'b000, 5'd20, 7'b0010011); // addi x20,x0,1024
    for (int r = 1; r < 16; r++) begin
      mem[pcw++] = enc_u(20'($urandom), 5'(r), 7'b0110111);        // lui
      mem[pcw++] = enc_i(12'($urandom), 5'(r), 3'b000, 5'(r), 7'b0010011);
    end
    for (int i = 0; i < n; i++) begin
      rd   = ($urandom % 8 == 0) ? 5'd0 : 5'(1 + $urandom % 15);
      r1   = 5'($urandom % 16);
      r2   = 5'($urandom % 16);
      f3   = 3'($urandom);
      kind = $urandom % 10;
      case (kind)
        0, 1: begin
          logic [6:0] f7;
          f7 = ((f3 == 3'b000 || f3 == 3'b101) && $urandom % 2 == 1) ? 7'b0100000 : 7'b0;
          mem[pcw++] = enc_r(f7, r2, r1, f3, rd);
        end
        2, 3: begin
          logic [11:0] imm;
          imm = 12'($urandom);
          if (f3 == 3'b001) imm = {7'b0, imm[4:0]};
          if (f3 == 3'b101) imm = {1'b0, imm[10], 5'b0, imm[4:0]};
          mem[pcw++] = enc_i(imm, r1, f3, rd, 7'b0010011);
        end
        4: begin
          logic [2:0] lf;
          int         sz;
          lf = 3'($urandom % 5);
          if (lf == 3'd3) lf = 3'd4;
          if (lf == 3'd4 && $urandom % 2 == 1) lf = 3'd5;
          sz = (lf[1:0] == 2'b00) ? 1 : (lf[1:0] == 2'b01) ? 2 : 4;
          mem[pcw++] = enc_i(12'(($urandom % (256 / sz)) * sz), 5'd20, lf, rd, 7'b0000011);
        end
        5: begin
          logic [2:0] sf;
          int         sz;
          sf = 3'($urandom % 3);
          sz = 1 << sf;
          mem[pcw++] = enc_s(12'(($urandom % (256 / sz)) * sz), r2, 5'd20, sf);
        end
        6: begin
          if (f3 == 3'b010 || f3 == 3'b011) f3 = 3'b000;
          if ($urandom % 4 == 0) r2 = r1;
          mem[pcw++] = enc_b(13'd8, r2, r1, f3);
          mem[pcw++] = enc_i(12'd1, rd, 3'b000, rd, 7'b0010011);
        end
        7: begin
          if ($urandom % 2 == 1) mem[pcw++] = enc_u(20'($urandom), rd, 7'b0110111);
          else                   mem[pcw++] = enc_u(20'($urandom), rd, 7'b0010111);
        end
        8: begin
          mem[pcw++] = enc_j(21'd8, rd);
          mem[pcw++] = enc_i(12'd7, 5'd1, 3'b000, 5'd1, 7'b0010011);
        end
        default: begin
          mem[pcw++] = enc_u(20'd0, 5'd21, 7'b0010111);                  // auipc x21,0
          mem[pcw++] = enc_i(12'd13, 5'd21, 3'b000, rd, 7'b1100111);     // jalr rd,13(x21)
          mem[pcw++] = enc_i(12'd5, 5'd2, 3'b000, 5'd2, 7'b0010011);
        end
      endcase
    end
    mem[pcw] = enc_j(21'd0, 5'd0);                                       // jal x0,0
    return 32'(pcw * 4);
  endfunction

endpackage
