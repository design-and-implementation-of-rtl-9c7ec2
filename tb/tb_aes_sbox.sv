// tb_aes_sbox: workload test of the chip top running the operation that a
// power-analysis attack on AES targets, the first-round S-box output
// SubBytes(plaintext XOR key), for all 16 bytes of one block.
//
// The RV32I program computes each S-box value as in a table-free software
// AES: the multiplicative inverse in GF(2^8) as a^254 (square-and-multiply
// with a shift-and-add field multiplier, reduction polynomial 0x11B), then
// the affine map s = r ^ rotl(r,1) ^ rotl(r,2) ^ rotl(r,3) ^ rotl(r,4) ^ 0x63.
// Plaintext is at byte 0x400, the key at 0x410, the result goes to 0x420.
//
// The program runs on the unprotected core with 25 % edge skipping and on
// the masked core with 50 % skipping and memory protection. The results are
// compared with an S-box the testbench builds independently (inverse by
// exhaustive search), the core cycle count with the instruction-set model.
// For the masked core the testbench also watches each S-box store: share 1
// and share 2 of the stored byte must recombine to the S-box value, while
// share 1 alone should almost never equal it (a byte matches by chance with
// probability 1/256).
`timescale 1ns/1ps
module tb_aes_sbox;
  import secure_rv_pkg::*;
  import rv_asm_pkg::*;

  logic ro_clk = 1'b0, rng_ro = 1'b0, rst_n = 1'b0;
  always #1 ro_clk = ~ro_clk;
  initial forever begin
    #(1.3 + 0.6 * real'($urandom % 1000) / 1000.0);
    rng_ro = ~rng_ro;
  end

  logic              core_rst_n;
  core_sel_e         core_sel;
  logic [7:0]        sys_div, smp_div, rng_div, pert_period;
  skip_sel_e         skip_sel;
  logic [MEM_AW-1:0] mem_addr_key;
  logic [MEM_DW-1:0] mem_data_key;
  logic [RF_AW-1:0]  rf_addr_key;
  logic [RF_DW-1:0]  rf_data_key;
  logic              tl_mem_en, tl_mem_we;
  logic [MEM_AW-1:0] tl_mem_addr;
  logic [MEM_DW-1:0] tl_mem_wdata, tl_mem_rdata;
  core_req_t         ddl_req_s1, ddl_req_s2;
  core_rsp_t         ddl_rsp_s1, ddl_rsp_s2;
  logic [BM_N_RND-1:0] ddl_rnd;
  logic              ddl_rst_n, sys_clk, core_clk, rng_pad, rng_ready, clk_init_done;

  secure_rv_top u_top (.*);

  assign ddl_req_s1 = '0;
  assign ddl_req_s2 = '0;

  int checks = 0, failures = 0;
  bit done = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------ reference S-box
  function automatic logic [7:0] gf_mul(input logic [7:0] a, b);
    logic [7:0] p = '0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = a[7] ? ((a << 1) ^ 8'h1B) : (a << 1);
    end
    return p;
  endfunction
  function automatic logic [7:0] sbox(input logic [7:0] x);
    logic [7:0] inv = '0, s;
    for (int y = 1; y < 256; y++) if (gf_mul(x, 8'(y)) == 8'h01) inv = 8'(y);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] ^= inv[i] ^ inv[(i + 4) % 8] ^ inv[(i + 5) % 8] ^ inv[(i + 6) % 8] ^ inv[(i + 7) % 8];
    return s;
  endfunction

  // ------------------------------------------------ the program
  localparam logic [6:0] OPI = 7'b0010011, LD = 7'b0000011, JALR = 7'b1100111;
  function automatic void build(ref logic [31:0] m [1024]);
    for (int i = 0; i < 1024; i++) m[i] = 32'h0000_0013;
    m[0]  = enc_i(12'h400, 5'd0, 3'b000, 5'd10, OPI);   // x10 = data base
    m[1]  = enc_i(12'd0, 5'd0, 3'b000, 5'd11, OPI);     // x11 = i
    m[2]  = enc_i(12'd16, 5'd0, 3'b000, 5'd12, OPI);    // x12 = 16
    m[3]  = enc_r(7'd0, 5'd11, 5'd10, 3'b000, 5'd5);    // L0: x5 = base + i
    m[4]  = enc_i(12'd0, 5'd5, 3'b100, 5'd6, LD);       // lbu plaintext byte
    m[5]  = enc_i(12'd16, 5'd5, 3'b100, 5'd7, LD);      // lbu key byte
    m[6]  = enc_r(7'd0, 5'd7, 5'd6, 3'b100, 5'd6);      // a = p ^ k
    m[7]  = enc_i(12'd0, 5'd6, 3'b000, 5'd19, OPI);     // x19 = a
    m[8]  = enc_i(12'd0, 5'd6, 3'b000, 5'd18, OPI);     // r = a
    m[9]  = enc_i(12'd6, 5'd0, 3'b000, 5'd9, OPI);      // 6 rounds
    m[10] = enc_i(12'd0, 5'd18, 3'b000, 5'd13, OPI);    // P: r = r * r
    m[11] = enc_i(12'd0, 5'd18, 3'b000, 5'd14, OPI);
    m[12] = enc_j(21'd116, 5'd1);
    m[13] = enc_i(12'd0, 5'd15, 3'b000, 5'd18, OPI);
    m[14] = enc_i(12'd0, 5'd18, 3'b000, 5'd13, OPI);    // r = r * a
    m[15] = enc_i(12'd0, 5'd19, 3'b000, 5'd14, OPI);
    m[16] = enc_j(21'd100, 5'd1);
    m[17] = enc_i(12'd0, 5'd15, 3'b000, 5'd18, OPI);
    m[18] = enc_i(-12'sd1, 5'd9, 3'b000, 5'd9, OPI);
    m[19] = enc_b(-13'sd36, 5'd0, 5'd9, 3'b001);        // bne -> P
    m[20] = enc_i(12'd0, 5'd18, 3'b000, 5'd13, OPI);    // r = r * r = a^254
    m[21] = enc_i(12'd0, 5'd18, 3'b000, 5'd14, OPI);
    m[22] = enc_j(21'd76, 5'd1);
    m[23] = enc_i(12'd0, 5'd15, 3'b000, 5'd18, OPI);
    m[24] = enc_i(12'd8, 5'd18, 3'b001, 5'd21, OPI);    // t = r << 8 | r
    m[25] = enc_r(7'd0, 5'd18, 5'd21, 3'b110, 5'd21);
    m[26] = enc_i(12'd0, 5'd18, 3'b000, 5'd22, OPI);    // s = r
    for (int k = 0; k < 4; k++) begin                   // s ^= rotl(r, k+1)
      m[27 + 2 * k] = enc_i(12'(7 - k), 5'd21, 3'b101, 5'd23, OPI);
      m[28 + 2 * k] = enc_r(7'd0, 5'd23, 5'd22, 3'b100, 5'd22);
    end
    m[35] = enc_i(12'hFF, 5'd22, 3'b111, 5'd22, OPI);
    m[36] = enc_i(12'h63, 5'd22, 3'b100, 5'd22, OPI);
    m[37] = enc_s(12'd32, 5'd22, 5'd5, 3'b000);         // sb s, 32(x5)
    m[38] = enc_i(12'd1, 5'd11, 3'b000, 5'd11, OPI);
    m[39] = enc_b(-13'sd144, 5'd12, 5'd11, 3'b001);     // bne -> L0
    m[40] = enc_j(21'd0, 5'd0);                         // halt
    m[41] = enc_i(12'd0, 5'd0, 3'b000, 5'd15, OPI);     // GM: p = 0
    m[42] = enc_i(12'd8, 5'd0, 3'b000, 5'd16, OPI);     // 8 bits
    m[43] = enc_i(12'd1, 5'd14, 3'b111, 5'd17, OPI);    // GL: b & 1
    m[44] = enc_b(13'd8, 5'd0, 5'd17, 3'b000);
    m[45] = enc_r(7'd0, 5'd13, 5'd15, 3'b100, 5'd15);   // p ^= a
    m[46] = enc_i(12'd1, 5'd13, 3'b001, 5'd13, OPI);    // a <<= 1
    m[47] = enc_i(12'h100, 5'd13, 3'b111, 5'd17, OPI);
    m[48] = enc_b(13'd8, 5'd0, 5'd17, 3'b000);
    m[49] = enc_i(12'h11B, 5'd13, 3'b100, 5'd13, OPI);  // reduce
    m[50] = enc_i(12'd1, 5'd14, 3'b101, 5'd14, OPI);    // b >>= 1
    m[51] = enc_i(-12'sd1, 5'd16, 3'b000, 5'd16, OPI);
    m[52] = enc_b(-13'sd36, 5'd0, 5'd16, 3'b001);       // bne -> GL
    m[53] = enc_i(12'd0, 5'd1, 3'b000, 5'd0, JALR);     // return
  endfunction
  localparam logic [31:0] HALT_PC = 32'd160;

  // ------------------------------------------------ masked store watch
  int n_sb = 0, n_share_eq = 0;
  logic [7:0] exp_s [16];
  always @(posedge core_clk) begin
    if (core_sel == SEL_BM && u_top.bm_rst_n && !tl_mem_en &&
        (u_top.bm_s1.mem_en ^ u_top.bm_s2.mem_en) && (u_top.bm_s1.mem_we ^ u_top.bm_s2.mem_we)) begin
      logic [9:0]  wa;
      logic [31:0] s1, s2;
      logic [1:0]  lane;
      logic [3:0]  be;
      wa   = u_top.bm_s1.mem_addr ^ u_top.bm_s2.mem_addr;
      s1   = u_top.bm_s1.mem_wdata;
      s2   = u_top.bm_s2.mem_wdata;
      be   = u_top.bm_s1.mem_be ^ u_top.bm_s2.mem_be;
      lane = be[3] ? 2'd3 : be[2] ? 2'd2 : be[1] ? 2'd1 : 2'd0;
      if (wa >= 10'd264 && wa < 10'd268) begin
        n_sb++;
        check((s1[8*lane +: 8] ^ s2[8*lane +: 8]) == exp_s[4 * (wa - 264) + lane],
              $sformatf("masked store of S-box byte %0d", 4 * (wa - 264) + lane));
        if (s1[8*lane +: 8] == exp_s[4 * (wa - 264) + lane]) n_share_eq++;
      end
    end
  end

  // ------------------------------------------------ one run
  task automatic run(input core_sel_e sel, input skip_sel_e sk);
    logic [31:0] img [1024];
    logic [31:0] ref_mem [1024];
    rv_state_t   st;
    int          exp_cyc, ncyc;
    logic [MEM_AW-1:0] ak;
    logic [MEM_DW-1:0] dk;
    bit          prot, started;

    prot = (sel != SEL_NCM);
    @(negedge core_clk);
    core_rst_n   = 1'b0;
    core_sel     = sel;
    skip_sel     = sk;
    pert_period  = 8'd32;
    mem_addr_key = prot ? MEM_AW'($urandom) : '0;
    mem_data_key = prot ? $urandom : '0;
    rf_addr_key  = prot ? RF_AW'($urandom) : '0;
    rf_data_key  = prot ? RF_DW'($urandom) : '0;
    ak = mem_addr_key;
    dk = mem_data_key;

    build(img);
    for (int i = 256; i < 264; i++) img[i] = $urandom;          // plaintext, key
    for (int b = 0; b < 16; b++)
      exp_s[b] = sbox(img[256 + b / 4][8 * (b % 4) +: 8] ^ img[260 + b / 4][8 * (b % 4) +: 8]);
    for (int i = 264; i < 268; i++) img[i] = '0;
    ref_mem = img;
    for (int i = 0; i < 32; i++) st.x[i] = '0;
    st.pc = 0;
    exp_cyc = 0;
    while (st.pc != HALT_PC) exp_cyc += rv_iss_step(st, ref_mem);

    for (int i = 0; i < 1024; i++) begin
      @(negedge core_clk);
      tl_mem_en = 1'b1; tl_mem_we = 1'b1;
      tl_mem_addr = MEM_AW'(i) ^ ak; tl_mem_wdata = img[i] ^ dk;
    end
    @(negedge core_clk);
    tl_mem_en = 1'b0; tl_mem_we = 1'b0;
    for (int i = 0; i < 512; i++) u_top.u_rf.mem[i] = prot ? rf_data_key : '0;

    core_rst_n = 1'b1;
    started = 0;
    ncyc = 0;
    forever begin
      @(posedge core_clk);
      if (started) ncyc++;
      if (u_top.m_en && !u_top.m_we && (u_top.ncm_rst_n || u_top.bm_rst_n)) begin
        if (!started && u_top.m_addr == ak) started = 1;
        else if (started && u_top.m_addr == (HALT_PC[11:2] ^ ak)) break;
      end
    end
    check(ncyc == exp_cyc, $sformatf("core %0d: %0d core cycles, expected %0d", sel, ncyc, exp_cyc));
    $display("core=%0d skip=%0d: %0d core cycles for 16 S-box bytes", sel, sk, ncyc);

    @(negedge core_clk);
    core_rst_n = 1'b0;
    repeat (2) @(negedge core_clk);
    for (int i = 264; i < 268; i++) begin
      @(negedge core_clk);
      tl_mem_en = 1'b1; tl_mem_we = 1'b0; tl_mem_addr = MEM_AW'(i) ^ ak;
      @(negedge core_clk);
      tl_mem_en = 1'b0;
      for (int l = 0; l < 4; l++)
        check((tl_mem_rdata[8*l +: 8] ^ dk[8*l +: 8]) == exp_s[4 * (i - 264) + l],
              $sformatf("core %0d S-box byte %0d = %h expected %h", sel, 4 * (i - 264) + l,
                        tl_mem_rdata[8*l +: 8] ^ dk[8*l +: 8], exp_s[4 * (i - 264) + l]));
      check((tl_mem_rdata ^ dk) == ref_mem[i], $sformatf("core %0d word %0d vs model", sel, i));
    end
  endtask

  initial begin
    void'($urandom(32'h5b0c_0aE5));
    core_rst_n = 1'b0; core_sel = SEL_NCM; skip_sel = SKIP_OFF; pert_period = 8'd0;
    sys_div = 8'd1; smp_div = 8'd3; rng_div = 8'd1;
    mem_addr_key = '0; mem_data_key = '0; rf_addr_key = '0; rf_data_key = '0;
    tl_mem_en = 1'b0; tl_mem_we = 1'b0; tl_mem_addr = '0; tl_mem_wdata = '0;
    // reference S-box spot values (FIPS-197)
    check(sbox(8'h00) == 8'h63 && sbox(8'h01) == 8'h7C && sbox(8'h53) == 8'hED &&
          sbox(8'hFF) == 8'h16, "reference S-box");
    #20 rst_n = 1'b1;
    wait (rng_ready);
    run(SEL_NCM, SKIP_25);
    run(SEL_BM, SKIP_50);
    check(n_sb == 16, $sformatf("%0d masked S-box stores seen", n_sb));
    check(n_share_eq <= 3, $sformatf("share 1 equal to the S-box byte %0d of 16 times", n_share_eq));
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #40ms;
    if (!done) begin
      failures++;
      $display("FAIL watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
