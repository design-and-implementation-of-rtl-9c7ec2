// tb_bm_core: equivalence of the masked core with the unprotected core.
//
// bm_core and bitserial_core run the same random RV32I program, each with its
// own SRAMs. The masked core's memory ports are unmasked here (XOR of the two
// shares) and read data is handed back as fresh random shares; the remask
// input gets new random bits every cycle. Every cycle the unmasked outputs
// must equal the reference core's outputs. The test also checks that the
// masking is real: share 1 of the memory address and of the register-file
// read address must differ from the plain value in most cycles. At the end
// the masked core's register file and data memory are compared with the
// reference model.
`timescale 1ns/1ps
module tb_bm_core;
  import secure_rv_pkg::*;
  import rv_asm_pkg::*;

  localparam int N_INSTR = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // reference core
  logic              r_mem_en, r_mem_we, r_rf_re, r_rf_we;
  logic [3:0]        r_mem_be;
  logic [MEM_AW-1:0] r_mem_addr;
  logic [31:0]       r_mem_wdata, r_mem_rdata;
  logic [RF_AW-1:0]  r_rf_raddr, r_rf_waddr;
  logic [1:0]        r_rf_rdata, r_rf_wdata;
  bitserial_core u_ref (.clk, .rst_n, .mem_en(r_mem_en), .mem_we(r_mem_we), .mem_be(r_mem_be),
    .mem_addr(r_mem_addr), .mem_wdata(r_mem_wdata), .mem_rdata(r_mem_rdata), .rf_re(r_rf_re),
    .rf_raddr(r_rf_raddr), .rf_rdata(r_rf_rdata), .rf_we(r_rf_we), .rf_waddr(r_rf_waddr),
    .rf_wdata(r_rf_wdata));
  sram_sp u_rmem (.clk, .en(r_mem_en), .we(r_mem_we), .be(r_mem_be), .addr(r_mem_addr),
                  .wdata(r_mem_wdata), .rdata(r_mem_rdata));
  sram_dp u_rrf (.clk, .re(r_rf_re), .raddr(r_rf_raddr), .rdata(r_rf_rdata), .we(r_rf_we),
                 .waddr(r_rf_waddr), .wdata(r_rf_wdata));

  // masked core
  logic              mem_en_s1, mem_en_s2, mem_we_s1, mem_we_s2, rf_re_s1, rf_re_s2, rf_we_s1, rf_we_s2;
  logic [3:0]        mem_be_s1, mem_be_s2;
  logic [MEM_AW-1:0] mem_addr_s1, mem_addr_s2;
  logic [31:0]       mem_wdata_s1, mem_wdata_s2, mem_rdata_s1, mem_rdata_s2;
  logic [RF_AW-1:0]  rf_raddr_s1, rf_raddr_s2, rf_waddr_s1, rf_waddr_s2;
  logic [1:0]        rf_rdata_s1, rf_rdata_s2, rf_wdata_s1, rf_wdata_s2;
  logic [150:0]      rnd;
  bm_core dut (.*);

  logic              m_mem_en, m_mem_we, m_rf_re, m_rf_we;
  logic [3:0]        m_mem_be;
  logic [MEM_AW-1:0] m_mem_addr;
  logic [31:0]       m_mem_wdata, m_mem_rdata, mask_m;
  logic [RF_AW-1:0]  m_rf_raddr, m_rf_waddr;
  logic [1:0]        m_rf_wdata, m_rf_rdata, mask_r;
  assign m_mem_en    = mem_en_s1 ^ mem_en_s2;
  assign m_mem_we    = mem_we_s1 ^ mem_we_s2;
  assign m_mem_be    = mem_be_s1 ^ mem_be_s2;
  assign m_mem_addr  = mem_addr_s1 ^ mem_addr_s2;
  assign m_mem_wdata = mem_wdata_s1 ^ mem_wdata_s2;
  assign m_rf_re     = rf_re_s1 ^ rf_re_s2;
  assign m_rf_we     = rf_we_s1 ^ rf_we_s2;
  assign m_rf_raddr  = rf_raddr_s1 ^ rf_raddr_s2;
  assign m_rf_waddr  = rf_waddr_s1 ^ rf_waddr_s2;
  assign m_rf_wdata  = rf_wdata_s1 ^ rf_wdata_s2;
  assign mem_rdata_s2 = mask_m;
  assign mem_rdata_s1 = m_mem_rdata ^ mask_m;
  assign rf_rdata_s2  = mask_r;
  assign rf_rdata_s1  = m_rf_rdata ^ mask_r;
  sram_sp u_mem (.clk, .en(m_mem_en), .we(m_mem_we), .be(m_mem_be), .addr(m_mem_addr),
                 .wdata(m_mem_wdata), .rdata(m_mem_rdata));
  sram_dp u_rf (.clk, .re(m_rf_re), .raddr(m_rf_raddr), .rdata(m_rf_rdata), .we(m_rf_we),
                .waddr(m_rf_waddr), .wdata(m_rf_wdata));

  int checks = 0, failures = 0, masked_addr = 0, cycles = 0;
  logic [31:0] img [1024];
  logic [31:0] ref_mem [1024];
  rv_state_t   st;
  logic [31:0] end_pc;
  bit          done = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // fresh randomness every cycle
  always @(negedge clk) begin
    for (int i = 0; i < 151; i++) rnd[i] = 1'($urandom);
    mask_m = $urandom;
    mask_r = 2'($urandom);
  end

  initial begin
    void'($urandom(32'h0bad_cafe));
    for (int i = 0; i < 1024; i++) img[i] = 32'h0000_0013;
    end_pc = rv_gen_program(img, N_INSTR);
    for (int i = 0; i < 1024; i++) begin
      u_mem.mem[i] = img[i];
      u_rmem.mem[i] = img[i];
      ref_mem[i] = img[i];
    end
    for (int i = 0; i < 512; i++) begin u_rf.mem[i] = '0; u_rrf.mem[i] = '0; end
    for (int i = 0; i < 32; i++) st.x[i] = '0;
    st.pc = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    forever begin
      @(posedge clk);
      #1;
      cycles++;
      check({m_mem_en, m_mem_we, m_rf_re, m_rf_we} == {r_mem_en, r_mem_we, r_rf_re, r_rf_we} &&
            (!r_mem_en || (m_mem_addr == r_mem_addr && (!r_mem_we || (m_mem_be == r_mem_be &&
             m_mem_wdata == r_mem_wdata)))) &&
            (!r_rf_re || m_rf_raddr == r_rf_raddr) &&
            (!r_rf_we || (m_rf_waddr == r_rf_waddr && m_rf_wdata == r_rf_wdata)),
            $sformatf("cycle %0d outputs differ", cycles));
      if (mem_addr_s1 != m_mem_addr && rf_raddr_s1 != m_rf_raddr) masked_addr++;
      if (u_ref.state == 3'd0 && r_mem_addr == end_pc[11:2]) break;
    end
    // reference model run for the final state
    while (st.pc != end_pc) void'(rv_iss_step(st, ref_mem));
    for (int r = 1; r < 32; r++) begin
      logic [31:0] v;
      for (int p = 0; p < 16; p++) v[2*p +: 2] = u_rf.mem[{5'(r), 4'(p)}];
      check(v == st.x[r], $sformatf("x%0d = %h expected %h", r, v, st.x[r]));
      if (v != st.x[r]) begin for (int p = 0; p < 16; p++) v[2*p +: 2] = u_rrf.mem[{5'(r), 4'(p)}]; $display("ref core x%0d = %h", r, v); end
    end
    for (int i = 256; i < 320; i++)
      check(u_mem.mem[i] == ref_mem[i], $sformatf("mem[%0d]", i));
    check(masked_addr > cycles * 9 / 10, $sformatf("addresses masked in %0d of %0d cycles", masked_addr, cycles));
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    if (!done) begin
      failures++;
      $display("FAIL watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
