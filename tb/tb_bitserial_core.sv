// tb_bitserial_core: runs a random RV32I program on the bit-serial core with
// its two SRAMs and checks it in lock step against the reference model of
// rv_asm_pkg: at every instruction fetch the fetch address must equal the
// model's PC and the number of cycles spent on the previous instruction must
// equal the expected count (36 one-phase, 37 store, 68 taken branch / SLT /
// SLL, 68+shamt right shift, 70 load). At the end every register and every
// data word is compared.
`timescale 1ns/1ps
module tb_bitserial_core;
  import secure_rv_pkg::*;
  import rv_asm_pkg::*;

  localparam int N_INSTR = 120;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              mem_en, mem_we, rf_re, rf_we;
  logic [3:0]        mem_be;
  logic [MEM_AW-1:0] mem_addr;
  logic [31:0]       mem_wdata, mem_rdata;
  logic [RF_AW-1:0]  rf_raddr, rf_waddr;
  logic [1:0]        rf_rdata, rf_wdata;

  bitserial_core dut (.*);
  sram_sp #(.AW(MEM_AW), .DW(32)) u_mem (.clk, .en(mem_en), .we(mem_we), .be(mem_be),
                                         .addr(mem_addr), .wdata(mem_wdata), .rdata(mem_rdata));
  sram_dp #(.AW(RF_AW), .DW(2)) u_rf (.clk, .re(rf_re), .raddr(rf_raddr), .rdata(rf_rdata),
                                      .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata));

  int checks = 0, failures = 0;
  logic [31:0] img [1024];
  logic [31:0] ref_mem [1024];
  rv_state_t   st;
  logic [31:0] end_pc;
  int          cyc, exp_cyc, n_exec;
  int          cls_cnt [int];
  bit          done = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    void'($urandom(32'h5eed_0001));
    for (int i = 0; i < 1024; i++) img[i] = 32'h0000_0013;
    end_pc = rv_gen_program(img, N_INSTR);
    for (int i = 0; i < 1024; i++) begin
      u_mem.mem[i] = img[i];
      ref_mem[i]   = img[i];
    end
    for (int i = 0; i < 512; i++) u_rf.mem[i] = '0;
    for (int i = 0; i < 32; i++) st.x[i] = '0;
    st.pc = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
  end

  // Lock-step comparison at each fetch.
  logic [31:0] fetch_pc;
  assign fetch_pc = {20'b0, mem_addr, 2'b00};
  initial begin
    exp_cyc = -1;
    cyc     = 0;
    n_exec  = 0;
    @(posedge rst_n);
    forever begin
      @(posedge clk);
      cyc++;
      if (dut.state == 3'd0) begin
        if (exp_cyc >= 0) begin
          check(cyc == exp_cyc, $sformatf("cycles %0d expected %0d (pc %h)", cyc, exp_cyc, st.pc));
          cls_cnt[exp_cyc]++;
        end
        check(fetch_pc == st.pc, $sformatf("fetch pc %h expected %h", fetch_pc, st.pc));
        if (st.pc == end_pc) break;
        exp_cyc = rv_iss_step(st, ref_mem);
        n_exec++;
        cyc = 0;
      end
    end
    for (int r = 1; r < 32; r++) begin
      logic [31:0] v;
      for (int p = 0; p < 16; p++) v[2*p +: 2] = u_rf.mem[{5'(r), 4'(p)}];
      check(v == st.x[r], $sformatf("x%0d = %h expected %h", r, v, st.x[r]));
    end
    for (int i = 256; i < 320; i++)
      check(u_mem.mem[i] == ref_mem[i], $sformatf("mem[%0d] = %h expected %h", i, u_mem.mem[i], ref_mem[i]));
    check(cls_cnt.exists(36) && cls_cnt.exists(37) && cls_cnt.exists(68) && cls_cnt.exists(70),
          "every timing class exercised");
    $display("executed %0d instructions; 36:%0d 37:%0d 68:%0d 70:%0d", n_exec,
             cls_cnt.exists(36) ? cls_cnt[36] : 0, cls_cnt.exists(37) ? cls_cnt[37] : 0,
             cls_cnt.exists(68) ? cls_cnt[68] : 0, cls_cnt.exists(70) ? cls_cnt[70] : 0);
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
