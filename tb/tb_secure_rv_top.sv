// tb_secure_rv_top: end-to-end test of the testchip at its default sizes.
//
// The testbench models the two ring oscillators (ro_clk: a fixed 500 MHz
// square wave; rng_ro: a square wave whose half periods vary at random, a
// stand-in for phase jitter) and plays the test logic: it configures the
// clocking and RNG, selects a core, loads a program image through the
// test-access port (for the masked cores already encrypted with the session
// data key and stored at addresses XORed with the address key), releases the
// core, waits for the final jump-to-self, then reads the results back and
// decrypts them. The masked DDL core is outside the chip top; a second
// bm_core instance, which has the same function, stands in for it here.
//
// Five runs cover all three cores, all skip rates and perturbation periods.
// Each run is a fresh random RV32I program (all instruction classes) whose
// final registers are stored to memory; results are compared with the
// reference model of rv_asm_pkg, and the number of core clock cycles between
// the first and the last fetch must equal the model's cycle count (masking
// and clock randomization must not change the core's latency). The ratio of
// system to core clock cycles must match the skip rate. Counters check that
// every mechanism occurred: RNG init, raw-bit perturbation, clock-LFSR init
// and perturbation, skipped edges, protected reads and writes through both
// protection units, each core, and each two-phase instruction class.
`timescale 1ns/1ps
module tb_secure_rv_top;
  import secure_rv_pkg::*;
  import rv_asm_pkg::*;

  localparam int N_INSTR = 50;

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

  // functional stand-in for the external masked DDL core
  bm_core u_ddl_model (
    .clk(core_clk), .rst_n(ddl_rst_n),
    .mem_en_s1(ddl_req_s1.mem_en), .mem_en_s2(ddl_req_s2.mem_en),
    .mem_we_s1(ddl_req_s1.mem_we), .mem_we_s2(ddl_req_s2.mem_we),
    .mem_be_s1(ddl_req_s1.mem_be), .mem_be_s2(ddl_req_s2.mem_be),
    .mem_addr_s1(ddl_req_s1.mem_addr), .mem_addr_s2(ddl_req_s2.mem_addr),
    .mem_wdata_s1(ddl_req_s1.mem_wdata), .mem_wdata_s2(ddl_req_s2.mem_wdata),
    .mem_rdata_s1(ddl_rsp_s1.mem_rdata), .mem_rdata_s2(ddl_rsp_s2.mem_rdata),
    .rf_re_s1(ddl_req_s1.rf_re), .rf_re_s2(ddl_req_s2.rf_re),
    .rf_raddr_s1(ddl_req_s1.rf_raddr), .rf_raddr_s2(ddl_req_s2.rf_raddr),
    .rf_rdata_s1(ddl_rsp_s1.rf_rdata), .rf_rdata_s2(ddl_rsp_s2.rf_rdata),
    .rf_we_s1(ddl_req_s1.rf_we), .rf_we_s2(ddl_req_s2.rf_we),
    .rf_waddr_s1(ddl_req_s1.rf_waddr), .rf_waddr_s2(ddl_req_s2.rf_waddr),
    .rf_wdata_s1(ddl_req_s1.rf_wdata), .rf_wdata_s2(ddl_req_s2.rf_wdata),
    .rnd(ddl_rnd));

  int checks = 0, failures = 0;
  bit done = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------ event counters
  int n_raw = 0, n_crand_pert = 0, n_skip = 0, n_sys = 0, n_core = 0;
  int n_prot_rd = 0, n_prot_wr = 0, n_rf_prot = 0, n_tl = 0;
  int n_ld = 0, n_st = 0, n_brt = 0, n_sh = 0, n_slt = 0, n_jmp = 0;
  int n_run [3] = '{0, 0, 0};
  always @(posedge sys_clk) begin
    n_sys++;
    if (u_top.raw_valid) n_raw++;
    if (u_top.u_crand.init_done && u_top.u_crand.pert_now) n_crand_pert++;
    if (u_top.u_crand.skip) n_skip++;
  end
  always @(posedge core_clk) begin
    n_core++;
    if (!tl_mem_en && core_sel != SEL_NCM && u_top.m_en) begin
      if (u_top.m_we) n_prot_wr++; else n_prot_rd++;
    end
    if (core_sel != SEL_NCM && u_top.r_we) n_rf_prot++;
    if (tl_mem_en) n_tl++;
  end

  // ------------------------------------------------------------ one run
  task automatic run(input core_sel_e sel, input skip_sel_e sk, input logic [7:0] pp);
    logic [31:0] img [1024];
    logic [31:0] ref_mem [1024];
    rv_state_t   st;
    logic [31:0] end_pc;
    int          pcw, exp_cyc, sys0, ncyc, nsys;
    logic [MEM_AW-1:0] ak;
    logic [MEM_DW-1:0] dk;
    bit          prot, started;

    prot = (sel != SEL_NCM);
    @(negedge core_clk);
    core_rst_n   = 1'b0;
    core_sel     = sel;
    skip_sel     = sk;
    pert_period  = pp;
    mem_addr_key = prot ? MEM_AW'($urandom) : '0;
    mem_data_key = prot ? $urandom : '0;
    rf_addr_key  = prot ? RF_AW'($urandom) : '0;
    rf_data_key  = prot ? RF_DW'($urandom) : '0;
    ak = mem_addr_key;
    dk = mem_data_key;

    // program: random body, then store x1..x15 to words 321..335, then halt
    for (int i = 0; i < 1024; i++) img[i] = 32'h0000_0013;
    end_pc = rv_gen_program(img, N_INSTR);
    pcw = int'(end_pc) / 4;
    for (int r = 1; r < 16; r++) img[pcw++] = enc_s(12'(256 + 4 * r), 5'(r), 5'd20, 3'b010);
    img[pcw] = enc_j(21'd0, 5'd0);
    end_pc = 32'(pcw * 4);
    ref_mem = img;
    for (int i = 0; i < 32; i++) st.x[i] = '0;
    st.pc = 0;
    exp_cyc = 0;
    while (st.pc != end_pc) begin
      logic [31:0] in;
      int c;
      in = ref_mem[st.pc[11:2]];
      c = rv_iss_step(st, ref_mem);
      exp_cyc += c;
      case (in[6:2])
        5'b00000: n_ld++;
        5'b01000: n_st++;
        5'b11000: if (c == 68) n_brt++;
        5'b11011, 5'b11001: n_jmp++;
        5'b00100, 5'b01100: begin
          if (in[13:12] == 2'b01) n_sh++;
          if (in[14:13] == 2'b01) n_slt++;
        end
        default: ;
      endcase
    end

    // load the image through the test-access port
    for (int i = 0; i < 1024; i++) begin
      @(negedge core_clk);
      tl_mem_en = 1'b1; tl_mem_we = 1'b1;
      tl_mem_addr = MEM_AW'(i) ^ ak; tl_mem_wdata = img[i] ^ dk;
    end
    @(negedge core_clk);
    tl_mem_en = 1'b0; tl_mem_we = 1'b0;
    // the register file must start with x0 = 0 only; clear it for a clean start
    for (int i = 0; i < 512; i++) u_top.u_rf.mem[i] = prot ? rf_data_key : '0;

    // run
    core_rst_n = 1'b1;
    started = 0;
    ncyc = 0; sys0 = 0;
    forever begin
      @(posedge core_clk);
      if (started) ncyc++;
      if (u_top.m_en && !u_top.m_we && !tl_mem_en &&
          (u_top.ncm_rst_n || u_top.bm_rst_n || ddl_rst_n)) begin
        if (!started && u_top.m_addr == (MEM_AW'(0) ^ ak)) begin
          started = 1; sys0 = n_sys;
        end else if (started && u_top.m_addr == (end_pc[11:2] ^ ak)) break;
      end
    end
    nsys = n_sys - sys0;
    n_run[sel]++;
    check(ncyc == exp_cyc, $sformatf("core %0d: %0d core cycles, expected %0d", sel, ncyc, exp_cyc));
    case (sk)
      SKIP_OFF: check(nsys >= 2 * ncyc - 2 && nsys <= 2 * ncyc + 2,
                      $sformatf("no skipping: %0d system cycles for %0d", nsys, ncyc));
      SKIP_25:  check(nsys > 2.4 * ncyc && nsys < 2.95 * ncyc, $sformatf("25%%: %0d / %0d", nsys, ncyc));
      SKIP_50:  check(nsys > 3.6 * ncyc && nsys < 4.4 * ncyc, $sformatf("50%%: %0d / %0d", nsys, ncyc));
      default:  check(nsys > 7.0 * ncyc && nsys < 9.0 * ncyc, $sformatf("75%%: %0d / %0d", nsys, ncyc));
    endcase
    $display("run core=%0d skip=%0d pert=%0d: %0d instr cycles, %0d system cycles",
             sel, sk, pp, ncyc, nsys);

    // stop the core and read back the data region and the register dump
    @(negedge core_clk);
    core_rst_n = 1'b0;
    repeat (2) @(negedge core_clk);
    for (int i = 256; i < 336; i++) begin
      @(negedge core_clk);
      tl_mem_en = 1'b1; tl_mem_we = 1'b0; tl_mem_addr = MEM_AW'(i) ^ ak;
      @(negedge core_clk);
      tl_mem_en = 1'b0;
      check((tl_mem_rdata ^ dk) == ref_mem[i],
            $sformatf("core %0d word %0d = %h expected %h", sel, i, tl_mem_rdata ^ dk, ref_mem[i]));
      if (prot && i == 300) check(u_top.u_mem.mem[i] != ref_mem[MEM_AW'(i) ^ ak] || dk == 0,
                                  "stored word differs from plain word");
    end
  endtask

  initial begin
    void'($urandom(32'h7e57_c41a));
    core_rst_n = 1'b0; core_sel = SEL_NCM; skip_sel = SKIP_OFF; pert_period = 8'd0;
    sys_div = 8'd1; smp_div = 8'd3; rng_div = 8'd1;
    mem_addr_key = '0; mem_data_key = '0; rf_addr_key = '0; rf_data_key = '0;
    tl_mem_en = 1'b0; tl_mem_we = 1'b0; tl_mem_addr = '0; tl_mem_wdata = '0;
    #20 rst_n = 1'b1;
    wait (rng_ready);
    check(u_top.u_post.lfsr != '1 && u_top.u_post.casr != '0, "RNG state after init");
    run(SEL_NCM,    SKIP_OFF, 8'd0);
    run(SEL_BM,     SKIP_50,  8'd32);
    run(SEL_NCM,    SKIP_25,  8'd1);
    run(SEL_BM_DDL, SKIP_75,  8'd32);
    run(SEL_BM,     SKIP_OFF, 8'd0);
    $display("events: raw=%0d clk_pert=%0d skip=%0d prot_rd=%0d prot_wr=%0d rf_prot_wr=%0d tl=%0d",
             n_raw, n_crand_pert, n_skip, n_prot_rd, n_prot_wr, n_rf_prot, n_tl);
    $display("instr: load=%0d store=%0d br_taken=%0d shift=%0d slt=%0d jump=%0d runs=%0d/%0d/%0d",
             n_ld, n_st, n_brt, n_sh, n_slt, n_jmp, n_run[0], n_run[1], n_run[2]);
    check(clk_init_done, "clock LFSR initialised from the RNG");
    check(n_raw > 80, "raw random bits sampled");
    check(n_crand_pert > 0, "clock LFSR perturbed");
    check(n_skip > 0, "clock edges skipped");
    check(n_prot_rd > 0 && n_prot_wr > 0, "main-memory protection used");
    check(n_rf_prot > 0, "register-file protection used");
    check(n_tl > 0, "test-logic memory access");
    check(n_ld > 0 && n_st > 0 && n_brt > 0 && n_sh > 0 && n_slt > 0 && n_jmp > 0,
          "all two-phase instruction classes");
    check(n_run[0] > 0 && n_run[1] > 0 && n_run[2] > 0, "all three cores ran");
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4ms;
    if (!done) begin
      failures++;
      $display("FAIL watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
