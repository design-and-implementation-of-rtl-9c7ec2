// secure_rv_top: testchip with three implementations of one bit-serial
// RISC-V core sharing two SRAMs, plus clock randomization, a random number
// generator and memory protection.
//
// Clocks. ro_clk (the system ring oscillator) is divided by sys_div+1 into
// the system clock sys_clk. The clock-edge randomizer runs on sys_clk and
// produces core_clk, half the system clock with a selectable share of its
// edges skipped; the cores and both SRAMs run on core_clk.
//
// Randomness. rng_ro (the entropy oscillator) is divided by rng_div+1; the
// result goes to the test pad rng_pad and is sampled every smp_div+1 system
// cycles through a two-stage metastability filter. Each raw bit perturbs the
// LFSR-43/CASR-37 post-processing, whose state an XOR network turns into 243
// fresh random bits per system clock: remask bits for the masked core's
// registers, remask words for data read through the protection units, and
// the perturbation/init bit of the clock randomizer.
//
// Cores. core_sel picks the operational core; the other two are held in
// reset. The unprotected core (NCM) talks to the SRAMs directly. The masked
// core (BM, in this design) and the external masked DDL core (ports ddl_*)
// reach the SRAMs through mem_protect units that scramble addresses and
// encrypt data with the session keys, for the main memory and for the
// register file. While tl_mem_en is high the test logic owns the main
// memory port (program loading and result read-back, one word per core_clk;
// tl_mem_rdata is valid the next core_clk cycle). The JTAG/test-logic
// controller itself, both ring oscillators and the DDL core are outside this
// module: their signals are ports.
//
// The block set and the way they connect follow the chip's top-level
// diagram; the port names, the test-logic interface and the random-bit
// allocation (secure_rv_pkg) are this design's own.
module secure_rv_top
  import secure_rv_pkg::*;
(
  input  logic              ro_clk,       // system ring oscillator
  input  logic              rng_ro,       // entropy ring oscillator
  input  logic              rst_n,        // power-on reset, asynchronous
  // configuration from the test logic
  input  logic              core_rst_n,   // releases the selected core
  input  core_sel_e         core_sel,
  input  logic [7:0]        sys_div,
  input  logic [7:0]        smp_div,
  input  logic [7:0]        rng_div,
  input  skip_sel_e         skip_sel,
  input  logic [7:0]        pert_period,
  input  logic [MEM_AW-1:0] mem_addr_key,
  input  logic [MEM_DW-1:0] mem_data_key,
  input  logic [RF_AW-1:0]  rf_addr_key,
  input  logic [RF_DW-1:0]  rf_data_key,
  // test-logic access to the main memory
  input  logic              tl_mem_en,
  input  logic              tl_mem_we,
  input  logic [MEM_AW-1:0] tl_mem_addr,
  input  logic [MEM_DW-1:0] tl_mem_wdata,
  output logic [MEM_DW-1:0] tl_mem_rdata,
  // external masked DDL core
  input  core_req_t         ddl_req_s1,
  input  core_req_t         ddl_req_s2,
  output core_rsp_t         ddl_rsp_s1,
  output core_rsp_t         ddl_rsp_s2,
  output logic [BM_N_RND-1:0] ddl_rnd,
  output logic              ddl_rst_n,
  // observation
  output logic              sys_clk,
  output logic              core_clk,
  output logic              rng_pad,
  output logic              rng_ready,
  output logic              clk_init_done
);

  // ------------------------------------------------------------- clocking
  logic sys_tick_unused;
  clk_divider u_sys_div (.clk(ro_clk), .rst_n, .div(sys_div), .clk_out(sys_clk),
                         .tick(sys_tick_unused));

  logic [RAND_W-1:0] rand_bits;
  logic              crand_skip_unused;
  logic [7:0]        crand_lfsr_unused;
  clk_randomizer u_crand (
    .clk(sys_clk), .rst_n, .skip_sel, .pert_period,
    .rnd_bit(rand_bits[RB_CLK]), .rnd_ready(rng_ready),
    .rand_clk(core_clk), .skip(crand_skip_unused), .init_done(clk_init_done),
    .lfsr(crand_lfsr_unused));

  // ------------------------------------------------------------------ RNG
  logic rng_tick_unused, smp_clk_unused, smp_tick, raw_bit, raw_valid;
  clk_divider u_rng_div (.clk(rng_ro), .rst_n, .div(rng_div), .clk_out(rng_pad),
                         .tick(rng_tick_unused));
  clk_divider u_smp_div (.clk(sys_clk), .rst_n, .div(smp_div), .clk_out(smp_clk_unused),
                         .tick(smp_tick));
  rng_sampler u_sampler (.clk(sys_clk), .rst_n, .ro_in(rng_pad), .sample_tick(smp_tick),
                         .raw_bit, .raw_valid);

  logic [42:0] pp_lfsr;
  logic [36:0] pp_casr;
  rng_postproc u_post (.clk(sys_clk), .rst_n, .raw_bit, .raw_valid,
                       .lfsr(pp_lfsr), .casr(pp_casr), .ready(rng_ready));
  rng_xor_net u_xnet (.lfsr(pp_lfsr), .casr(pp_casr), .rnd(rand_bits));

  // ---------------------------------------------------------------- cores
  // Core resets: asserted with rst_n, released on core_clk (one register,
  // so the selection cannot glitch a reset line).
  logic ncm_rst_n, bm_rst_n;
  always_ff @(posedge core_clk or negedge rst_n) begin
    if (!rst_n) begin
      ncm_rst_n <= 1'b0;
      bm_rst_n  <= 1'b0;
      ddl_rst_n <= 1'b0;
    end else begin
      ncm_rst_n <= core_rst_n & (core_sel == SEL_NCM);
      bm_rst_n  <= core_rst_n & (core_sel == SEL_BM);
      ddl_rst_n <= core_rst_n & (core_sel == SEL_BM_DDL);
    end
  end

  // main-memory and register-file SRAM ports
  logic              m_en, m_we;
  logic [3:0]        m_be;
  logic [MEM_AW-1:0] m_addr;
  logic [MEM_DW-1:0] m_wdata, m_rdata;
  logic              r_re, r_we;
  logic [RF_AW-1:0]  r_raddr, r_waddr;
  logic [RF_DW-1:0]  r_wdata, r_rdata;

  // unprotected core, direct SRAM access
  core_req_t ncm;
  bitserial_core u_ncm (
    .clk(core_clk), .rst_n(ncm_rst_n),
    .mem_en(ncm.mem_en), .mem_we(ncm.mem_we), .mem_be(ncm.mem_be), .mem_addr(ncm.mem_addr),
    .mem_wdata(ncm.mem_wdata), .mem_rdata(m_rdata),
    .rf_re(ncm.rf_re), .rf_raddr(ncm.rf_raddr), .rf_rdata(r_rdata),
    .rf_we(ncm.rf_we), .rf_waddr(ncm.rf_waddr), .rf_wdata(ncm.rf_wdata));

  // masked core
  core_req_t bm_s1, bm_s2;
  core_rsp_t rsp_s1, rsp_s2;
  bm_core u_bm (
    .clk(core_clk), .rst_n(bm_rst_n),
    .mem_en_s1(bm_s1.mem_en), .mem_en_s2(bm_s2.mem_en),
    .mem_we_s1(bm_s1.mem_we), .mem_we_s2(bm_s2.mem_we),
    .mem_be_s1(bm_s1.mem_be), .mem_be_s2(bm_s2.mem_be),
    .mem_addr_s1(bm_s1.mem_addr), .mem_addr_s2(bm_s2.mem_addr),
    .mem_wdata_s1(bm_s1.mem_wdata), .mem_wdata_s2(bm_s2.mem_wdata),
    .mem_rdata_s1(rsp_s1.mem_rdata), .mem_rdata_s2(rsp_s2.mem_rdata),
    .rf_re_s1(bm_s1.rf_re), .rf_re_s2(bm_s2.rf_re),
    .rf_raddr_s1(bm_s1.rf_raddr), .rf_raddr_s2(bm_s2.rf_raddr),
    .rf_rdata_s1(rsp_s1.rf_rdata), .rf_rdata_s2(rsp_s2.rf_rdata),
    .rf_we_s1(bm_s1.rf_we), .rf_we_s2(bm_s2.rf_we),
    .rf_waddr_s1(bm_s1.rf_waddr), .rf_waddr_s2(bm_s2.rf_waddr),
    .rf_wdata_s1(bm_s1.rf_wdata), .rf_wdata_s2(bm_s2.rf_wdata),
    .rnd(rand_bits[RB_CORE +: BM_N_RND]));

  assign ddl_rnd    = rand_bits[RB_CORE +: BM_N_RND];

  // the random-bit allocation must fit into the XOR network's outputs
  if (RB_CORE_W < BM_N_RND) begin : g_rnd_check
    $error("not enough random bits for the masked core");
  end
  assign ddl_rsp_s1 = rsp_s1;
  assign ddl_rsp_s2 = rsp_s2;

  // masked-side multiplexer: BM or BM-DDL into the protection units
  core_req_t p_s1, p_s2;
  assign p_s1 = (core_sel == SEL_BM_DDL) ? ddl_req_s1 : bm_s1;
  assign p_s2 = (core_sel == SEL_BM_DDL) ? ddl_req_s2 : bm_s2;

  // ----------------------------------------------------- memory protection
  logic [0:0][MEM_AW-1:0] pm_addr;
  logic [MEM_DW-1:0]      pm_wdata;
  logic [5:0]             pm_ctrl;
  mem_protect #(.AW(MEM_AW), .DW(MEM_DW), .N_ADDR(1), .CW(6)) u_mprot (
    .addr_key(mem_addr_key), .data_key(mem_data_key),
    .addr_s1(p_s1.mem_addr), .addr_s2(p_s2.mem_addr), .addr_out(pm_addr),
    .wdata_s1(p_s1.mem_wdata), .wdata_s2(p_s2.mem_wdata), .wdata_enc(pm_wdata),
    .rdata_enc(m_rdata), .rnd(rand_bits[RB_MEM +: MEM_DW]),
    .rdata_s1(rsp_s1.mem_rdata), .rdata_s2(rsp_s2.mem_rdata),
    .ctrl_s1({p_s1.mem_en, p_s1.mem_we, p_s1.mem_be}),
    .ctrl_s2({p_s2.mem_en, p_s2.mem_we, p_s2.mem_be}), .ctrl(pm_ctrl));

  logic [1:0][RF_AW-1:0] pr_addr;
  logic [RF_DW-1:0]      pr_wdata;
  logic [1:0]            pr_ctrl;
  mem_protect #(.AW(RF_AW), .DW(RF_DW), .N_ADDR(2), .CW(2)) u_rprot (
    .addr_key(rf_addr_key), .data_key(rf_data_key),
    .addr_s1({p_s1.rf_waddr, p_s1.rf_raddr}), .addr_s2({p_s2.rf_waddr, p_s2.rf_raddr}),
    .addr_out(pr_addr),
    .wdata_s1(p_s1.rf_wdata), .wdata_s2(p_s2.rf_wdata), .wdata_enc(pr_wdata),
    .rdata_enc(r_rdata), .rnd(rand_bits[RB_RF +: RF_DW]),
    .rdata_s1(rsp_s1.rf_rdata), .rdata_s2(rsp_s2.rf_rdata),
    .ctrl_s1({p_s1.rf_re, p_s1.rf_we}), .ctrl_s2({p_s2.rf_re, p_s2.rf_we}), .ctrl(pr_ctrl));

  // ---------------------------------------------------- SRAM multiplexers
  always_comb begin
    if (tl_mem_en) begin
      {m_en, m_we, m_be, m_addr, m_wdata} = {1'b1, tl_mem_we, 4'hF, tl_mem_addr, tl_mem_wdata};
    end else if (core_sel == SEL_NCM) begin
      {m_en, m_we, m_be, m_addr, m_wdata} = {ncm.mem_en, ncm.mem_we, ncm.mem_be, ncm.mem_addr, ncm.mem_wdata};
    end else begin
      {m_en, m_we, m_be} = pm_ctrl;
      m_addr  = pm_addr[0];
      m_wdata = pm_wdata;
    end
    if (core_sel == SEL_NCM) begin
      {r_re, r_we, r_raddr, r_waddr, r_wdata} = {ncm.rf_re, ncm.rf_we, ncm.rf_raddr, ncm.rf_waddr, ncm.rf_wdata};
    end else begin
      {r_re, r_we} = pr_ctrl;
      r_raddr = pr_addr[0];
      r_waddr = pr_addr[1];
      r_wdata = pr_wdata;
    end
  end
  assign tl_mem_rdata = m_rdata;

  sram_sp #(.AW(MEM_AW), .DW(MEM_DW)) u_mem (
    .clk(core_clk), .en(m_en), .we(m_we), .be(m_be), .addr(m_addr), .wdata(m_wdata),
    .rdata(m_rdata));
  sram_dp #(.AW(RF_AW), .DW(RF_DW)) u_rf (
    .clk(core_clk), .re(r_re), .raddr(r_raddr), .rdata(r_rdata), .we(r_we), .waddr(r_waddr),
    .wdata(r_wdata));

endmodule
