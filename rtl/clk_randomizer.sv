// clk_randomizer: clock-edge randomizer running on the system clock.
//
// An 8-stage LFSR in XNOR form (x^8 + x^6 + x^5 + x^4 + 1, feedback
// XNOR of stages 8, 6, 5 and 4 into stage 1, period 255, the all-ones state
// excluded) decides for every system clock cycle whether the next edge of the
// randomized clock is skipped. Its two last stages (7 and 8) are combined by
// AND, XOR or OR, which skips 25 %, 50 % or 75 % of the edges; skip_sel =
// SKIP_OFF disables skipping. The randomized clock comes from a toggle
// flip-flop that inverts every system cycle unless the edge is skipped, so
// without skipping it runs at half the system clock. Over any 255-cycle
// window of the unperturbed LFSR the number of edges is constant (63, 128 or
// 191 of 255 cycles skipped for AND, XOR, OR).
//
// Init & perturb control: after rnd_ready the LFSR is loaded serially with
// eight bits from the RNG (rnd_bit into stage 1); until then no edge is
// produced unless skipping is off. Afterwards, when pert_period is non-zero,
// the RNG bit is XORed into the feedback once every pert_period cycles
// (1 = every cycle). An update whose next state would be all ones is
// skipped, so the LFSR never locks up.
//
// LFSR polynomial and form, output stages, gate choice, toggle structure,
// forbidden-state rule, serial init and perturbation into stage 1 follow the
// chip. The select encoding, the 8-bit perturbation period register, the
// hold-off during init and reset to all zeros are this design's own.
//
// Stages are numbered 1..8 with an ascending range so that the code reads
// like the polynomial; lint reports the ascending range. The lock-up
// assertion is disabled during reset, so lint also sees rst_n used both as
// an asynchronous reset and as a sampled signal; both notes are harmless.
module clk_randomizer
  import secure_rv_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  skip_sel_e skip_sel,
  input  logic [7:0] pert_period,
  input  logic      rnd_bit,
  input  logic      rnd_ready,
  output logic      rand_clk,
  output logic      skip,
  output logic      init_done,
  output logic [7:0] lfsr        // lfsr[7] = stage 1 ... lfsr[0] = stage 8
);
  logic [1:8] st, nxt;
  logic [3:0] init_cnt;
  logic [7:0] pcnt;
  logic       fb, perturb, in_bit, pert_now, gate;

  assign fb       = ~(st[8] ^ st[6] ^ st[5] ^ st[4]);
  assign pert_now = (pert_period != 8'd0) && (pcnt == pert_period - 8'd1);
  assign perturb  = pert_now & rnd_bit;
  assign in_bit   = init_done ? (fb ^ perturb) : rnd_bit;
  assign nxt      = {in_bit, st[1:7]};

  always_comb begin
    unique case (skip_sel)
      SKIP_25: gate = st[7] & st[8];
      SKIP_50: gate = st[7] ^ st[8];
      SKIP_75: gate = st[7] | st[8];
      default: gate = 1'b0;
    endcase
  end
  assign skip = (skip_sel == SKIP_OFF) ? 1'b0 : (~init_done | gate);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= '0;
      init_cnt  <= '0;
      init_done <= 1'b0;
      pcnt      <= '0;
      rand_clk  <= 1'b0;
    end else begin
      if (init_done || rnd_ready) begin
        if (nxt != 8'hFF) st <= nxt;
        if (!init_done) begin
          init_cnt <= init_cnt + 4'd1;
          if (init_cnt == 4'd7) init_done <= 1'b1;
        end
      end
      if (init_done) pcnt <= pert_now ? 8'd0 : pcnt + 8'd1;
      if (!skip) rand_clk <= ~rand_clk;
    end
  end

  always_comb for (int i = 1; i <= 8; i++) lfsr[8 - i] = st[i];

  // The LFSR never holds the lock-up state.
  a_no_lockup: assert property (@(posedge clk) disable iff (!rst_n) st != 8'hFF);
endmodule
