// hqc_keygen -- polynomial core of HQC-128 key generation: samples x, y and h
// and computes z = h*y + x in three memories.
//
// Memory plan (the published joint sampling/arithmetic schedule):
//   1. x is sampled (fixed weight) into RAM0 in explicit form.
//   2. y is sampled into RAM1 in explicit form, where the uniqueness check
//      needs it, and at the same time its support goes to RAM2.
//   3. h is expanded (dense) into RAM1, overwriting the explicit y.
//   4. z = h*y + x is accumulated in RAM0 on top of x, reduced modulo
//      X^n - 1 as it goes, so no separate x or double-length product memory
//      is needed.
// Before step 1 RAM0 and RAM1 are cleared (NWORDS cycles), since the sampler
// expects zeroed memory; the published text does not say how this is done.
//
// Random words come from one prng_squeeze unit in front of an external Keccak
// permutation core. x and y use the secret seed stream (perm_stream = 0), h
// the public seed stream (perm_stream = 1); absorbing the seeds and keeping
// the two Keccak states is the core's job and outside this module. Between
// the two streams the squeeze buffer is emptied.
//
// Interface: start pulse while idle, done pulse at the end, busy in between.
// perm_req/perm_ack/perm_rate/perm_stream connect the permutation core.
// While idle, ext_rd_* reads RAM0 (z, ext_rd_sel = 0) or RAM1 (h,
// ext_rd_sel = 1) and ext_sup_rd_* reads RAM2 (support of y), all with one
// cycle latency.
module hqc_keygen #(
  parameter int unsigned N          = hqc_pkg::N,
  parameter int unsigned OMEGA      = hqc_pkg::OMEGA,
  parameter int unsigned MW         = hqc_pkg::MW,
  parameter int unsigned RATE_LANES = hqc_pkg::RATE_LANES
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // Keccak permutation core
  output logic                     perm_req,
  output logic                     perm_stream,
  input  logic                     perm_ack,
  input  logic [RATE_LANES*64-1:0] perm_rate,
  // result readout while idle
  input  logic                     ext_rd_en,
  input  logic                     ext_rd_sel,
  input  logic [hqc_pkg::AW-1:0]   ext_rd_addr,
  output logic [MW-1:0]            ext_rd_data,
  input  logic                     ext_sup_rd_en,
  input  logic [hqc_pkg::IW-1:0]   ext_sup_rd_addr,
  output logic [hqc_pkg::CW-1:0]   ext_sup_rd_data
);
  localparam int unsigned AW     = hqc_pkg::AW;
  localparam int unsigned CW     = hqc_pkg::CW;
  localparam int unsigned IW     = hqc_pkg::IW;
  localparam int unsigned NWORDS = (N + MW - 1) / MW;

  typedef enum logic [3:0] {
    K_IDLE, K_SYNC, K_CLEAR, K_X, K_Y, K_SW_WAIT, K_SW_CLR, K_H, K_MUL, K_DONE
  } kstate_t;
  kstate_t state;

  logic          launched;       // start already given to the active unit
  logic [AW-1:0] clr_addr;

  // ---------------- PRNG ----------------
  logic        prng_en, prng_clear, prng_busy;
  logic        rnd_valid, rnd_ready;
  logic [31:0] rnd_word;

  prng_squeeze #(.RATE_LANES(RATE_LANES)) u_prng (
    .clk, .rst_n,
    .en         (prng_en),
    .clear      (prng_clear),
    .busy       (prng_busy),
    .perm_req, .perm_ack, .perm_rate,
    .word_valid (rnd_valid),
    .word       (rnd_word),
    .word_ready (rnd_ready)
  );

  // ---------------- sampler ----------------
  logic          smp_start, smp_dense, smp_busy, smp_done;
  logic          smp_rd_en, smp_wr_en;
  logic [AW-1:0] smp_rd_addr, smp_wr_addr;
  logic [MW-1:0] smp_rd_data, smp_wr_data;
  logic          smp_sup_we;
  logic [IW-1:0] smp_sup_addr;
  logic [CW-1:0] smp_sup_data;

  cw_sampler #(.N(N), .OMEGA(OMEGA), .MW(MW), .AW(AW), .CW(CW), .IW(IW)) u_sampler (
    .clk, .rst_n,
    .start     (smp_start),
    .dense     (smp_dense),
    .busy      (smp_busy),
    .done      (smp_done),
    .rnd_valid, .rnd_word, .rnd_ready,
    .rd_en     (smp_rd_en),
    .rd_addr   (smp_rd_addr),
    .rd_data   (smp_rd_data),
    .wr_en     (smp_wr_en),
    .wr_addr   (smp_wr_addr),
    .wr_data   (smp_wr_data),
    .sup_we    (smp_sup_we),
    .sup_addr  (smp_sup_addr),
    .sup_data  (smp_sup_data)
  );

  // ---------------- ring multiplier ----------------
  logic          mul_start, mul_busy, mul_done;
  logic          mul_sup_rd_en, mul_h_rd_en, mul_z_wr_en, mul_z_wr_xor;
  logic [IW-1:0] mul_sup_rd_addr;
  logic [AW-1:0] mul_h_rd_addr, mul_z_wr_addr;
  logic [MW-1:0] mul_z_wr_data;
  logic [CW-1:0] sup_rd_data;
  logic [MW-1:0] ram1_rd_data, ram0_rd_data;

  ring_mult #(.N(N), .OMEGA(OMEGA), .MW(MW), .AW(AW), .CW(CW), .IW(IW)) u_mult (
    .clk, .rst_n,
    .start       (mul_start),
    .busy        (mul_busy),
    .done        (mul_done),
    .sup_rd_en   (mul_sup_rd_en),
    .sup_rd_addr (mul_sup_rd_addr),
    .sup_rd_data (sup_rd_data),
    .h_rd_en     (mul_h_rd_en),
    .h_rd_addr   (mul_h_rd_addr),
    .h_rd_data   (ram1_rd_data),
    .z_wr_en     (mul_z_wr_en),
    .z_wr_xor    (mul_z_wr_xor),
    .z_wr_addr   (mul_z_wr_addr),
    .z_wr_data   (mul_z_wr_data)
  );

  // ---------------- memories ----------------
  logic          r0_rd_en, r0_wr_en, r0_wr_xor;
  logic [AW-1:0] r0_rd_addr, r0_wr_addr;
  logic [MW-1:0] r0_wr_data;
  logic          r1_rd_en, r1_wr_en;
  logic [AW-1:0] r1_rd_addr, r1_wr_addr;
  logic [MW-1:0] r1_wr_data;
  logic          r2_rd_en, r2_wr_en;
  logic [IW-1:0] r2_rd_addr;

  poly_ram #(.NWORDS(NWORDS), .MW(MW), .AW(AW)) u_ram0 (
    .clk,
    .rd_en (r0_rd_en), .rd_addr (r0_rd_addr), .rd_data (ram0_rd_data),
    .wr_en (r0_wr_en), .wr_xor (r0_wr_xor), .wr_addr (r0_wr_addr), .wr_data (r0_wr_data)
  );

  poly_ram #(.NWORDS(NWORDS), .MW(MW), .AW(AW)) u_ram1 (
    .clk,
    .rd_en (r1_rd_en), .rd_addr (r1_rd_addr), .rd_data (ram1_rd_data),
    .wr_en (r1_wr_en), .wr_xor (1'b0), .wr_addr (r1_wr_addr), .wr_data (r1_wr_data)
  );

  support_ram #(.DEPTH(OMEGA), .CW(CW), .IW(IW)) u_ram2 (
    .clk,
    .wr_en (r2_wr_en), .wr_addr (smp_sup_addr), .wr_data (smp_sup_data),
    .rd_en (r2_rd_en), .rd_addr (r2_rd_addr), .rd_data (sup_rd_data)
  );

  // ---------------- port routing ----------------
  logic x_phase, y_phase;
  assign x_phase = (state == K_X);
  assign y_phase = (state == K_Y) || (state == K_H);

  always_comb begin
    // RAM0: clear, then x, then modify-accumulation of z; readout when idle
    r0_rd_en   = ext_rd_en && !ext_rd_sel && state == K_IDLE;
    r0_rd_addr = ext_rd_addr;
    r0_wr_en   = 1'b0;
    r0_wr_xor  = 1'b0;
    r0_wr_addr = clr_addr;
    r0_wr_data = '0;
    // RAM1: clear, then y (explicit), then h
    r1_rd_en   = ext_rd_en && ext_rd_sel && state == K_IDLE;
    r1_rd_addr = ext_rd_addr;
    r1_wr_en   = 1'b0;
    r1_wr_addr = clr_addr;
    r1_wr_data = '0;
    smp_rd_data = ram0_rd_data;
    unique case (state)
      K_CLEAR: begin
        r0_wr_en = 1'b1;
        r1_wr_en = 1'b1;
      end
      K_X: begin
        r0_rd_en   = smp_rd_en;
        r0_rd_addr = smp_rd_addr;
        r0_wr_en   = smp_wr_en;
        r0_wr_addr = smp_wr_addr;
        r0_wr_data = smp_wr_data;
      end
      K_Y, K_H: begin
        r1_rd_en    = smp_rd_en;
        r1_rd_addr  = smp_rd_addr;
        r1_wr_en    = smp_wr_en;
        r1_wr_addr  = smp_wr_addr;
        r1_wr_data  = smp_wr_data;
        smp_rd_data = ram1_rd_data;
      end
      K_MUL: begin
        r1_rd_en   = mul_h_rd_en;
        r1_rd_addr = mul_h_rd_addr;
        r0_wr_en   = mul_z_wr_en;
        r0_wr_xor  = mul_z_wr_xor;
        r0_wr_addr = mul_z_wr_addr;
        r0_wr_data = mul_z_wr_data;
      end
      default: ;
    endcase
    ext_rd_data = ext_rd_sel ? ram1_rd_data : ram0_rd_data;
  end

  assign r2_wr_en        = smp_sup_we && (state == K_Y);
  assign r2_rd_en        = (state == K_MUL) ? mul_sup_rd_en : (ext_sup_rd_en && state == K_IDLE);
  assign r2_rd_addr      = (state == K_MUL) ? mul_sup_rd_addr : ext_sup_rd_addr;
  assign ext_sup_rd_data = sup_rd_data;

  // ---------------- sequencing ----------------
  assign prng_en     = x_phase || y_phase;
  assign prng_clear  = (state == K_SYNC || state == K_SW_WAIT) && !prng_busy;
  assign perm_stream = (state == K_H) || (state == K_SW_CLR);
  assign smp_start   = (state == K_X || state == K_Y || state == K_H) && !launched;
  assign smp_dense   = (state == K_H);
  assign mul_start   = (state == K_MUL) && !launched;
  assign busy        = (state != K_IDLE);
  assign done        = (state == K_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= K_IDLE;
      launched <= 1'b0;
      clr_addr <= '0;
    end else begin
      unique case (state)
        K_IDLE:  if (start) state <= K_SYNC;
        K_SYNC:  if (!prng_busy) begin
          clr_addr <= '0;
          state    <= K_CLEAR;
        end
        K_CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == AW'(NWORDS - 1)) begin
            launched <= 1'b0;
            state    <= K_X;
          end
        end
        K_X: begin
          launched <= 1'b1;
          if (launched && smp_done) begin
            launched <= 1'b0;
            state    <= K_Y;
          end
        end
        K_Y: begin
          launched <= 1'b1;
          if (launched && smp_done) state <= K_SW_WAIT;
        end
        K_SW_WAIT: if (!prng_busy) state <= K_SW_CLR;
        K_SW_CLR: begin
          launched <= 1'b0;
          state    <= K_H;
        end
        K_H: begin
          launched <= 1'b1;
          if (launched && smp_done) begin
            launched <= 1'b0;
            state    <= K_MUL;
          end
        end
        K_MUL: begin
          launched <= 1'b1;
          if (launched && mul_done) begin
            launched <= 1'b0;
            state    <= K_DONE;
          end
        end
        K_DONE: state <= K_IDLE;
        default: state <= K_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = smp_busy | mul_busy;
endmodule
