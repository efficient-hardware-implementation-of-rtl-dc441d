// cw_sampler -- constant-time sampler for HQC polynomials.
//
// Fixed-weight mode (dense = 0) runs the reordered sampling loop:
//   for i = omega-1 downto 0:
//     W          <- next 32-bit PRNG word
//     support[i] <- i + (W mod (n - i))
//     if v[support[i]] = 1 then v[i] = 1 else v[support[i]] = 1
// The first PRNG word is used for i = omega-1, so each word is consumed the
// moment it arrives and the modular reduction and the uniqueness check run as
// one five-stage pipeline: barrett_rlut supplies R for n - i, barrett_pipe
// (three stages) reduces, unique_check (two stages) finishes the reduction,
// reads the memory word, checks and writes. Every iteration is one read and
// one write, so the schedule depends only on when PRNG words arrive, never on
// their values. After the last word the pipeline drains (4 cycles) and the LW
// local words are written back. The explicit result goes to the memory port,
// the final support to sup_* (index i, coordinate).
//
// Dense mode (dense = 1) expands h: pairs of PRNG words {second, first} form
// the 64-bit memory words 0..NWORDS-1, the last one masked to n mod 64 bits.
// The published design says only that the sampler was extended to produce h;
// the word packing is this design's choice.
//
// With PRNG words available every cycle a fixed-weight run takes
// OMEGA + 4 + LW + 1 cycles from start to done and a dense run 2*NWORDS + 1.
// Memory contents must be zero before a fixed-weight run.
//
// Interface: start (one-cycle pulse while idle) with dense selecting the mode;
// done pulses once at the end. rnd_valid/rnd_ready is a valid/ready handshake
// on 32-bit words. rd_*/wr_* drive a read-before-write memory with one-cycle
// read latency.
module cw_sampler #(
  parameter int unsigned N     = hqc_pkg::N,
  parameter int unsigned OMEGA = hqc_pkg::OMEGA,
  parameter int unsigned MW    = hqc_pkg::MW,
  parameter int unsigned AW    = hqc_pkg::AW,
  parameter int unsigned CW    = hqc_pkg::CW,
  parameter int unsigned IW    = hqc_pkg::IW,
  parameter int unsigned RW    = hqc_pkg::RW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          dense,
  output logic          busy,
  output logic          done,
  // random words
  input  logic          rnd_valid,
  input  logic [31:0]   rnd_word,
  output logic          rnd_ready,
  // polynomial memory
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [MW-1:0] rd_data,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [MW-1:0] wr_data,
  // support output
  output logic          sup_we,
  output logic [IW-1:0] sup_addr,
  output logic [CW-1:0] sup_data
);
  localparam int unsigned NWORDS = (N + MW - 1) / MW;
  localparam int unsigned LASTB  = N - (NWORDS - 1) * MW;
  localparam logic [MW-1:0] LAST_MASK = (LASTB == MW) ? '1 : ((MW'(1) << LASTB) - 1'b1);

  typedef enum logic [2:0] {S_IDLE, S_SAMPLE, S_DRAIN, S_FLUSH, S_DENSE, S_DONE} state_t;
  state_t state;

  logic [IW-1:0] issued;
  logic [2:0]    drain_cnt;
  logic          half;       // dense mode: low half of the word held
  logic [31:0]   lo_word;
  logic [AW-1:0] dw_addr;
  logic          take;

  logic [RW-1:0] r_cur;
  logic [IW-1:0] i_cur;
  logic          x_valid;
  logic [CW:0]   x;
  logic [IW-1:0] x_i;
  logic          uc_wr_en;
  logic [AW-1:0] uc_wr_addr;
  logic [MW-1:0] uc_wr_data;
  logic          flush, flush_done;

  assign rnd_ready = (state == S_SAMPLE) || (state == S_DENSE);
  assign take      = rnd_ready && rnd_valid;
  assign busy      = (state != S_IDLE);

  barrett_rlut #(.N(N), .OMEGA(OMEGA), .RW(RW), .IW(IW)) u_rlut (
    .clk, .rst_n,
    .init (start && !dense && state == S_IDLE),
    .step (take && state == S_SAMPLE),
    .r    (r_cur),
    .i    (i_cur)
  );

  barrett_pipe #(.N(N), .RW(RW), .IW(IW), .XW(CW + 1)) u_barrett (
    .clk, .rst_n,
    .in_valid (take && state == S_SAMPLE),
    .w        (rnd_word),
    .i        (i_cur),
    .r        (r_cur),
    .x_valid, .x, .x_i
  );

  unique_check #(.N(N), .OMEGA(OMEGA), .MW(MW), .AW(AW), .CW(CW), .IW(IW)) u_unique (
    .clk, .rst_n,
    .start      (start && state == S_IDLE),
    .flush, .flush_done,
    .x_valid, .x, .x_i,
    .rd_en, .rd_addr, .rd_data,
    .wr_en      (uc_wr_en),
    .wr_addr    (uc_wr_addr),
    .wr_data    (uc_wr_data),
    .sup_valid  (sup_we),
    .sup_idx    (sup_addr),
    .sup_coord  (sup_data)
  );

  assign flush = (state == S_DRAIN) && (drain_cnt == 3'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      issued    <= '0;
      drain_cnt <= '0;
      half      <= 1'b0;
      lo_word   <= '0;
      dw_addr   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          issued  <= '0;
          half    <= 1'b0;
          dw_addr <= '0;
          state   <= dense ? S_DENSE : S_SAMPLE;
        end
        S_SAMPLE: if (take) begin
          issued <= issued + 1'b1;
          if (issued == IW'(OMEGA - 1)) begin
            state     <= S_DRAIN;
            drain_cnt <= 3'd3;
          end
        end
        S_DRAIN: if (drain_cnt == 3'd0) state <= S_FLUSH;
                 else drain_cnt <= drain_cnt - 1'b1;
        S_FLUSH: if (flush_done) state <= S_DONE;
        S_DENSE: if (take) begin
          half    <= !half;
          lo_word <= rnd_word;
          if (half) begin
            dw_addr <= dw_addr + 1'b1;
            if (dw_addr == AW'(NWORDS - 1)) state <= S_DONE;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign done = (state == S_DONE);

  always_comb begin
    if (state == S_DENSE) begin
      wr_en   = take && half;
      wr_addr = dw_addr;
      wr_data = {rnd_word, lo_word};
      if (dw_addr == AW'(NWORDS - 1)) wr_data = wr_data & LAST_MASK;
    end else begin
      wr_en   = uc_wr_en;
      wr_addr = uc_wr_addr;
      wr_data = uc_wr_data;
    end
  end
endmodule
