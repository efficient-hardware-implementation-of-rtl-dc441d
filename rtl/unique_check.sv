// unique_check -- last two stages of the fixed-weight sampler pipeline
// ("Compare N / Read" and "Unique Check / Write") with the constant-time
// memory scheme around them.
//
// Compare N / Read: X from barrett_pipe lies in [i, i + 2(n-i)); if X >= n it
// is reduced by n - i, giving support[i] = i + (W mod (n-i)). The word that
// holds that coordinate is read from the polynomial memory in the same cycle
// (synchronous read, data one cycle later) and the coordinate is registered.
//
// Unique Check / Write: the coordinate's bit is looked up in the word read. If
// it is clear, the bit is set and the word written back to the same address;
// if it is already set (a repeated coordinate), bit i is set instead
// (Algorithm 2 of the published sampler: v[i] = 1). Every valid iteration
// performs exactly one read and one write, whatever the data, so the
// schedule never depends on the secret values.
//
// Two hazards are handled as published:
//  * read-after-write: when the word written in the previous cycle is the one
//    read in this cycle, the memory returned stale data; the last written word
//    is kept in a register and used instead.
//  * a repeated coordinate writes bit i, whose word was not read. Since
//    i < omega, all such bits lie in the first LW = ceil(omega/MW) words.
//    These words are kept in local registers; reads and writes of them use the
//    registers, writes are mirrored to memory, and at the end (flush) all LW
//    local words are written to memory unconditionally.
// The memory words are assumed zero at start; start clears the local words.
// Mirroring local writes to memory and the exact flush order are this
// design's choices.
//
// Interface: x_valid/x/x_i from barrett_pipe (bubbles allowed). rd_* and
// wr_* drive a memory with read-before-write behaviour on the same address.
// rd_en equals x_valid: every valid item reads, so the access pattern does
// not depend on the data.
// sup_valid/sup_idx/sup_coord give the final coordinate of iteration i in the
// same cycle as its memory write. flush must only be pulsed when no valid
// item is in flight; it takes LW cycles, flush_done pulses with the last one.
module unique_check #(
  parameter int unsigned N     = hqc_pkg::N,
  parameter int unsigned OMEGA = hqc_pkg::OMEGA,
  parameter int unsigned MW    = hqc_pkg::MW,
  parameter int unsigned AW    = hqc_pkg::AW,
  parameter int unsigned CW    = hqc_pkg::CW,
  parameter int unsigned IW    = hqc_pkg::IW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          flush,
  output logic          flush_done,
  // from barrett_pipe
  input  logic          x_valid,
  input  logic [CW:0]   x,
  input  logic [IW-1:0] x_i,
  // memory interface
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [MW-1:0] rd_data,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [MW-1:0] wr_data,
  // support representation output
  output logic          sup_valid,
  output logic [IW-1:0] sup_idx,
  output logic [CW-1:0] sup_coord
);
  localparam int unsigned SH = $clog2(MW);
  localparam int unsigned LW = (OMEGA + MW - 1) / MW;
  localparam int unsigned LWW = (LW > 1) ? $clog2(LW) : 1;

  // ---------------- Compare N / Read ----------------
  logic [CW:0]   m_cn;        // n - i
  logic [CW-1:0] sup_cn;
  assign m_cn   = (CW+1)'(N) - (CW+1)'(x_i);
  assign sup_cn = (x >= (CW+1)'(N)) ? CW'(x - m_cn) : x[CW-1:0];

  logic          v4;
  logic [CW-1:0] sup4;
  logic [IW-1:0] i4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v4   <= 1'b0;
      sup4 <= '0;
      i4   <= '0;
    end else begin
      v4   <= x_valid;
      sup4 <= sup_cn;
      i4   <= x_i;
    end
  end

  // ---------------- Unique Check / Write ----------------
  logic [MW-1:0] loc [LW];         // words 0..LW-1 of the polynomial
  logic          fw_v;             // a word was written in the previous cycle
  logic [AW-1:0] fw_addr;
  logic [MW-1:0] fw_data;

  logic [AW-1:0] sup_w;
  logic [AW-1:0] i_w;
  logic [MW-1:0] mem_word, cur_word, base_word, new_word;
  logic          dup;
  logic [CW-1:0] tgt;
  logic [AW-1:0] tgt_w;

  assign sup_w    = AW'(sup4 >> SH);
  assign i_w      = AW'(CW'(i4) >> SH);
  assign mem_word = (fw_v && fw_addr == sup_w) ? fw_data : rd_data;
  assign cur_word = (sup_w < AW'(LW)) ? loc[LWW'(sup_w)] : mem_word;
  assign dup      = cur_word[sup4[SH-1:0]];
  assign tgt      = dup ? CW'(i4) : sup4;
  assign tgt_w    = dup ? i_w : sup_w;
  assign base_word = dup ? loc[LWW'(i_w)] : cur_word;
  assign new_word  = base_word | (MW'(1) << tgt[SH-1:0]);

  // flush sequencer
  logic          fl_busy;
  logic [LWW:0]  fl_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fw_v    <= 1'b0;
      fw_addr <= '0;
      fw_data <= '0;
      fl_busy <= 1'b0;
      fl_cnt  <= '0;
      for (int k = 0; k < int'(LW); k++) loc[k] <= '0;
    end else begin
      fw_v    <= v4;
      fw_addr <= tgt_w;
      fw_data <= new_word;
      if (start) begin
        for (int k = 0; k < int'(LW); k++) loc[k] <= '0;
      end else if (v4 && tgt_w < AW'(LW)) begin
        loc[LWW'(tgt_w)] <= new_word;
      end
      if (flush) begin
        fl_busy <= 1'b1;
        fl_cnt  <= '0;
      end else if (fl_busy) begin
        fl_cnt  <= fl_cnt + 1'b1;
        if (fl_cnt == (LWW+1)'(LW - 1)) fl_busy <= 1'b0;
      end
    end
  end

  always_comb begin
    rd_en     = x_valid;
    rd_addr   = AW'(sup_cn >> SH);
    sup_valid = v4;
    sup_idx   = i4;
    sup_coord = tgt;
    if (fl_busy) begin
      wr_en   = 1'b1;
      wr_addr = AW'(fl_cnt);
      wr_data = loc[LWW'(fl_cnt)];
    end else begin
      wr_en   = v4;
      wr_addr = tgt_w;
      wr_data = new_word;
    end
  end
  assign flush_done = fl_busy && (fl_cnt == (LWW+1)'(LW - 1));

  // Flushing and sampling never overlap.
  assert property (@(posedge clk) disable iff (!rst_n) !(fl_busy && v4));
endmodule
