// ring_mult -- dense-by-sparse multiplication in F2[X]/(X^n - 1),
// accumulated onto the memory that already holds x: z = x + h*y.
//
// y is given by its OMEGA coordinates c (support_ram); h is dense in a
// poly_ram. Multiplying by X^c is a cyclic rotation by c bits, so z gains
// rot_c(h) for every coordinate. For one coordinate the unit streams the n
// bits of h starting at bit s0 = (n - c) mod n, wrapping at bit n, through a
// bit aligner and XORs each completed 64-bit word into word j = 0, 1, ... of z
// with the memory's modify access. In word terms: word w0 = s0/64 is read
// first and shifted right by o = s0 mod 64, then words w0+1 .. NWORDS-1
// (the last holding only n mod 64 bits), then words 0 .. w0-1, then word w0
// again masked to its low o bits: NWORDS+1 reads of h. The aligner keeps a
// 64-bit remainder and emits a word whenever 64 bits have gathered; after the
// last read the remaining n mod 64 bits form the top word of z. Because the
// wrap at n is applied while streaming, every partial result is already
// reduced modulo X^n - 1 and z needs only one polynomial of storage.
//
// Published: schoolbook word-wise product of each h word with each y
// coordinate, reduction modulo X^n - 1 of every intermediate result, x
// preloaded in the result memory, accumulation through a XOR modify access in
// the memory. This design's choice: the streaming aligner, one coordinate at a
// time. It processes one h word per cycle, NWORDS + 6 cycles per coordinate,
// OMEGA * (NWORDS + 6) + 1 cycles in all; the published module reaches about
// 4900 cycles for HQC-128 with a windowing method that is not described in
// enough detail to reproduce.
//
// Interface: start pulse while idle, done pulse at the end. sup_rd_* and
// h_rd_* are synchronous reads with one cycle latency; z_wr_* is a XOR write.
// z_wr_xor is always 1 (every write of this unit accumulates); it is a port
// so that the memory's write mode is visible where the memories are shared.
module ring_mult #(
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
  output logic          busy,
  output logic          done,
  // support of y
  output logic          sup_rd_en,
  output logic [IW-1:0] sup_rd_addr,
  input  logic [CW-1:0] sup_rd_data,
  // dense h
  output logic          h_rd_en,
  output logic [AW-1:0] h_rd_addr,
  input  logic [MW-1:0] h_rd_data,
  // accumulator z (holds x at start)
  output logic          z_wr_en,
  output logic          z_wr_xor,
  output logic [AW-1:0] z_wr_addr,
  output logic [MW-1:0] z_wr_data
);
  localparam int unsigned NWORDS = (N + MW - 1) / MW;
  localparam int unsigned LASTB  = N - (NWORDS - 1) * MW;
  localparam int unsigned SH     = $clog2(MW);
  localparam int unsigned LENW   = SH + 1;

  typedef enum logic [2:0] {S_IDLE, S_SUP, S_SETUP, S_RUN, S_FLUSH, S_DONE} state_t;
  state_t state;

  logic [IW-1:0]   k;          // coordinate index
  logic [SH-1:0]   o;          // bit offset inside w0
  logic [AW:0]     rc;         // reads issued for this coordinate
  logic [AW-1:0]   ra;         // address of the next read
  logic [CW-1:0]   s0;

  // read tags, one cycle behind the read
  logic            d_v, d_first, d_last, d_top;

  logic [MW-1:0]   buf_q;      // aligner remainder
  logic [LENW-1:0] cnt;        // valid bits in buf_q (< MW)
  logic [AW-1:0]   j;          // next z word

  // chunk from the word just read
  logic [LENW-1:0] wl, len;
  logic [MW-1:0]   chunk, mask;
  logic [2*MW-1:0] merged;
  logic [LENW:0]   total;
  logic            emit;

  assign s0 = (sup_rd_data == '0) ? '0 : CW'(N) - sup_rd_data;

  always_comb begin
    wl = d_top ? LENW'(LASTB) : LENW'(MW);
    if (d_first) begin
      chunk = h_rd_data >> o;
      len   = wl - LENW'(o);
    end else if (d_last) begin
      chunk = h_rd_data;
      len   = LENW'(o);
    end else begin
      chunk = h_rd_data;
      len   = wl;
    end
    mask   = (len >= LENW'(MW)) ? '1 : ((MW'(1) << len) - 1'b1);
    chunk  = chunk & mask;
    merged = {{MW{1'b0}}, buf_q} | ({{MW{1'b0}}, chunk} << cnt);
    total  = (LENW+1)'(cnt) + (LENW+1)'(len);
    emit   = d_v && (total >= (LENW+1)'(MW));
  end

  assign busy        = (state != S_IDLE);
  assign done        = (state == S_DONE);
  assign sup_rd_en   = (state == S_SUP);
  assign sup_rd_addr = k;
  assign h_rd_en     = (state == S_RUN) && (rc <= (AW+1)'(NWORDS));
  assign h_rd_addr   = ra;
  assign z_wr_xor    = 1'b1;

  always_comb begin
    if (state == S_FLUSH) begin
      z_wr_en   = 1'b1;
      z_wr_addr = j;
      z_wr_data = buf_q;
    end else begin
      z_wr_en   = emit;
      z_wr_addr = j;
      z_wr_data = merged[MW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      k       <= '0;
      o       <= '0;
      rc      <= '0;
      ra      <= '0;
      d_v     <= 1'b0;
      d_first <= 1'b0;
      d_last  <= 1'b0;
      d_top   <= 1'b0;
      buf_q   <= '0;
      cnt     <= '0;
      j       <= '0;
    end else begin
      // read tags
      d_v     <= h_rd_en;
      d_first <= h_rd_en && (rc == '0);
      d_last  <= h_rd_en && (rc == (AW+1)'(NWORDS));
      d_top   <= (ra == AW'(NWORDS - 1));
      // aligner
      if (d_v) begin
        if (emit) begin
          buf_q <= merged[2*MW-1:MW];
          cnt   <= LENW'(total - (LENW+1)'(MW));
          j     <= j + 1'b1;
        end else begin
          buf_q <= merged[MW-1:0];
          cnt   <= LENW'(total);
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          k     <= '0;
          state <= S_SUP;
        end
        S_SUP: state <= S_SETUP;
        S_SETUP: begin
          o     <= s0[SH-1:0];
          ra    <= AW'(s0 >> SH);
          rc    <= '0;
          buf_q <= '0;
          cnt   <= '0;
          j     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (rc <= (AW+1)'(NWORDS)) begin
            rc <= rc + 1'b1;
            ra <= (ra == AW'(NWORDS - 1)) ? '0 : ra + 1'b1;
          end else if (!d_v) begin
            state <= S_FLUSH;
          end
        end
        S_FLUSH: begin
          if (k == IW'(OMEGA - 1)) state <= S_DONE;
          else begin
            k     <= k + 1'b1;
            state <= S_SUP;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
