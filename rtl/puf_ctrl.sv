// puf_ctrl: selection, counting and comparison logic of the RO PUF.
//
// Given a challenge, this block produces a KEY_W-bit response one bit at a
// time, as in the Token Generator: the oscillators form two banks of
// N_RO/2, each bank feeding one MUX; each MUX feeds a Counter; a ">?"
// comparator turns the two counts into one output bit, 0 or 1.
//
// Per key bit the sequence is:
//   CLEAR   counters held cleared, MUX selects stable, oscillators stopped
//   RUN     only the two selected oscillators enabled, for WINDOW cycles
//   SETTLE  oscillators stopped, SETTLE cycles for the counts to become static
//   COMPARE bit = (count A > count B); ties give 0
// so one bit takes WINDOW + SETTLE + 2 cycles and a key
// KEY_W * (WINDOW + SETTLE + 2) cycles after the start cycle.
//
// Challenge expansion (this design's choice; the published description only
// gives the 2-byte challenge length): the challenge seeds a 16-bit
// maximal-length Galois LFSR (x^16+x^14+x^13+x^11+1). For each bit the low
// byte of the state picks the bank-A oscillator and the high byte the bank-B
// oscillator, then the LFSR steps. A zero challenge is replaced by 1.
// Bit i of the key is the i-th comparison.
//
// Interface: start is sampled when idle (busy low); key_valid pulses for one
// cycle with key valid from then until the next start. ro_en/ro_out go to
// the oscillator array; ro_out of the unselected oscillators is ignored.
module puf_ctrl #(
  parameter int unsigned N_RO   = 512,
  parameter int unsigned KEY_W  = 256,
  parameter int unsigned CHAL_W = 16,
  parameter int unsigned WINDOW = 16,
  parameter int unsigned SETTLE = 4,
  parameter int unsigned CNT_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [CHAL_W-1:0] challenge,
  output logic              busy,
  output logic              key_valid,
  output logic [KEY_W-1:0]  key,
  output logic [N_RO-1:0]   ro_en,
  input  logic [N_RO-1:0]   ro_out
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned BANK  = N_RO / 2;
  localparam int unsigned SEL_W = $clog2(BANK);
  localparam int unsigned IDX_W = $clog2(N_RO);
  localparam int unsigned BIT_W = $clog2(KEY_W);
  localparam int unsigned TMR_W = $clog2(WINDOW + SETTLE + 1);
  localparam logic [15:0] LFSR_TAPS = 16'hB400;

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_RUN, S_SETTLE, S_COMPARE} state_t;

  state_t             state;
  logic [15:0]        lfsr;
  logic [SEL_W-1:0]   sel_a, sel_b;
  logic [BIT_W-1:0]   bit_idx;
  logic [TMR_W-1:0]   timer;
  logic               clr;
  logic               ro_a, ro_b;
  logic [CNT_W-1:0]   cnt_a, cnt_b;

  function automatic logic [15:0] lfsr_next(logic [15:0] s);
    return s[0] ? ((s >> 1) ^ LFSR_TAPS) : (s >> 1);
  endfunction

  logic [15:0] seed, lfsr_nxt;
  assign seed     = (challenge == '0) ? 16'h0001 : 16'(challenge);
  assign lfsr_nxt = lfsr_next(lfsr);

  // MUXes in front of the counters.
  assign ro_a = ro_out[IDX_W'(sel_a)];
  assign ro_b = ro_out[IDX_W'(BANK) + IDX_W'(sel_b)];

  ro_counter #(.CNT_W(CNT_W)) u_cnt_a (.ro_clk(ro_a), .clr(clr), .count(cnt_a));
  ro_counter #(.CNT_W(CNT_W)) u_cnt_b (.ro_clk(ro_b), .clr(clr), .count(cnt_b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      lfsr      <= 16'h0001;
      sel_a     <= '0;
      sel_b     <= '0;
      bit_idx   <= '0;
      timer     <= '0;
      clr       <= 1'b1;
      ro_en     <= '0;
      key       <= '0;
      key_valid <= 1'b0;
    end else begin
      key_valid <= 1'b0;
      clr       <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            lfsr    <= seed;
            sel_a   <= seed[SEL_W-1:0];
            sel_b   <= seed[SEL_W +: SEL_W];
            clr     <= 1'b1;
            bit_idx <= '0;
            state   <= S_CLEAR;
          end
        end
        S_CLEAR: begin
          ro_en               <= '0;
          ro_en[IDX_W'(sel_a)]                  <= 1'b1;
          ro_en[IDX_W'(BANK) + IDX_W'(sel_b)] <= 1'b1;
          timer               <= '0;
          state               <= S_RUN;
        end
        S_RUN: begin
          timer <= timer + 1'b1;
          if (timer == TMR_W'(WINDOW - 1)) begin
            ro_en <= '0;
            timer <= '0;
            state <= S_SETTLE;
          end
        end
        S_SETTLE: begin
          timer <= timer + 1'b1;
          if (timer == TMR_W'(SETTLE - 1)) state <= S_COMPARE;
        end
        S_COMPARE: begin
          key[bit_idx] <= (cnt_a > cnt_b);
          lfsr         <= lfsr_nxt;
          if (bit_idx == BIT_W'(KEY_W - 1)) begin
            key_valid <= 1'b1;
            state     <= S_IDLE;
          end else begin
            sel_a   <= lfsr_nxt[SEL_W-1:0];
            sel_b   <= lfsr_nxt[SEL_W +: SEL_W];
            clr     <= 1'b1;
            bit_idx <= bit_idx + 1'b1;
            state   <= S_CLEAR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
