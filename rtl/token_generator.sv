// token_generator: the ring-oscillator PUF that creates the TrustToken keys.
//
// N_RO enable-gated ring oscillators (ro_cell) feed the selection, counting
// and comparison logic (puf_ctrl). A CHAL_W-bit challenge produces a
// KEY_W-bit key; with the published figures that is 512 oscillators, a
// 2-byte challenge and a 256-bit key.
//
// Process variation is represented by giving every oscillator its own
// half-period, 1000 ps plus a 0..255 ps offset taken from a hash of the
// oscillator index and DEVICE_SEED. Two different DEVICE_SEED values model
// two physical chips built from the same design; the same seed always gives
// the same keys (no noise is modelled). The oscillator array is the only
// part that is not synthesizable: on a device it is replaced by placed
// inverter loops, while puf_ctrl is ordinary logic.
//
// Interface and timing are those of puf_ctrl: start when busy is low,
// key_valid pulses KEY_W * (WINDOW + SETTLE + 2) cycles later.
module token_generator #(
  parameter int unsigned N_RO        = 512,
  parameter int unsigned KEY_W       = 256,
  parameter int unsigned CHAL_W      = 16,
  parameter int unsigned WINDOW      = 16,
  parameter int unsigned SETTLE      = 4,
  parameter int unsigned CNT_W       = 16,
  parameter logic [31:0] DEVICE_SEED = 32'h1234_5678
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [CHAL_W-1:0] challenge,
  output logic              busy,
  output logic              key_valid,
  output logic [KEY_W-1:0]  key
);
  timeunit 1ns;
  timeprecision 1ps;

  // Integer mixing function giving each oscillator its frequency offset.
  function automatic int unsigned ro_offset(logic [31:0] seed, int unsigned idx);
    logic [31:0] h;
    h = seed ^ (32'(idx) * 32'h9E37_79B9);
    h = h ^ (h >> 16);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return int'(h[7:0]);
  endfunction

  logic [N_RO-1:0] ro_en;
  logic [N_RO-1:0] ro_out;

  for (genvar i = 0; i < N_RO; i++) begin : g_ro
    ro_cell #(.HALF_PERIOD_PS(1000 + ro_offset(DEVICE_SEED, i))) u_ro (
      .enable(ro_en[i]),
      .osc   (ro_out[i])
    );
  end

  puf_ctrl #(
    .N_RO(N_RO), .KEY_W(KEY_W), .CHAL_W(CHAL_W),
    .WINDOW(WINDOW), .SETTLE(SETTLE), .CNT_W(CNT_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .challenge, .busy, .key_valid, .key,
    .ro_en, .ro_out
  );

endmodule
