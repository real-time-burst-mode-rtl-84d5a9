// Transmitter signal generation for the burst upstream OOK link.
//
// On `start` the transmitter sends one burst: 11 beats of preamble
// (A: 192 symbols of 0101..., B: [Pn, Pn, -Pn], C: 768 pseudo-random symbols)
// followed by PAYLOAD_BEATS beats of 96 payload bits taken from `bits`
// (`bits_req` marks the cycle a payload beat is consumed); between bursts it
// sends silence. One 96-symbol beat is produced every clock, and goes
// through the paper's transmit flow:
//   PAM2 (96) -> add 32-symbol overlap (128) -> 128-point FFT
//   -> bins 0..71 and 56..127 form 144 bins (1 -> 1.125 samples/symbol)
//   -> RRC (roll-off 0.1) -> 144-point IFFT -> drop the first 36 samples (108)
//   -> FIFO 108 -> 128 lanes -> DAC.
// The real part of the IFFT output is the DAC sample. With AMP = 8192 the
// DAC words swing about +-512 (the 128-point FFT divides by 128 and the
// 144-point IFFT by 16). PAYLOAD_BEATS = 1354 gives 129,984 payload symbols,
// the paper's "1.3e5". Latency from a beat to its DAC samples is about
// 1 + 1 + 46 + 2 + 53 + 1 cycles.
module bmdsp_tx
  import bmdsp_pkg::*;
#(
  parameter int AMP           = 8192,
  parameter int PAYLOAD_BEATS = 1354
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [SYM_PER_BEAT-1:0] bits,
  output logic                 bits_req,
  output logic                 busy,
  output logic                 dac_valid,
  output logic signed [DW-1:0] dac [ADC_LANES],
  output logic                 fifo_overflow
);
  typedef logic [SYM_PER_BEAT-1:0] pre_rom_t [PRE_BEATS];
  function automatic pre_rom_t mk_pre();
    pre_rom_t r;
    for (int b = 0; b < PRE_BEATS; b++) begin
      logic [SYM_PER_BEAT-1:0] w;
      for (int i = 0; i < SYM_PER_BEAT; i++) w[i] = (pre_sym(b * SYM_PER_BEAT + i) > 0);
      r[b] = w;
    end
    return r;
  endfunction
  localparam pre_rom_t PRE = mk_pre();

  typedef enum logic [1:0] {IDLE, PRE_A_C, PAYLOAD} tx_state_e;
  tx_state_e st;
  logic [15:0] cnt;
  logic [SYM_PER_BEAT-1:0] beat_bits;
  logic en;

  always_ff @(posedge clk) begin
    if (rst) begin
      st  <= IDLE;
      cnt <= '0;
    end else begin
      case (st)
        IDLE:    if (start) begin st <= PRE_A_C; cnt <= '0; end
        PRE_A_C: if (int'(cnt) == PRE_BEATS - 1) begin st <= PAYLOAD; cnt <= '0; end
                 else cnt <= cnt + 16'd1;
        PAYLOAD: if (int'(cnt) == PAYLOAD_BEATS - 1) begin st <= IDLE; cnt <= '0; end
                 else cnt <= cnt + 16'd1;
        default: st <= IDLE;
      endcase
    end
  end

  always_comb begin
    en        = (st != IDLE);
    bits_req  = (st == PAYLOAD);
    beat_bits = (st == PRE_A_C) ? PRE[cnt[3:0]] : bits;
  end
  assign busy = en;

  // PAM2
  logic signed [DW-1:0] sym [SYM_PER_BEAT];
  logic sym_v;
  pam2_map #(.W(DW), .NB(SYM_PER_BEAT), .AMP(AMP)) u_map (
    .clk(clk), .rst(rst), .in_valid(!rst), .en(en), .bits(beat_bits),
    .out_valid(sym_v), .sym(sym));

  // add overlap 96 + 32
  logic signed [DW-1:0] ov [LANES_1SPS];
  logic ov_v;
  overlap_add #(.W(DW), .IN_W(SYM_PER_BEAT), .OV(OV_SYM)) u_ov (
    .clk(clk), .rst(rst), .in_valid(sym_v), .din(sym), .out_valid(ov_v), .dout(ov));

  cplx_t f_in [LANES_1SPS], f_out [LANES_1SPS];
  logic  f_v;
  always_comb for (int i = 0; i < LANES_1SPS; i++) begin
    f_in[i].re = ov[i];
    f_in[i].im = '0;
  end
  fft_core #(.N2(7), .N3(0), .INVERSE(1'b0)) u_fft (
    .clk(clk), .in_valid(ov_v), .x(f_in), .out_valid(f_v), .y(f_out));

  // first 72 and last 72 of the 128 bins -> 144 bins
  cplx_t b144 [LANES_FFT], r144 [LANES_FFT], t144 [LANES_FFT];
  logic  r_v, t_v;
  always_comb for (int k = 0; k < LANES_FFT; k++)
    b144[k] = (k < LANES_FFT / 2) ? f_out[k] : f_out[k - (LANES_FFT - LANES_1SPS)];

  rrc_filter #(.N(LANES_FFT)) u_rrc (
    .clk(clk), .rst(rst), .in_valid(f_v), .x(b144), .out_valid(r_v), .y(r144));

  fft_core #(.N2(4), .N3(2), .INVERSE(1'b1)) u_ifft (
    .clk(clk), .in_valid(r_v), .x(r144), .out_valid(t_v), .y(t144));

  // remove the 36-sample overlap, keep the real part
  logic signed [DW-1:0] s108 [LANES_RS];
  always_comb for (int i = 0; i < LANES_RS; i++) s108[i] = t144[OV_RS + i].re;

  gearbox #(.W(DW), .IN_W(LANES_RS), .OUT_W(ADC_LANES)) u_fifo (
    .clk(clk), .rst(rst), .in_valid(t_v), .din(s108),
    .out_valid(dac_valid), .dout(dac), .overflow(fifo_overflow));
endmodule
