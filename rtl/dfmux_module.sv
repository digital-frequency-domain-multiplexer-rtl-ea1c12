// dfmux_module: one frequency-domain multiplexer module.
//
// Holds everything the FPGA does for one SQUID module of up to 32 detectors:
// the carrier synthesizer (DMFS) that biases the detectors, the nuller
// synthesizer that cancels the carriers at the SQUID input, the demodulator
// (DMFD) that digitizes the returning comb and filters each channel, and the
// FIFO from which the processor collects the results. Both synthesizers and
// the demodulator run from the same clock and sample strobe, so clock jitter
// is common to all three, as published.
//
// The register file is a choice of this design (see dfmux_pkg for the map):
// per channel a frequency word, phase offset and amplitude for each
// synthesizer and a phase offset for the demodulator mixer, whose frequency
// is taken from the carrier synthesizer's word so that the mixer is locked
// to its carrier. A control word holds the output-rate select and the 2-bit
// gain selections of the three analog amplifiers, which leave as ports.
// Registers reset to zero (all carriers silent, output from FIR #1).
//
// Bus timing: a write takes effect on the clock edge with reg_we; reg_rdata
// is valid the clock after reg_re. Reading the FIFO data register removes
// the word.
module dfmux_module
  import dfmux_pkg::*;
#(
  parameter int N_CH       = 32,
  parameter int MUX        = 8,
  parameter int CIC_N      = 6,
  parameter int CIC_R      = 2048,
  parameter int TAPS       = 128,
  parameter int FIFO_DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      smp_en,
  input  logic                      sync,
  // register bus
  input  logic [7:0]                reg_addr,
  input  logic                      reg_we,
  input  logic [31:0]               reg_wdata,
  input  logic                      reg_re,
  output logic [31:0]               reg_rdata,
  // converters and analog gain selects
  output logic signed [DAC_W-1:0]   car_dac,
  output logic signed [DAC_W-1:0]   nul_dac,
  input  logic signed [ADC_W-1:0]   adc,
  output logic [GAIN_W-1:0]         car_gain,
  output logic [GAIN_W-1:0]         nul_gain,
  output logic [GAIN_W-1:0]         adc_gain,
  output logic                      fifo_nonempty
);

  logic [PHASE_W-1:0]      car_freq [N_CH], car_phase [N_CH];
  logic [PHASE_W-1:0]      nul_freq [N_CH], nul_phase [N_CH];
  logic [PHASE_W-1:0]      dem_phase [N_CH];
  logic signed [AMP_W-1:0] car_amp [N_CH], nul_amp [N_CH];
  ctrl_t                   ctrl;
  logic [N_CH-1:0]         ch_en;

  // FIFO signals
  logic                     f_wr, f_rd, f_empty, f_full, f_ovf, f_clr;
  logic [31:0]              f_wdata, f_rdata;
  logic [$clog2(FIFO_DEPTH):0] f_count;
  logic                     dmfd_ovr;

  // ---------------- register file ----------------
  logic [4:0] ch;
  assign ch = reg_addr[4:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < N_CH; c++) begin
        car_freq[c] <= '0; car_phase[c] <= '0; car_amp[c] <= '0;
        nul_freq[c] <= '0; nul_phase[c] <= '0; nul_amp[c] <= '0;
        dem_phase[c] <= '0;
      end
      ctrl  <= '0;
      ch_en <= '0;
    end else if (reg_we) begin
      if (int'(ch) < N_CH) begin
        case (reg_addr[7:5])
          3'd0: car_freq[ch]  <= reg_wdata;
          3'd1: car_phase[ch] <= reg_wdata;
          3'd2: car_amp[ch]   <= reg_wdata[AMP_W-1:0];
          3'd3: nul_freq[ch]  <= reg_wdata;
          3'd4: nul_phase[ch] <= reg_wdata;
          3'd5: nul_amp[ch]   <= reg_wdata[AMP_W-1:0];
          3'd6: dem_phase[ch] <= reg_wdata;
          default: ;
        endcase
      end
      if (reg_addr == RA_CTRL)    ctrl  <= reg_wdata[$bits(ctrl_t)-1:0];
      if (reg_addr == RA_CHAN_EN) ch_en <= reg_wdata[N_CH-1:0];
    end
  end

  assign f_rd  = reg_re && (reg_addr == RA_FIFO_DATA) && !f_empty;
  assign f_clr = reg_we && (reg_addr == RA_FIFO_STAT) && reg_wdata[16];

  always_ff @(posedge clk) begin
    if (rst) reg_rdata <= '0;
    else if (reg_re) begin
      reg_rdata <= '0;
      if (reg_addr < RA_CTRL) begin
        if (int'(ch) < N_CH) begin
          case (reg_addr[7:5])
            3'd0: reg_rdata <= car_freq[ch];
            3'd1: reg_rdata <= car_phase[ch];
            3'd2: reg_rdata <= 32'(car_amp[ch]);
            3'd3: reg_rdata <= nul_freq[ch];
            3'd4: reg_rdata <= nul_phase[ch];
            3'd5: reg_rdata <= 32'(nul_amp[ch]);
            3'd6: reg_rdata <= dem_phase[ch];
            default: ;
          endcase
        end
      end else begin
        case (reg_addr)
          RA_CTRL:      reg_rdata <= 32'(ctrl);
          RA_CHAN_EN:   reg_rdata <= 32'(ch_en);
          RA_FIFO_DATA: reg_rdata <= f_rdata;
          RA_FIFO_STAT: reg_rdata <= {14'd0, dmfd_ovr, f_ovf, 16'(f_count)};
          default: ;
        endcase
      end
    end
  end

  assign car_gain = ctrl.car_gain;
  assign nul_gain = ctrl.nul_gain;
  assign adc_gain = ctrl.adc_gain;

  // ---------------- datapath ----------------
  logic car_v, nul_v;

  dmfs #(.N_CAR(N_CH), .MUX(MUX)) u_car (
    .clk, .rst, .smp_en, .sync, .freq(car_freq), .phase(car_phase), .amp(car_amp),
    .dac_out(car_dac), .dac_valid(car_v));

  dmfs #(.N_CAR(N_CH), .MUX(MUX)) u_nul (
    .clk, .rst, .smp_en, .sync, .freq(nul_freq), .phase(nul_phase), .amp(nul_amp),
    .dac_out(nul_dac), .dac_valid(nul_v));

  dmfd #(.N_CH(N_CH), .CIC_N(CIC_N), .CIC_R(CIC_R), .TAPS(TAPS)) u_dmfd (
    .clk, .rst, .smp_en, .sync, .ch_en, .freq(car_freq), .phase(dem_phase),
    .rate_sel(ctrl.rate_sel), .adc, .fifo_wr(f_wr), .fifo_data(f_wdata),
    .overrun(dmfd_ovr));

  sync_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr_en(f_wr), .wr_data(f_wdata), .rd_en(f_rd), .rd_data(f_rdata),
    .empty(f_empty), .full(f_full), .count(f_count), .ovf_clr(f_clr), .overflow(f_ovf));

  assign fifo_nonempty = !f_empty;

  // Both synthesizers are built alike and must deliver in the same clock.
  a_dac_lockstep: assert property (@(posedge clk) disable iff (rst) car_v == nul_v);

endmodule
