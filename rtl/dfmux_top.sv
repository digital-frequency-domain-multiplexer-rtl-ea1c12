// dfmux_top: firmware of one DfMUX FPGA motherboard.
//
// Four multiplexer modules (carrier synthesizer, nuller synthesizer,
// demodulator and FIFO each), as on the published board, driven from one
// clock. The clock runs at MUX times the converter sample rate (8 x 25 MHz =
// 200 MHz by default) so that each synthesizer's sine tables can be shared
// by MUX carriers; a divider makes the common sample strobe, and the D/A and
// A/D words change or are taken once per strobe. The processor (a soft core
// outside this design) reaches all registers through a simple word bus:
// host_addr[10] selects the board registers, otherwise host_addr[9:8]
// selects the module and host_addr[7:0] the register (map in dfmux_pkg).
// Board registers: a sync command that restarts every phase accumulator of
// every module at the same sample (keeping carriers, nullers and mixers
// phase locked), the watchdog kick, and an identification word. The
// watchdog drives proc_rst when the processor stops kicking it.
//
// Bus timing: writes act on the clock edge with host_we; host_rdata is valid
// the clock after host_re. The bus, the register map, the sync command and
// the clock-enable scheme are choices of this design.
module dfmux_top
  import dfmux_pkg::*;
#(
  parameter int          N_MOD      = 4,
  parameter int          N_CH       = 32,
  parameter int          MUX        = 8,
  parameter int          CIC_N      = 6,
  parameter int          CIC_R      = 2048,
  parameter int          TAPS       = 128,
  parameter int          FIFO_DEPTH = 1024,
  parameter int unsigned WD_TIMEOUT = 2**28
) (
  input  logic                      clk,
  input  logic                      rst,
  // processor bus
  input  logic [10:0]               host_addr,
  input  logic                      host_we,
  input  logic [31:0]               host_wdata,
  input  logic                      host_re,
  output logic [31:0]               host_rdata,
  output logic                      proc_rst,
  // converters
  output logic                      smp_en,
  output logic signed [DAC_W-1:0]   car_dac  [N_MOD],
  output logic signed [DAC_W-1:0]   nul_dac  [N_MOD],
  input  logic signed [ADC_W-1:0]   adc      [N_MOD],
  output logic [GAIN_W-1:0]         car_gain [N_MOD],
  output logic [GAIN_W-1:0]         nul_gain [N_MOD],
  output logic [GAIN_W-1:0]         adc_gain [N_MOD],
  output logic [N_MOD-1:0]          fifo_nonempty
);

  localparam int DW = (MUX > 1) ? $clog2(MUX) : 1;

  // Sample strobe: one clock in MUX.
  logic [DW-1:0] div;
  always_ff @(posedge clk) begin
    if (rst) begin
      div    <= '0;
      smp_en <= 1'b0;
    end else begin
      div    <= (div == DW'(MUX - 1)) ? '0 : div + 1'b1;
      smp_en <= (div == DW'(MUX - 1));
    end
  end

  // Board registers.
  logic brd_sel, sync_pend, sync, kick;
  assign brd_sel = host_addr[10];
  assign kick    = host_we && brd_sel && (host_addr[7:0] == RA_BRD_KICK);

  always_ff @(posedge clk) begin
    if (rst) sync_pend <= 1'b0;
    else if (host_we && brd_sel && (host_addr[7:0] == RA_BRD_SYNC)) sync_pend <= 1'b1;
    else if (smp_en) sync_pend <= 1'b0;
  end
  assign sync = sync_pend;   // applied by every accumulator at the next smp_en

  watchdog #(.TIMEOUT(WD_TIMEOUT)) u_wd (.clk, .rst, .kick, .proc_rst);

  // Modules.
  logic [31:0] mod_rdata [N_MOD];
  for (genvar m = 0; m < N_MOD; m++) begin : g_mod
    logic sel;
    assign sel = !brd_sel && (int'(host_addr[9:8]) == m);
    dfmux_module #(.N_CH(N_CH), .MUX(MUX), .CIC_N(CIC_N), .CIC_R(CIC_R), .TAPS(TAPS),
                   .FIFO_DEPTH(FIFO_DEPTH)) u_mod (
      .clk, .rst, .smp_en, .sync,
      .reg_addr(host_addr[7:0]), .reg_we(host_we && sel), .reg_wdata(host_wdata),
      .reg_re(host_re && sel), .reg_rdata(mod_rdata[m]),
      .car_dac(car_dac[m]), .nul_dac(nul_dac[m]), .adc(adc[m]),
      .car_gain(car_gain[m]), .nul_gain(nul_gain[m]), .adc_gain(adc_gain[m]),
      .fifo_nonempty(fifo_nonempty[m]));
  end

  // Read mux: remember who was read.
  logic       rd_brd;
  logic [1:0] rd_mod;
  logic [7:0] rd_reg;
  always_ff @(posedge clk) begin
    if (rst) begin
      rd_brd <= 1'b0;
      rd_mod <= '0;
      rd_reg <= '0;
    end else if (host_re) begin
      rd_brd <= brd_sel;
      rd_mod <= host_addr[9:8];
      rd_reg <= host_addr[7:0];
    end
  end

  always_comb begin
    if (rd_brd) host_rdata = (rd_reg == RA_BRD_ID) ? {16'(N_MOD), 16'(N_CH)} : '0;
    else if (int'(rd_mod) < N_MOD) host_rdata = mod_rdata[rd_mod];
    else host_rdata = '0;
  end

endmodule
