// ctrl_regs: register file on the slow 8-bit PCI control bus.
//
// The PC uses this narrow bus to load the window function, set the
// integration time (number of spectra per integration) and the observing
// mode, trigger the first sample, and read back data ready and status.
// Those functions follow the published design; the register map, the
// 4-bit address, the auto-incrementing window pointer and the sticky error
// flags are this design's own.
//
// Register map (addresses in spectro_pkg::reg_addr_e):
//   0 CMD     write: bit0 start, bit1 stop, bit2 clear data ready and errors
//   1 MODE    bit0: 0 Full Band (DHBF), 1 Narrow Band (DDC)
//   2..4 NINT spectra per integration, bits 7:0, 15:8, 23:16 (0 acts as 1)
//   5,6 WADDR window coefficient pointer, low and high byte
//   7 WDATA0  coefficient low byte, held until WDATA1 is written
//   8 WDATA1  coefficient high byte; writes {WDATA1, WDATA0} to the window
//             table at the pointer, then increments the pointer
//   9 STATUS  read: bit0/1 data ready ch0/ch1, bit2 running,
//             bit3/4 spectrum being written out ch0/ch1
//   A ERRORS  read: bit0/1 spectrum dropped ch0/ch1 (averager overflow),
//             bit2/3 DDC FIFO overflow ch0/ch1
//
// Timing: a write (bus_we) takes effect at the next clock edge, and command
// bits become one-clock pulses. A read (bus_re) returns rdata one clock
// later.
module ctrl_regs
  import spectro_pkg::*;
#(
  parameter int WAW = $clog2(FFT_N),
  parameter int CW  = WIN_W,
  parameter int NW  = NINT_W
) (
  input  logic            clk,
  input  logic            rst_n,
  // slow control bus
  input  logic [3:0]      bus_addr,
  input  logic [7:0]      bus_wdata,
  input  logic            bus_we,
  input  logic            bus_re,
  output logic [7:0]      bus_rdata,
  // to the datapath
  output logic            start,
  output logic            stop,
  output logic            clear_flags,
  output band_mode_e      mode,
  output logic [NW-1:0]   nint,
  output logic            win_we,
  output logic [WAW-1:0]  win_addr,
  output logic [CW-1:0]   win_data,
  // from the datapath
  input  logic            running,
  input  logic [1:0]      data_ready,
  input  logic [1:0]      dumping,
  input  logic [1:0]      avg_overflow,
  input  logic [1:0]      ddc_overflow
);

  logic [15:0]    wptr;
  logic [7:0]     wdata_lo;
  logic [1:0]     ddc_ovf_sticky;
  reg_addr_e      addr;

  assign addr = reg_addr_e'(bus_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start          <= 1'b0;
      stop           <= 1'b0;
      clear_flags    <= 1'b0;
      mode           <= MODE_FULL_BAND;
      nint           <= NW'(1);
      wptr           <= '0;
      wdata_lo       <= '0;
      win_we         <= 1'b0;
      win_addr       <= '0;
      win_data       <= '0;
      ddc_ovf_sticky <= '0;
      bus_rdata      <= '0;
    end else begin
      start       <= 1'b0;
      stop        <= 1'b0;
      clear_flags <= 1'b0;
      win_we      <= 1'b0;
      ddc_ovf_sticky <= ddc_ovf_sticky | ddc_overflow;
      if (clear_flags) ddc_ovf_sticky <= ddc_overflow;

      if (bus_we) begin
        unique case (addr)
          REG_CMD: begin
            start       <= bus_wdata[0];
            stop        <= bus_wdata[1];
            clear_flags <= bus_wdata[2];
          end
          REG_MODE:   mode <= band_mode_e'(bus_wdata[0]);
          REG_NINT0:  nint[7:0] <= bus_wdata;
          REG_NINT1:  nint[15:8] <= bus_wdata;
          REG_NINT2:  nint[NW-1:16] <= bus_wdata[NW-17:0];
          REG_WADDR0: wptr[7:0] <= bus_wdata;
          REG_WADDR1: wptr[15:8] <= bus_wdata;
          REG_WDATA0: wdata_lo <= bus_wdata;
          REG_WDATA1: begin
            win_we   <= 1'b1;
            win_addr <= WAW'(wptr);
            win_data <= CW'({bus_wdata, wdata_lo});
            wptr     <= wptr + 16'd1;
          end
          default: ;
        endcase
      end

      if (bus_re) begin
        unique case (addr)
          REG_MODE:   bus_rdata <= {7'd0, mode};
          REG_NINT0:  bus_rdata <= nint[7:0];
          REG_NINT1:  bus_rdata <= nint[15:8];
          REG_NINT2:  bus_rdata <= 8'(nint[NW-1:16]);
          REG_WADDR0: bus_rdata <= wptr[7:0];
          REG_WADDR1: bus_rdata <= wptr[15:8];
          REG_STATUS: bus_rdata <= {3'd0, dumping, running, data_ready};
          REG_ERRORS: bus_rdata <= {4'd0, ddc_ovf_sticky, avg_overflow};
          default:    bus_rdata <= '0;
        endcase
      end
    end
  end

endmodule
