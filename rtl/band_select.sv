// band_select: the "virtual switch" between Full Band and Narrow Band data.
//
// In Full Band mode the complex 50 MS/s stream of the DHBF feeds the
// window and FFT; in Narrow Band mode the frames released by the DDC frame
// FIFO do. The observing mode register is sampled when the PC triggers a
// measurement (start), so the switch cannot change in the middle of a
// frame. start also pulses front_clear for one clock, which empties the
// DHBF filter and the DDC FIFO, and the first sample selected afterwards is
// marked with out_sync: it is sample 0 of the first frame, and every stage
// downstream counts frames from it. stop ends the measurement; no samples
// pass while it is not running.
//
// The switch and the two modes are the published design; latching the mode
// at start and the sync marker are this design's choices.
//
// Timing: out_valid/out_data/out_sync are registered, one clock after the
// selected input.
module band_select
  import spectro_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  band_mode_e mode,
  input  logic       start,
  input  logic       stop,
  output logic       front_clear,
  output logic       running,
  output band_mode_e active_mode,
  input  logic       full_valid,
  input  cplx_t      full_data,
  input  logic       narrow_valid,
  input  cplx_t      narrow_data,
  output logic       out_valid,
  output cplx_t      out_data,
  output logic       out_sync
);

  logic  first_pending;   // next selected sample is sample 0 of frame 0
  logic  sel_valid;
  cplx_t sel_data;

  always_comb begin
    if (active_mode == MODE_NARROW_BAND) begin
      sel_valid = narrow_valid;
      sel_data  = narrow_data;
    end else begin
      sel_valid = full_valid;
      sel_data  = full_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running       <= 1'b0;
      active_mode   <= MODE_FULL_BAND;
      front_clear   <= 1'b0;
      first_pending <= 1'b0;
      out_valid     <= 1'b0;
      out_sync      <= 1'b0;
      out_data      <= '0;
    end else begin
      front_clear <= start;
      if (start) begin
        running       <= 1'b1;
        active_mode   <= mode;
        first_pending <= 1'b1;
        out_valid     <= 1'b0;
        out_sync      <= 1'b0;
      end else begin
        if (stop) running <= 1'b0;
        // samples still in flight in the front end when start was given
        // are discarded during front_clear
        out_valid <= running && !stop && !front_clear && sel_valid;
        out_sync  <= running && !stop && !front_clear && sel_valid && first_pending;
        if (running && !front_clear && sel_valid) begin
          out_data      <= sel_data;
          first_pending <= 1'b0;
        end
      end
    end
  end

  a_sync_with_valid: assert property (@(posedge clk) disable iff (!rst_n) out_sync |-> out_valid);

endmodule
