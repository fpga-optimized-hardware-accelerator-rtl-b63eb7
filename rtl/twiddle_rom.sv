// twiddle_rom: lookup table of the twiddle factors of one FFT stage.
//
// Holds W_L^m = exp(-j*2*pi*m/L) for m = 0 .. L/2-1 as TW_W-bit signed
// fixed-point numbers with TW_FRAC fraction bits (1.0 = 2^TW_FRAC). The table
// is filled at elaboration by accel_pkg::twiddle_part, an integer CORDIC, so
// no data file is needed. The read is synchronous: w_re/w_im show the entry
// at the address presented one clock earlier, as an FPGA block RAM or
// registered LUT would. The paper has a "Twiddle" block feeding a "Lookup"
// block; the table size, format and registered read are this design's.
module twiddle_rom #(
  parameter int L       = 1024,
  parameter int TW_W    = 16,
  parameter int TW_FRAC = 14,
  localparam int AW     = (L > 4) ? $clog2(L / 2) : 1
) (
  input  logic                   clk,
  input  logic [AW-1:0]          addr,
  output logic signed [TW_W-1:0] w_re,
  output logic signed [TW_W-1:0] w_im
);

  localparam int ENTRIES = (L > 2) ? L / 2 : 1;

  logic signed [TW_W-1:0] tab_re [ENTRIES];
  logic signed [TW_W-1:0] tab_im [ENTRIES];

  for (genvar m = 0; m < ENTRIES; m++) begin : g_tab
    localparam longint RE = accel_pkg::twiddle_part(longint'(m), longint'(L), 1'b0, TW_FRAC);
    localparam longint IM = accel_pkg::twiddle_part(longint'(m), longint'(L), 1'b1, TW_FRAC);
    assign tab_re[m] = TW_W'(RE);
    assign tab_im[m] = TW_W'(IM);
  end

  always_ff @(posedge clk) begin
    w_re <= tab_re[addr];
    w_im <= tab_im[addr];
  end

endmodule
