// delay_buffer: fixed delay line of complex samples for an SDF stage.
//
// Every clock the sample on (in_re, in_im) is written and the one written
// DEPTH clocks earlier appears on (out_re, out_im), so the buffer always
// moves; the SDF stage decides what it writes. For DEPTH > 1 it is a circular
// buffer (one memory array, one pointer, read before write at the same
// address), which maps onto FPGA RAM; for DEPTH = 1 it is a single register.
// The paper names a delay buffer in every SDF unit; its organisation is this
// design's choice. The memory is not reset: its contents are read only after
// they have been written.
module delay_buffer #(
  parameter int DEPTH = 512,
  parameter int WIDTH = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [WIDTH-1:0] in_re,
  input  logic signed [WIDTH-1:0] in_im,
  output logic signed [WIDTH-1:0] out_re,
  output logic signed [WIDTH-1:0] out_im
);

  if (DEPTH == 1) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_re <= '0;
        out_im <= '0;
      end else begin
        out_re <= in_re;
        out_im <= in_im;
      end
    end
  end else begin : g_ram
    localparam int AW = $clog2(DEPTH);
    logic [2*WIDTH-1:0] mem [DEPTH];
    logic [AW-1:0]      ptr;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) ptr <= '0;
      else if (ptr == AW'(DEPTH - 1)) ptr <= '0;
      else ptr <= ptr + 1'b1;
    end

    always_ff @(posedge clk) mem[ptr] <= {in_re, in_im};

    assign {out_re, out_im} = mem[ptr];
  end

endmodule
