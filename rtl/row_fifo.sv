// row_fifo: fixed-length row delay line of the serpentine (sliding-window) memory.
//
// Every cycle with `en` high the module takes `din` and presents on `dout` the
// value it took DEPTH enabled cycles earlier, so one image line minus the
// register taps of a window row is held in it. It is a circular buffer: one
// memory array and a pointer, read before write at the same address, so only
// one memory access per pixel is needed, which is the purpose the published
// architecture gives its row FIFOs. `dout` is combinational from the memory
// at the pointer and is valid in the cycle in which it is consumed.
// The published text gives the FIFO depth as W-3 and its schematic as W-1;
// neither aligns the rows when each row also passes five registers, so the
// enclosing window sets DEPTH = W-5 (this design's choice). The memory itself
// is not reset: a `primed` flag, set when the pointer first wraps, forces
// dout to zero until DEPTH values have been written, so the window sees zeros
// before the start of the stream.
module row_fifo #(
  parameter int unsigned DEPTH = 251,
  parameter int unsigned DW    = 8
) (
  input  logic          clk,
  input  logic          reset_n,
  input  logic          en,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] dout
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] ptr;
  logic          primed;

  assign dout = primed ? mem[ptr] : '0;

  always_ff @(posedge clk) begin
    if (en) mem[ptr] <= din;
  end

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      ptr    <= '0;
      primed <= 1'b0;
    end else if (en) begin
      if (ptr == AW'(DEPTH - 1)) begin
        ptr    <= '0;
        primed <= 1'b1;
      end else begin
        ptr <= ptr + 1'b1;
      end
    end
  end
endmodule
