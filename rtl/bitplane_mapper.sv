// bitplane_mapper: data organization step that turns quantized elements into
// bit-plane rows for a computational sub-array.
//
// Element e of a window goes to column e of the sub-array. Bit b of every
// element of the window forms one row, the bit-plane C_b(.), so a k-bit
// vector occupies k rows. The mapper collects up to COLS elements (load with
// col and value), each bit going into the column of its plane buffer, and then
// presents plane 'plane' as a full row for writing (row). 'clear' empties all
// planes, so unused columns hold zeros and add nothing to a dot product.
// The bit-plane layout is the paper's; the buffer and its port are this
// design's choice.
// Timing: load and clear act at the clock edge; row is combinational.
module bitplane_mapper #(
  parameter int unsigned COLS     = 512,
  parameter int unsigned MAX_BITS = 8,
  localparam int unsigned CAW     = $clog2(COLS),
  localparam int unsigned PAW     = (MAX_BITS > 1) ? $clog2(MAX_BITS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                load,
  input  logic [CAW-1:0]      col,
  input  logic [MAX_BITS-1:0] value,
  input  logic [PAW-1:0]      plane,
  output logic [COLS-1:0]     row
);
  logic [MAX_BITS-1:0][COLS-1:0] planes;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) planes <= '0;
    else if (clear) planes <= '0;
    else if (load) begin
      for (int b = 0; b < int'(MAX_BITS); b++) planes[b][col] <= value[b];
    end
  end

  assign row = planes[plane];
endmodule
