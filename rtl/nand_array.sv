// nand_array: behavioural model of the 3D NAND SLC subarrays of one core.
//
// This is a behavioural model, not synthesizable memory design: the real
// part is an analog 3D NAND array (96 layers, 4 string-select lines, 64
// blocks, 32768 bit lines per page) read through sense amplifiers. The
// model stores PAGES pages of MUX segments of SEG_BITS bits and returns the
// segment selected by the bit-line multiplexer one cycle after sense. Read
// timing (word-line setup, precharge, sensing) is counted by the core
// controller, not here. The program port exists only to preload the graph
// data before search; programming time and erase are not modelled. The
// default PAGES is far below the real 24576 pages per core so that a whole
// accelerator of 512 cores fits in simulation memory.
module nand_array
  import proxima_pkg::*;
#(
  parameter int unsigned PAGES    = 16,
  parameter int unsigned MUX      = 32,
  parameter int unsigned SEG_BITS = 1024
) (
  input  logic                      clk,
  input  logic                      sense,
  input  logic [PAGE_W-1:0]         wl_page,
  input  logic [$clog2(MUX)-1:0]    bl_sel,
  output logic [SEG_BITS-1:0]       sense_data,
  input  logic                      prog_en,
  input  logic [PAGE_W-1:0]         prog_page,
  input  logic [$clog2(MUX)-1:0]    prog_seg,
  input  logic [SEG_BITS-1:0]       prog_data
);
  localparam int unsigned AW = $clog2(PAGES * MUX);
  logic [SEG_BITS-1:0] cells [PAGES*MUX];

  function automatic logic [AW-1:0] addr(logic [PAGE_W-1:0] pg, logic [$clog2(MUX)-1:0] sg);
    logic [PAGE_W+$clog2(MUX)-1:0] a;
    a = {pg, sg};
    return a[AW-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (prog_en) cells[addr(prog_page, prog_seg)] <= prog_data;
    if (sense)   sense_data <= cells[addr(wl_page, bl_sel)];
  end
endmodule
