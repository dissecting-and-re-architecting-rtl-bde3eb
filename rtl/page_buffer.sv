// page_buffer: the page latch of one plane.
//
// Holds PB_WORDS 64-bit words (N_COL * 4 bits = 1 KiB for Size A). It is
// loaded three ways: word by word from the H-tree (a page to program or
// data for a later operation), as a whole from the sense path after a page
// read, or as a whole from the shift-adder accumulators after a PIM pass
// (N_COL/8 INT32 results, which happen to fill the same 1 KiB). The whole
// page feeds the program path and one word at a time can be read toward the
// H-tree.
//
// Timing: writes on the clock edge; the word read port is combinational.
// If several loads are requested in one cycle the parallel load wins.
module page_buffer
  import pim_pkg::*;
#(
  parameter int unsigned PB_WORDS = 128,
  localparam int unsigned ADDR_W  = clog2_min1(PB_WORDS),
  localparam int unsigned PB_BITS = PB_WORDS * WORD_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [ADDR_W-1:0]    wr_addr,
  input  word_t                wr_data,
  input  logic                 load_en,
  input  logic [PB_BITS-1:0]   load_data,
  input  logic [ADDR_W-1:0]    rd_addr,
  output word_t                rd_data,
  output logic [PB_BITS-1:0]   page
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       page <= '0;
    else if (load_en) page <= load_data;
    else if (wr_en)   page[int'(wr_addr) * WORD_W +: WORD_W] <= wr_data;
  end

  assign rd_data = page[int'(rd_addr) * WORD_W +: WORD_W];
endmodule
