// split_row_decoder: row decoder of one Ambit subarray, split in two parts.
//
// The subarray's row-address space is divided into three groups. With
// ROWS addresses per subarray the encoding used here is:
//   D-group  0 .. ROWS-19        data rows D0..D(ROWS-19)  (1006 at 1024)
//   C-group  ROWS-18, ROWS-17    control rows C0 (all 0), C1 (all 1)
//   B-group  ROWS-16 .. ROWS-1   reserved addresses B0..B15
// The paper fixes the group sizes; the placement of the groups inside the
// address space is this design's choice (it follows the figure that draws
// the D-group farthest from and the B-group next to the sense amplifiers).
//
// The regular decoder handles C/D addresses and outputs the index of the
// data row (`d_row`, valid with `is_d`) or the control row (`c_row`, valid
// with `is_c`). The small B-group decoder (bgroup_decoder) turns a B-group
// address into up to three raised wordlines (`bwl`). Because the two parts
// are separate, the subarray can hold a C/D row and B-group wordlines raised
// at the same time, which the overlapped AAP relies on.
// Purely combinational.
module split_row_decoder
  import ambit_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned ND  = ROWS - N_RESV
) (
  input  logic [RAW-1:0] addr,
  output logic           is_d,
  output logic           is_c,
  output logic           is_b,
  output logic [RAW-1:0] d_row,
  output logic           c_row,
  output bwl_t           bwl
);

  localparam logic [RAW-1:0] C0_ADDR = RAW'(ND);
  localparam logic [RAW-1:0] B0_ADDR = RAW'(ND + N_CROWS);

  logic [3:0]     b_idx;

  always_comb begin
    is_d  = addr < C0_ADDR;
    is_b  = addr >= B0_ADDR;
    is_c  = !is_d && !is_b;
    d_row = is_d ? addr : '0;
    c_row = addr[0] ^ C0_ADDR[0];   // C0 -> 0, C1 -> 1
    b_idx = 4'(addr - B0_ADDR);
  end

  bgroup_decoder u_bdec (
    .en    (is_b),
    .baddr (b_idx),
    .wl    (bwl)
  );

endmodule
