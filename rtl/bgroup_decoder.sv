// bgroup_decoder: the small B-group row decoder of an Ambit subarray.
//
// The B-group holds the four designated rows T0-T3 and two rows of
// dual-contact cells (DCC0, DCC1), each DCC row having a d-wordline (cell to
// bitline) and an n-wordline (cell to bitline-bar): eight wordlines in all.
// Sixteen reserved row addresses B0-B15 select them. B0-B7 raise one
// wordline each, B8-B11 raise two (to copy a result into two rows at once)
// and B12-B15 raise three (triple-row activation). The mapping is the
// paper's reserved-address table, copied verbatim.
//
// Interface: `en` qualifies the 4-bit B-group address `baddr`; `wl` is the
// 8-bit mask of raised wordlines, bit order given by ambit_pkg::WL_*.
// Purely combinational.
module bgroup_decoder
  import ambit_pkg::*;
(
  input  logic       en,
  input  logic [3:0] baddr,
  output bwl_t       wl
);

  always_comb begin
    wl = '0;
    if (en) begin
      unique case (baddr)
        4'd0:  wl[WL_T0]    = 1'b1;
        4'd1:  wl[WL_T1]    = 1'b1;
        4'd2:  wl[WL_T2]    = 1'b1;
        4'd3:  wl[WL_T3]    = 1'b1;
        4'd4:  wl[WL_DCC0]  = 1'b1;
        4'd5:  wl[WL_DCC0N] = 1'b1;
        4'd6:  wl[WL_DCC1]  = 1'b1;
        4'd7:  wl[WL_DCC1N] = 1'b1;
        4'd8:  begin wl[WL_DCC0N] = 1'b1; wl[WL_T0] = 1'b1; end
        4'd9:  begin wl[WL_DCC1N] = 1'b1; wl[WL_T1] = 1'b1; end
        4'd10: begin wl[WL_T2]    = 1'b1; wl[WL_T3] = 1'b1; end
        4'd11: begin wl[WL_T0]    = 1'b1; wl[WL_T3] = 1'b1; end
        4'd12: begin wl[WL_T0] = 1'b1; wl[WL_T1] = 1'b1; wl[WL_T2] = 1'b1; end
        4'd13: begin wl[WL_T1] = 1'b1; wl[WL_T2] = 1'b1; wl[WL_T3] = 1'b1; end
        4'd14: begin wl[WL_DCC0] = 1'b1; wl[WL_T1] = 1'b1; wl[WL_T2] = 1'b1; end
        4'd15: begin wl[WL_DCC1] = 1'b1; wl[WL_T0] = 1'b1; wl[WL_T3] = 1'b1; end
        default: wl = '0;
      endcase
    end
  end

endmodule
