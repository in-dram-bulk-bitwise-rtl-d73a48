// tb_split_row_decoder: walks every row address of a 1024-row subarray and
// checks the group (1006 D rows, C0/C1, B0-B15), the data-row index, the
// control-row select and, for B addresses, that the B-group decoder's
// wordline count (1, 2 or 3) and a few fixed mappings come out.
module tb_split_row_decoder;
  import ambit_pkg::*;

  localparam int ROWS = 1024;
  logic [9:0] addr;
  logic is_d, is_c, is_b, c_row;
  logic [9:0] d_row;
  bwl_t bwl;
  int checks = 0, failures = 0;

  split_row_decoder #(.ROWS(ROWS)) dut (
    .addr(addr), .is_d(is_d), .is_c(is_c), .is_b(is_b),
    .d_row(d_row), .c_row(c_row), .bwl(bwl));

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL addr=%0d: %s", addr, msg); end
  endtask

  initial begin
    for (int a = 0; a < ROWS; a++) begin
      addr = 10'(a);
      #1;
      if (a < 1006) begin
        chk(is_d && !is_c && !is_b, "D group");
        chk(d_row == 10'(a), "D index");
        chk(bwl == 0, "no B wordline");
      end else if (a < 1008) begin
        chk(!is_d && is_c && !is_b, "C group");
        chk(c_row == (a == 1007), "C0/C1 select");
        chk(bwl == 0, "no B wordline");
      end else begin
        chk(!is_d && !is_c && is_b, "B group");
        chk($countones(bwl) == ((a - 1008) < 8 ? 1 : ((a - 1008) < 12 ? 2 : 3)), "wordline count");
      end
    end
    addr = 10'(1008 + 12); #1; chk(bwl == 8'b0000_0111, "B12 = T0,T1,T2");
    addr = 10'(1008 + 5);  #1; chk(bwl == 8'b0010_0000, "B5 = n-wordline of DCC0");
    addr = 10'(1008 + 15); #1; chk(bwl == 8'b0100_1001, "B15 = DCC1,T0,T3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
