// tb_bgroup_decoder: exhaustive check of the B-group decoder against the
// reserved-address table (B0-B15 to wordlines), written out here as
// wordline names, and of the enable.
module tb_bgroup_decoder;
  import ambit_pkg::*;

  logic       en;
  logic [3:0] baddr;
  bwl_t       wl;
  int checks = 0, failures = 0;

  bgroup_decoder dut (.en(en), .baddr(baddr), .wl(wl));

  // Bit for a wordline name.
  function automatic bwl_t w(string n);
    case (n)
      "T0": return 8'h01;  "T1": return 8'h02;  "T2": return 8'h04;  "T3": return 8'h08;
      "DCC0": return 8'h10; "nDCC0": return 8'h20; "DCC1": return 8'h40; "nDCC1": return 8'h80;
      default: return 8'h00;
    endcase
  endfunction

  bwl_t expected [16];

  initial begin
    expected[0]  = w("T0");
    expected[1]  = w("T1");
    expected[2]  = w("T2");
    expected[3]  = w("T3");
    expected[4]  = w("DCC0");
    expected[5]  = w("nDCC0");
    expected[6]  = w("DCC1");
    expected[7]  = w("nDCC1");
    expected[8]  = w("nDCC0") | w("T0");
    expected[9]  = w("nDCC1") | w("T1");
    expected[10] = w("T2") | w("T3");
    expected[11] = w("T0") | w("T3");
    expected[12] = w("T0") | w("T1") | w("T2");
    expected[13] = w("T1") | w("T2") | w("T3");
    expected[14] = w("DCC0") | w("T1") | w("T2");
    expected[15] = w("DCC1") | w("T0") | w("T3");
    for (int e = 0; e < 2; e++) begin
      for (int a = 0; a < 16; a++) begin
        en = e[0]; baddr = 4'(a);
        #1;
        checks++;
        if (wl !== (e ? expected[a] : 8'h00)) begin
          failures++;
          $display("FAIL en=%0d B%0d: wl=%b expected %b", e, a, wl, e ? expected[a] : 8'h00);
        end
        // one, two or three wordlines, as the table groups them
        if (e) begin
          checks++;
          if ($countones(wl) != (a < 8 ? 1 : (a < 12 ? 2 : 3))) begin
            failures++;
            $display("FAIL B%0d raises %0d wordlines", a, $countones(wl));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
