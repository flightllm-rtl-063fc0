// tb_dsp_group: self-checking test of one DSP group (two packed DSP48s, Z-mux, OAU, RN).
// Chains four groups by hand as one segment with the overflow adjust units on, and checks
// the reduction-node outputs against dot products computed here, with operands large
// enough that an 18-bit lane overflows without adjustment. Also checks that a group with
// zero_in ignores its cascade input.
module tb_dsp_group;
  int checks = 0, failures = 0;
  logic signed [7:0]  w [4][2], a [4][2], b [4][2];
  logic               zin [4], brk [4];
  logic signed [47:0] cas [5];
  logic signed [31:0] msp [5];
  logic               rv [4];
  logic signed [31:0] ra [4], rb [4];
  logic               oau_en;

  assign cas[0] = 48'sd123456789;   // garbage that the Z-mux must discard
  assign msp[0] = 32'sd999;

  for (genvar g = 0; g < 4; g++) begin : g_dg
    dsp_group u (.w(w[g]), .a(a[g]), .b(b[g]), .zero_in(zin[g]), .brk(brk[g]), .oau_en(oau_en),
                 .cas_in(cas[g]), .msp_in(msp[g]), .cas_out(cas[g+1]), .msp_out(msp[g+1]),
                 .res_valid(rv[g]), .res_a(ra[g]), .res_b(rb[g]));
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int ea, eb;
      bit big;
      big = (t % 3) == 0;
      ea = 0; eb = 0;
      oau_en = 1'b1;
      for (int g = 0; g < 4; g++) begin
        zin[g] = (g == 0);
        brk[g] = (g == 3);
        for (int k = 0; k < 2; k++) begin
          w[g][k] = big ? 8'sd127 : 8'($urandom);
          a[g][k] = big ? -8'sd127 : 8'($urandom);
          b[g][k] = big ? -8'sd127 : 8'($urandom);
          ea += int'(w[g][k]) * int'(a[g][k]);
          eb += int'(w[g][k]) * int'(b[g][k]);
        end
      end
      #1;
      checks++;
      if (!rv[3] || rv[0] || rv[1] || rv[2]) begin failures++; $display("valid flags wrong"); end
      checks++;
      if (ra[3] != ea || rb[3] != eb) begin
        failures++; $display("t=%0d got %0d/%0d exp %0d/%0d", t, ra[3], rb[3], ea, eb);
      end
      // every group closes its own segment
      for (int g = 0; g < 4; g++) begin zin[g] = 1; brk[g] = 1; end
      #1;
      for (int g = 0; g < 4; g++) begin
        checks++;
        if (ra[g] != int'(w[g][0]) * int'(a[g][0]) + int'(w[g][1]) * int'(a[g][1]) ||
            rb[g] != int'(w[g][0]) * int'(b[g][0]) + int'(w[g][1]) * int'(b[g][1])) begin
          failures++; $display("single group %0d wrong", g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
