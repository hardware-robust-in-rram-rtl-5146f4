// bl_decoder_tb: self-checking test of the bit-line decoder at full size
// (64 groups x 8 columns per side). Checks that compute mode closes BL_IN_EN
// for exactly the selected column on both sides of every group (128 switches)
// and drives no forming pulse, that program mode passes the cell pattern and
// opens all switches, and that en low clears everything.
module bl_decoder_tb;
  import irc_pkg::*;

  logic           en;
  mode_t          mode;
  logic [2:0]     col_sel;
  logic [BLS-1:0] prog_data, bl_in_en, bl_prog;
  int checks = 0, failures = 0;

  bl_decoder dut (.en, .mode, .col_sel, .prog_data, .bl_in_en, .bl_prog);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 120; t++) begin
      en      = (t % 8) != 7;
      mode    = (t % 4 == 1) ? MODE_PROGRAM : MODE_COMPUTE;
      col_sel = 3'(t);
      for (int i = 0; i < int'(BLS); i += 32) prog_data[i +: 32] = $urandom;
      #1;
      for (int b = 0; b < int'(BLS); b++) begin
        logic e_en, e_pr;
        e_en = en && mode == MODE_COMPUTE && (b % 8) == int'(col_sel);
        e_pr = en && mode == MODE_PROGRAM && prog_data[b];
        checks++;
        if (bl_in_en[b] !== e_en || bl_prog[b] !== e_pr) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d bl %0d en=%b prog=%b", t, b, bl_in_en[b], bl_prog[b]);
        end
      end
      checks++;
      if (en && mode == MODE_COMPUTE && $countones(bl_in_en) != 128) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
