// tb_ia_sm -- IA shift-and-mask: random IAs, bit, shift and enables are
// compared with an independent computation of in[p] = e[p] & IA[p+a][t].
// The selector/shifter/activator split follows the published unit; the
// 5-way shifter and per-row enable tested here are this design's choices.
module tb_ia_sm;
  localparam int ROWS = 180, IA_W = 8, WAYS = 5;
  logic [ROWS-1:0][IA_W-1:0] ia;
  logic [2:0] bit_sel, shift_a;
  logic [ROWS-1:0] row_en, in_bits;
  int checks = 0, failures = 0;

  ia_sm #(.ROWS(ROWS), .IA_W(IA_W), .SHIFT_WAYS(WAYS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp;
    for (int it = 0; it < 200; it++) begin
      for (int p = 0; p < ROWS; p++) begin
        ia[p] = IA_W'($urandom);
        row_en[p] = ($urandom % 3) != 0;
      end
      bit_sel = 3'($urandom % 8);
      shift_a = 3'($urandom % WAYS);
      #1;
      for (int p = 0; p < ROWS; p++) begin
        exp = (p + int'(shift_a) < ROWS) ? ia[p + int'(shift_a)][bit_sel] & row_en[p] : 1'b0;
        checks++;
        if (in_bits[p] !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL it %0d row %0d a=%0d t=%0d", it, p, shift_a, bit_sel);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
