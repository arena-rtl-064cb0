// tb_tile_crossbar: self-checking test of the 6x7 tile crossbar.
// Random inputs and selects; each destination must carry the selected input
// and be written exactly when its select is 0..5.
module tb_tile_crossbar;
  import arena_pkg::*;
  int checks = 0, failures = 0;
  logic [5:0][31:0] in;
  logic [6:0][2:0]  sel;
  logic [6:0][31:0] out;
  logic [6:0]       we;

  tile_crossbar dut (.in, .sel, .out, .we);

  initial begin
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 6; i++) in[i] = $urandom;
      for (int d = 0; d < 7; d++) sel[d] = 3'($urandom_range(0, 7));
      #1;
      for (int d = 0; d < 7; d++) begin
        checks++;
        if (sel[d] < 6) begin
          if (!(we[d] && out[d] == in[sel[d]])) begin
            failures++; $display("FAIL: dest %0d sel %0d", d, sel[d]);
          end
        end else if (we[d]) begin
          failures++; $display("FAIL: dest %0d written on hold", d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
