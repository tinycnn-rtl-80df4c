// weight_rom_tb: self-checking test of the weight ROM.
//
// Reads every word of a 9-lane filter ROM and a 2-lane 32-bit bias ROM in random
// order with random enables. Each read must return, one clock later, the values
// the ROM is defined to hold (lane l of word a = synth_weight(SEED, a*LANES+l,
// AMP)), all of them inside [-AMP, AMP], and the output must hold while en is low.
module weight_rom_tb;
  import tinycnn_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en;
  logic [5:0] addr;
  logic [8:0][15:0] rd9;
  logic [3:0] addr_b;
  logic [1:0][31:0] rdb;

  weight_rom #(.DEPTH(40), .LANES(9), .LANE_W(16), .SEED(5), .AMP(700)) dut9 (
    .clk, .en, .addr, .rdata(rd9));
  weight_rom #(.DEPTH(10), .LANES(2), .LANE_W(32), .SEED(6), .AMP(300000)) dutb (
    .clk, .en, .addr(addr_b), .rdata(rdb));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b, prev_a, prev_b;
    int v;
    en = 0; addr = '0; addr_b = '0;
    prev_a = -1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      en = (n < 40) || (($urandom % 3) != 0);
      a = (n < 40) ? n : int'($urandom % 40);
      b = int'($urandom % 10);
      addr = 6'(a); addr_b = 4'(b);
      @(negedge clk);
      if (en) begin prev_a = a; prev_b = b; end
      en = 0;
      if (prev_a >= 0) begin
        for (int l = 0; l < 9; l++) begin
          v = synth_weight(5, prev_a * 9 + l, 700);
          checks++;
          if ($signed(rd9[l]) != 16'(v) || v > 700 || v < -700) begin
            failures++; $display("word %0d lane %0d got %0d want %0d", prev_a, l, $signed(rd9[l]), v);
          end
        end
        for (int l = 0; l < 2; l++) begin
          v = synth_weight(6, prev_b * 2 + l, 300000);
          checks++;
          if ($signed(rdb[l]) != v) begin failures++; $display("bias word %0d lane %0d", prev_b, l); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
