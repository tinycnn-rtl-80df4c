// maxpool_unit_tb: self-checking test of M x M max pooling.
//
// Runs 2x2 pooling on 8-wide lines and, in a second instance, 3x3 pooling on
// 6-wide lines, with random signed data and random output back-pressure. Each
// pooled line is compared with the maximum over its M x M window computed here;
// the number of pooled lines must be the number of input lines divided by M.
module maxpool_unit_tb;
  import tinycnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- instance A: W=8, M=2 ----
  logic a_iv, a_ir, a_ov, a_or;
  acc_t [7:0] a_in;
  acc_t [3:0] a_out;
  maxpool_unit #(.W(8), .M(2), .IW(ACC_W)) dut_a (.clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir),
    .in_data(a_in), .out_valid(a_ov), .out_ready(a_or), .out_data(a_out));
  // ---- instance B: W=6, M=3 ----
  logic b_iv, b_ir, b_ov, b_or;
  acc_t [5:0] b_in;
  acc_t [1:0] b_out;
  maxpool_unit #(.W(6), .M(3), .IW(ACC_W)) dut_b (.clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir),
    .in_data(b_in), .out_valid(b_ov), .out_ready(b_or), .out_data(b_out));

  longint a_lines [$][8];
  longint b_lines [$][6];
  int a_got = 0, b_got = 0;
  localparam int NLINES = 60;

  always @(posedge clk) if (rst_n) begin
    if (a_iv && a_ir) begin longint l [8]; foreach (l[i]) l[i] = longint'(a_in[i]); a_lines.push_back(l); end
    if (b_iv && b_ir) begin longint l [6]; foreach (l[i]) l[i] = longint'(b_in[i]); b_lines.push_back(l); end
    if (a_ov && a_or) begin
      for (int j = 0; j < 4; j++) begin
        longint m;
        m = a_lines[2*a_got][2*j];
        for (int r = 0; r < 2; r++) for (int k = 0; k < 2; k++)
          if (a_lines[2*a_got + r][2*j + k] > m) m = a_lines[2*a_got + r][2*j + k];
        checks++;
        if (longint'(a_out[j]) != m) begin failures++; $display("A pool %0d lane %0d", a_got, j); end
      end
      a_got++;
    end
    if (b_ov && b_or) begin
      for (int j = 0; j < 2; j++) begin
        longint m;
        m = b_lines[3*b_got][3*j];
        for (int r = 0; r < 3; r++) for (int k = 0; k < 3; k++)
          if (b_lines[3*b_got + r][3*j + k] > m) m = b_lines[3*b_got + r][3*j + k];
        checks++;
        if (longint'(b_out[j]) != m) begin failures++; $display("B pool %0d lane %0d", b_got, j); end
      end
      b_got++;
    end
  end

  bit a_acc, b_acc;
  always @(posedge clk) begin
    a_acc <= a_iv && a_ir;
    b_acc <= b_iv && b_ir;
  end

  initial begin
    a_iv = 0; b_iv = 0; a_or = 1; b_or = 1; a_in = '0; b_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (a_lines.size() < NLINES || b_lines.size() < NLINES) begin
      @(negedge clk);
      a_or = ($urandom % 3) != 0;
      b_or = ($urandom % 3) != 0;
      if (!a_iv || a_acc) begin
        a_iv = (a_lines.size() < NLINES) && (($urandom % 4) != 0);
        foreach (a_in[i]) a_in[i] = acc_t'(int'($urandom % 200000) - 100000);
      end
      if (!b_iv || b_acc) begin
        b_iv = (b_lines.size() < NLINES) && (($urandom % 4) != 0);
        foreach (b_in[i]) b_in[i] = acc_t'(int'($urandom % 200000) - 100000);
      end
    end
    @(negedge clk); a_iv = 0; b_iv = 0; a_or = 1; b_or = 1;
    repeat (5) @(negedge clk);
    checks += 2;
    if (a_got != NLINES / 2) begin failures++; $display("A produced %0d lines", a_got); end
    if (b_got != NLINES / 3) begin failures++; $display("B produced %0d lines", b_got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
