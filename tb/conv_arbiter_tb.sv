// conv_arbiter_tb: self-checking test of the shared-mode arbiter.
//
// Three requesters, standing in for the FeedForward units of three layers, each
// send output lines made of several requests (first ... last; 2, 3 and 4
// requests per line) with random gaps. The test plays the shared convolution
// unit: it takes requests with random delays, holds one result per finished
// line and returns it with random back-pressure. Each request carries a tag
// (requester, line, position) in its first pixel. Checked: every request is
// delivered once, in order, with its own data; no other requester gets in
// between the first and last request of a line; each result reaches only the
// requester whose line it finishes; a line starts only for a requester that
// signals room for its result; when several requesters wait, the grant
// moves round-robin; and `contention` is seen.
module conv_arbiter_tb;
  import tinycnn_pkg::*;
  localparam int unsigned N = 3, W = 8, WW = $clog2(W + 1);
  localparam int LINES = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req_valid, rsp_room, req_ready, req_first, req_last, rsp_valid, rsp_ready;
  data_t [N-1:0][W-1:0] req_line1, req_line2, req_line3;
  data_t [N-1:0][8:0] req_taps;
  bias_t [N-1:0] req_bias;
  logic [N-1:0][WW-1:0] req_width;
  logic cv_valid, cv_ready, cv_first, cv_last, res_valid, res_ready, contention;
  data_t [W-1:0] cv_line1, cv_line2, cv_line3;
  data_t [8:0] cv_taps;
  bias_t cv_bias;
  logic [WW-1:0] cv_width;
  acc_t [W-1:0] res_line, rsp_line;

  conv_arbiter #(.N(N), .W(W)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  // ---------------- requesters ----------------
  int beats_per_line [N] = '{2, 3, 4};
  int resp_got [N];
  int done_lines [N];

  for (genvar i = 0; i < N; i++) begin : g_req
    initial begin
      req_valid[i] = 0;
      req_first[i] = 0; req_last[i] = 0;
      req_line1[i] = '0; req_line2[i] = '0; req_line3[i] = '0;
      req_taps[i] = '0; req_bias[i] = '0; req_width[i] = WW'(W - i);
      @(posedge rst_n);
      for (int ln = 0; ln < LINES; ln++)
        for (int b = 0; b < beats_per_line[i]; b++) begin
          repeat ($urandom % 3) @(negedge clk);
          @(negedge clk);
          req_valid[i] = 1;
          req_line1[i][0] = data_t'(i * 1000 + ln * 10 + b);
          req_line2[i][1] = data_t'(i + 7);
          req_taps[i][4] = data_t'(i * 3 + 1);
          req_bias[i] = bias_t'(i * 11);
          req_first[i] = (b == 0);
          req_last[i] = (b == beats_per_line[i] - 1);
          do @(posedge clk); while (!req_ready[i]);
          #1 req_valid[i] = 0;
        end
    end
  end

  // ---------------- the shared unit ----------------
  bit   pending = 0;
  int   pend_tag;
  int   expect_seq [N];
  int   cur_owner = -1;
  int   n_contention = 0, n_rr_checked = 0;
  int   last_owner = 0;
  bit   check_rr = 0;

  initial begin
    for (int i = 0; i < N; i++) begin expect_seq[i] = 0; resp_got[i] = 0; end
  end

  always @(negedge clk) begin
    cv_ready  <= rst_n && !pending && (($urandom % 3) != 0);
    res_valid <= pending;
    rsp_ready <= N'($urandom);
    rsp_room  <= N'($urandom) | N'($urandom);
  end

  always @(posedge clk) if (rst_n) begin
    if (contention) n_contention++;
    // result hand-back
    if (res_valid && res_ready) begin
      int who;
      who = pend_tag / 1000;
      check(rsp_valid == (N'(1) << who), "result routed to its line's owner");
      check(rsp_line[0] == acc_t'(pend_tag), "result data");
      resp_got[who]++;
      pending = 0;
    end else if (res_valid) begin
      check(rsp_valid == (N'(1) << (pend_tag / 1000)), "result offered to owner only");
    end
    // request acceptance
    if (cv_valid && cv_ready) begin
      int tag, who, ln, b;
      tag = int'(cv_line1[0]);
      who = tag / 1000;
      ln  = (tag % 1000) / 10;
      b   = tag % 10;
      check(req_ready == (N'(1) << who), "ready only to the granted requester");
      check(ln * beats_per_line[who] + b == expect_seq[who], "requests in order, once");
      check(cv_line2[1] == data_t'(who + 7) && cv_taps[4] == data_t'(who * 3 + 1) &&
            cv_bias == bias_t'(who * 11) && cv_width == WW'(W - who), "request data muxed");
      check(cv_first == (b == 0) && cv_last == (b == beats_per_line[who] - 1), "flags");
      if (cur_owner >= 0) check(who == cur_owner, "no interleaving inside a line");
      else check(rsp_room[who], "a line starts only with room for its result");
      if (check_rr && cv_first) begin
        // the first eligible requester after the last owner must win
        int want;
        want = -1;
        for (int k = 1; k <= N; k++)
          if (want < 0 && req_valid[(last_owner + k) % N] && rsp_room[(last_owner + k) % N]) want = (last_owner + k) % N;
        if (want >= 0) begin
          check(who == want, "round-robin order");
          n_rr_checked++;
        end
        check_rr = 0;
      end
      expect_seq[who]++;
      if (cv_last) begin
        cur_owner  = -1;
        pending    = 1;
        pend_tag   = tag;
        last_owner = who;
        check_rr   = 1;
      end else begin
        cur_owner = who;
      end
    end
  end

  assign res_line = {{(W-1){acc_t'(0)}}, acc_t'(pend_tag)};

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (resp_got[0] == LINES && resp_got[1] == LINES && resp_got[2] == LINES);
    repeat (3) @(posedge clk);
    check(n_contention > 0, "contention observed");
    check(n_rr_checked > 5, "round-robin exercised");
    $display("contention cycles %0d, round-robin decisions checked %0d", n_contention, n_rr_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
