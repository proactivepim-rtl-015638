// Self-checking test of the channel I/O round-robin arbiter: one-hot grants
// within the requests, rotation order, and a bound on waiting.
// How: a 10 ns clock, random request patterns (then all requesting), advance held high. With
// N requesters nobody may wait more than N-1 grants. The shared channel I/O is
// from the paper; round-robin order is this design's choice.
module tb_rr_arbiter;
  localparam int N = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  logic [N-1:0] req, gnt;
  logic [1:0] gnt_idx;
  logic advance;
  int checks = 0, failures = 0;
  int last = N - 1;
  int wait_c [N];

  rr_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    req = '0; advance = 1;
    for (int i = 0; i < N; i++) wait_c[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      req = (c < 2000) ? N'($urandom) : '1;
      #1;
      begin
        int exp_i; exp_i = -1;
        for (int k = 1; k <= N; k++)
          if (exp_i < 0 && req[(last + k) % N]) exp_i = (last + k) % N;
        checks++;
        if (exp_i < 0) begin
          if (gnt != '0) begin failures++; $display("grant without request"); end
        end else begin
          if (gnt != (N'(1) << exp_i) || int'(gnt_idx) != exp_i) begin
            failures++; $display("cycle %0d req %b gnt %b expected %0d", c, req, gnt, exp_i);
          end
          last = exp_i;
        end
        for (int i = 0; i < N; i++) begin
          if (req[i] && !gnt[i]) wait_c[i]++; else wait_c[i] = 0;
          if (c >= 2000) begin
            checks++;
            if (wait_c[i] > N - 1) begin failures++; $display("requester %0d starved", i); end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
