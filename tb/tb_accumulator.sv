// tb_accumulator: self-checking test of the per-block accumulator.
// Sends groups of 1..4 partial sums (first/last marked), sometimes with
// idle cycles in between, and checks that out_valid pulses exactly 2 cycles
// after the last partial sum of a group with the group's total in all 7 lanes.
module tb_accumulator;
  import vit_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, first = 1'b0, last = 1'b0;
  psum_t psum [N_ROW];
  logic out_valid;
  acc_t acc [N_ROW];
  int checks = 0, failures = 0;

  accumulator dut (.clk, .rst_n, .in_valid, .first, .last, .psum, .out_valid, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected totals, in order, with the cycle they must appear in
  int exp_q [$];   // N_ROW entries per expected output
  int exp_t [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // checker
  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      int et, e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected out_valid");
      end else begin
        et = exp_t.pop_front();
        if (cyc != et) begin
          failures++;
          $display("latency: out at %0d expected %0d", cyc, et);
        end
        for (int r = 0; r < N_ROW; r++) begin
          checks++;
          e = exp_q.pop_front();
          if (int'(acc[r]) != e) begin
            failures++;
            $display("lane %0d got %0d expected %0d", r, acc[r], e);
          end
        end
      end
    end
  end

  initial begin
    for (int r = 0; r < N_ROW; r++) psum[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int grp = 0; grp < 200; grp++) begin
      int n;
      int tot [N_ROW];
      n = 1 + ($urandom % 4);
      for (int r = 0; r < N_ROW; r++) tot[r] = 0;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        in_valid = 1'b1;
        first = (i == 0);
        last  = (i == n - 1);
        for (int r = 0; r < N_ROW; r++) begin
          psum[r] = psum_t'($urandom);
          tot[r] += int'(psum[r]);
        end
        if (last) begin
          for (int r = 0; r < N_ROW; r++) exp_q.push_back(tot[r]);
          exp_t.push_back(cyc + 2);
        end
      end
      if ($urandom % 3 == 0) begin
        @(negedge clk);
        in_valid = 1'b0; first = 1'b0; last = 1'b0;
        for (int r = 0; r < N_ROW; r++) psum[r] = psum_t'($urandom);
      end
    end
    @(negedge clk);
    in_valid = 1'b0; first = 1'b0; last = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
