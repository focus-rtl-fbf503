// tb_offset_encoder: self-checking test of the offset encoder.
// Streams random keep masks (with idle cycles in between) and compares every emitted
// offset with pos - prev_pos computed here; also checks that the offsets sum back to
// the kept positions and that start restarts the count at -1.
module tb_offset_encoder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, in_valid, in_keep, out_valid;
  logic [15:0] out_offset;
  offset_encoder #(.OW(16)) dut (.*);

  int exp_q[$];
  int prev, sum;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected offset"); end
    else begin
      int e; e = exp_q.pop_front();
      if (int'(out_offset) != e) begin failures++; $display("offset %0d expected %0d", out_offset, e); end
    end
  end

  initial begin
    start = 0; in_valid = 0; in_keep = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int seq = 0; seq < 4; seq++) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      prev = -1;
      for (int p = 0; p < 300; p++) begin
        logic k;
        k = ($urandom_range(0, 99) < (seq == 3 ? 3 : 30));
        in_valid = 1; in_keep = k;
        if (k) begin exp_q.push_back(p - prev); prev = p; end
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      end
      in_valid = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("%0d offsets missing", exp_q.size()); exp_q.delete(); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
