// tb_aes128_pipe: checks the pipelined AES-128 core against the FIPS-197
// appendix vectors and against the reference model for random blocks fed
// back to back, with random valid gaps and tags; checks the 10-cycle latency.
// Inputs are driven and outputs sampled on the falling clock edge.
module tb_aes128_pipe;
  import ref_model_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [127:0] key;
  logic in_valid;
  logic [2:0] in_tag;
  logic [127:0] in_block;
  logic out_valid;
  logic [2:0] out_tag;
  logic [127:0] out_block;
  int checks = 0, failures = 0;

  aes128_pipe #(.TAG_W(3)) dut (.*);

  always #4 clk = ~clk;

  // expected results queue, with issue cycle
  logic [127:0] exp_q [$];
  logic [2:0]   tag_q [$];
  int           cyc_q [$];
  int cycle = 0;
  always @(negedge clk) cycle <= cycle + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      logic [127:0] e; logic [2:0] t; int c;
      e = exp_q.pop_front(); t = tag_q.pop_front(); c = cyc_q.pop_front();
      if (out_block !== e || out_tag !== t || cycle - c != 10) begin
        failures++;
        $display("AES mismatch got %h exp %h tag %0d/%0d lat %0d", out_block, e, out_tag, t, cycle - c);
      end
    end
  end

  task automatic issue(logic [127:0] pt, logic [127:0] exp, logic [2:0] tg);
    in_valid = 1; in_block = pt; in_tag = tg;
    exp_q.push_back(exp); tag_q.push_back(tg); cyc_q.push_back(cycle);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_tag = 0; in_block = 0;
    key = 128'h000102030405060708090a0b0c0d0e0f;
    repeat (3) @(negedge clk);
    rst_n <= 1;
    @(negedge clk);
    // FIPS-197 C.1
    issue(128'h00112233445566778899aabbccddeeff, 128'h69c4e0d86a7b0430d8cdb78070b4c55a, 3'd5);
    repeat (12) @(negedge clk);
    key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    @(negedge clk);
    // FIPS-197 appendix B
    issue(128'h3243f6a8885a308d313198a2e0370734, 128'h3925841d02dc09fbdc118597196a0b32, 3'd2);
    repeat (12) @(negedge clk);
    // reference model check of the model itself on the same vector
    checks++;
    if (aes128(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734)
        !== 128'h3925841d02dc09fbdc118597196a0b32) failures++;
    // random back-to-back blocks with gaps
    key = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    for (int i = 0; i < 60; i++) begin
      logic [127:0] pt;
      pt = {$urandom, $urandom, $urandom, $urandom};
      issue(pt, aes128(key, pt), 3'($urandom));
      if ($urandom % 3 == 0) @(negedge clk);
    end
    repeat (15) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
