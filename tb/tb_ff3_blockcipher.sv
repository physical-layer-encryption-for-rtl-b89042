// tb_ff3_blockcipher: checks the pipelined FF3 cipher against the reference
// model, at the design's size (radix 267, 22 symbols, zero tweak) with a new
// random block every 22-cycle period, and, in a second instance, against
// the published FF3 sample (AES-128, radix 10, 18 digits, non-zero tweak).
// Checks the pipeline latency (27 periods at radix 267, 25 at 18 digits) and
// the rate of one block per period.
module tb_ff3_blockcipher;
  import ref_model_pkg::*;

  localparam int PERIOD = 22;
  logic clk = 0, rst_n = 0;
  logic [4:0] slot = 0;
  logic adv;
  logic [127:0] key;
  logic [21:0][8:0] x_in, y_out;
  logic [17:0][3:0] x10, y10;
  int checks = 0, failures = 0;

  assign adv = (slot == PERIOD - 1);

  ff3_blockcipher dut (.clk, .rst_n, .adv, .slot, .key, .x_in, .y_out);

  // NIST SP 800-38G FF3 sample 1
  localparam logic [127:0] K10 = 128'hEF4359D8D580AA4F7F036D6F04FC6A94;
  ff3_blockcipher #(.RADIX(10), .HALF(9), .PERIOD(22), .TWEAK(64'hD8E7920AFA330A73)) dut10 (
    .clk, .rst_n, .adv, .slot, .key(K10), .x_in(x10), .y_out(y10));

  always #4 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  sym_arr_t exp_blk [$];
  localparam int LAT = 27;

  initial begin
    sym_arr_t x, y;
    sym_arr_t pt10, ct10;
    int period = 0;
    key = {$urandom, $urandom, $urandom, $urandom};
    x = new[22];
    pt10 = '{8,9,0,1,2,1,2,3,4,5,6,7,8,9,0,0,0,0};
    ct10 = '{7,5,0,9,1,8,8,1,4,0,5,8,6,5,4,6,0,7};
    // reference model against the published sample
    y = ff3_encrypt(K10, 64'hD8E7920AFA330A73, 10, pt10);
    checks++;
    if (y != ct10) begin failures++; $display("reference model fails FF3 sample"); end
    for (int j = 0; j < 18; j++) x10[j] = 4'(pt10[j]);
    x_in = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    // run periods; at the start of each period present a new block
    for (period = 0; period < LAT + 12; period++) begin
      // slot 0 of this period: check output, then drive new input
      if (period >= LAT) begin
        y = exp_blk.pop_front();
        checks++;
        for (int j = 0; j < 22; j++)
          if (y_out[j] != 9'(y[j])) begin
            failures++;
            $display("period %0d symbol %0d got %0d exp %0d", period, j, y_out[j], y[j]);
            break;
          end
      end
      if (period == 25 + 1) begin
        checks++;
        for (int j = 0; j < 18; j++)
          if (y10[j] != 4'(ct10[j])) begin
            failures++;
            $display("radix-10 sample: symbol %0d got %0d exp %0d", j, y10[j], ct10[j]);
            break;
          end
      end
      for (int j = 0; j < 22; j++) begin
        x[j] = $urandom % 267;
        x_in[j] = 9'(x[j]);
      end
      exp_blk.push_back(ff3_encrypt(key, 64'h0, 267, x));
      repeat (PERIOD) begin
        @(negedge clk);
        slot = (slot == PERIOD - 1) ? 5'd0 : slot + 1;
      end
    end
    // latency check: the output one period before the first result is not it
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
