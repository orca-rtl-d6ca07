// tb_hash_unit: checks the pipelined key hash against a reference model of
// the MurmurHash3 64-bit finalizer, its three-cycle latency, one-per-cycle
// throughput and its hold behaviour when the output is not taken.
module tb_hash_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_key, out_hash;
  logic [7:0] in_tag, out_tag;

  hash_unit #(.TAG_W(8)) dut (.*);

  function automatic logic [63:0] fmix(input logic [63:0] k);
    k ^= k >> 33; k *= 64'hff51afd7ed558ccd;
    k ^= k >> 33; k *= 64'hc4ceb9fe1a85ec53;
    k ^= k >> 33;
    return k;
  endfunction

  logic [63:0] keys [64];
  int sent = 0, got = 0, cyc = 0, first_out = -1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // collector
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_hash !== fmix(keys[out_tag]) || out_tag != 8'(got)) begin
      failures++;
      $display("FAIL hash tag=%0d got=%h exp=%h", out_tag, out_hash, fmix(keys[out_tag]));
    end
    if (got == 0) first_out = cyc;
    got++;
  end

  initial begin
    int start_cyc;
    for (int i = 0; i < 64; i++) keys[i] = {$urandom, $urandom};
    keys[0] = 64'd0; keys[1] = 64'hffff_ffff_ffff_ffff;
    in_valid = 0; in_key = 0; in_tag = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // streaming: one key per cycle
    @(posedge clk); #1;
    start_cyc = cyc;
    while (sent < 32) begin
      in_valid = 1; in_key = keys[sent]; in_tag = 8'(sent);
      @(negedge clk);
      if (in_ready) sent++;
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (first_out - start_cyc != 3) begin failures++; $display("FAIL latency %0d", first_out - start_cyc); end
    checks++;
    if (got != 32) begin failures++; $display("FAIL throughput got=%0d", got); end
    // stall: output held while not ready
    #1 out_ready = 0;
    while (sent < 64) begin
      in_valid = 1; in_key = keys[sent]; in_tag = 8'(sent);
      @(negedge clk);
      if (in_ready) sent++;
      @(posedge clk); #1;
      out_ready = ($urandom_range(0, 1) == 1);
    end
    in_valid = 0; out_ready = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (got != 64) begin failures++; $display("FAIL total got=%0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
