// tb_aes128_pipe -- known-answer test of the pipelined AES-128 core.
//
// Uses the FIPS-197 example vectors (Appendix B and C.1) and the all-zero
// key vectors that GCM uses for its hash key.  Blocks under one key are sent
// back to back to check that one block per cycle is accepted, and the output
// of each block must appear exactly 10 cycles after it entered.
module tb_aes128_pipe;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         in_valid;
  logic [127:0] in_block, key;
  logic [7:0]   in_tag;
  logic         out_valid;
  logic [127:0] out_block;
  logic [7:0]   out_tag;

  aes128_pipe #(.TAG_W(8)) dut (
    .clk, .rst_n, .key, .in_valid, .in_block, .in_tag,
    .out_valid, .out_block, .out_tag
  );

  int checks = 0, failures = 0;
  int cycle = 0;
  int sent_at [256];
  logic [127:0] expect_ct [256];
  int n_out = 0;

  always_ff @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (out_block !== expect_ct[out_tag]) begin
        failures++;
        $display("FAIL tag %0d: got %h want %h", out_tag, out_block, expect_ct[out_tag]);
      end
      checks++;
      if (cycle - sent_at[out_tag] != 10) begin
        failures++;
        $display("FAIL tag %0d latency %0d", out_tag, cycle - sent_at[out_tag]);
      end
      n_out++;
    end
  end

  task automatic send(input logic [127:0] pt, input logic [7:0] t, input logic [127:0] ct);
    in_valid = 1'b1;
    in_block = pt;
    in_tag   = t;
    expect_ct[t] = ct;
    sent_at[t] = cycle;
    @(posedge clk);
    #1;
    in_valid = 1'b0;
  endtask

  initial begin
    in_valid = 1'b0; in_block = '0; in_tag = '0; key = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    key = 128'h000102030405060708090a0b0c0d0e0f;
    send(128'h00112233445566778899aabbccddeeff, 8'd1, 128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    send(128'h00112233445566778899aabbccddeeff, 8'd2, 128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    repeat (12) @(posedge clk);
    #1 key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    send(128'h3243f6a8885a308d313198a2e0370734, 8'd3, 128'h3925841d02dc09fbdc118597196a0b32);
    repeat (12) @(posedge clk);
    #1 key = '0;
    send('0,              8'd4, 128'h66e94bd4ef8a2c3b884cfa59ca342b2e);
    send({128{1'b1}},     8'd5, 128'h3f5b8cc9ea855a0afa7347d23e8d664e);
    repeat (14) @(posedge clk);
    checks++;
    if (n_out != 5) begin
      failures++;
      $display("FAIL: %0d outputs, expected 5", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
