// tb_mgx_mac_engine -- checks the MAC engine against AES-GCM.
//
// With hash key h = AES_K(0) and mask = AES_K(IV || 0^31 || 1), the engine's
// tag over a ciphertext must equal the upper 64 bits of the standard AES-GCM
// tag of that ciphertext (empty additional data).  The expected values were
// computed with an independent AES-GCM implementation.  A further run with
// one flipped ciphertext bit must give a different tag, and the tag must
// appear exactly one cycle after fin_valid.
module tb_mgx_mac_engine;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start, beat_valid, fin_valid, tag_valid;
  logic [127:0] h, beat;
  logic [63:0]  mask;
  logic [63:0]  tag;

  mgx_mac_engine #(.MAX_BEATS(32)) dut (
    .clk, .rst_n, .h, .start, .beat_valid, .beat, .fin_valid, .mask, .tag_valid, .tag
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Runs one MAC over n beats; returns the tag and checks the 1-cycle latency.
  task automatic run_mac(input logic [127:0] hk, input logic [127:0] m,
                         input logic [127:0] beats [], output logic [63:0] t);
    h = hk;
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    foreach (beats[i]) begin
      beat_valid = 1'b1;
      beat = beats[i];
      @(posedge clk); #1;
    end
    beat_valid = 1'b0;
    fin_valid = 1'b1;
    mask = m[127:64];
    @(posedge clk); #1;
    fin_valid = 1'b0;
    check(tag_valid === 1'b1, "tag_valid one cycle after fin");
    t = tag;
    @(posedge clk); #1;
    check(tag_valid === 1'b0, "tag_valid is a single pulse");
  endtask

  logic [127:0] v1 [] = '{128'h8a73d6ae9ad1ac35915280d80aa4c58b, 128'hf571b9acd47d2d019a5bafbbb1e9380d,
                          128'h79c368f80d121068d66d990cb49a8e77, 128'h9fb468371e4aa9e76b30d03b87473459};
  logic [127:0] v2 [] = '{128'hc3079a5a10a9192cb3f38cec92e8b344, 128'hea6f21cbb9176135c2a1b96957466d5e};
  logic [63:0] t;

  initial begin
    start = 1'b0; beat_valid = 1'b0; fin_valid = 1'b0; h = '0; beat = '0; mask = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    run_mac(128'hc6a13b37878f5b826f4f8162a1c8d879, 128'ha945054aec8b8f4e4bdfe17f0557f09a, v1, t);
    check(t === 64'h51b4b310207021d0, $sformatf("4-beat tag %h", t));
    run_mac(128'hb83b533708bf535d0aa6e52980d53b78, 128'h75c46b8f8c57f4c7675c2ca94f09efde, v2, t);
    check(t === 64'h9136f87dedb0c462, $sformatf("2-beat tag %h", t));
    v1[2][5] = ~v1[2][5];
    run_mac(128'hc6a13b37878f5b826f4f8162a1c8d879, 128'ha945054aec8b8f4e4bdfe17f0557f09a, v1, t);
    check(t !== 64'h51b4b310207021d0, "tampered ciphertext changes the tag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
