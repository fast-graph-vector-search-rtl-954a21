// tb_murmur2_hash: feeds one key per cycle into the hash pipeline and
// compares each hash, LAT = 4 cycles later, with a sequential MurmurHash2
// reference; then checks that a low enable freezes the pipeline.
module tb_murmur2_hash;
  import falcon_tb_pkg::*;
  localparam logic [31:0] SEED = 32'h9747b28c;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 1;
  logic [31:0] key, hash;
  murmur2_hash #(.SEED(SEED)) dut (.clk, .en, .key, .hash);

  int checks = 0, failures = 0;
  logic [31:0] keys [$];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      key = (i < 3) ? 32'(i) : $urandom;
      keys.push_back(key);
      if (i >= 4) begin
        logic [31:0] k0;
        k0 = keys.pop_front();
        checks++;
        if (hash !== ref_murmur2(k0, SEED)) begin
          failures++;
          $display("FAIL: key %h hash %h want %h", k0, hash, ref_murmur2(k0, SEED));
        end
      end
    end
    // stall: hash holds while en is low
    @(negedge clk); en = 0; key = 32'hdeadbeef;
    begin
      logic [31:0] h0;
      h0 = hash;
      repeat (5) @(negedge clk);
      checks++;
      if (hash !== h0) begin failures++; $display("FAIL: hash changed while stalled"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
