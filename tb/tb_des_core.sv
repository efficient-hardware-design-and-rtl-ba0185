// tb_des_core: self-checking test of the iterative DES core.
//
// Runs ten known-answer vectors through the core: the classic textbook
// example (key 133457799BBCDFF1), the processor's example key with its
// published plaintext/ciphertext pair, two blocks of the example's encrypted
// data and instruction images, and six random blocks in both directions.
// Expected values come from an independent software model of FIPS 46-3.
// Each result is checked, and so is the latency: `done` must rise exactly 16
// cycles after `start`, with `busy` high in between.  Back-to-back encryption
// then decryption of the same block must return the block.
module tb_des_core;

  typedef struct packed {
    logic [63:0] key;
    logic [63:0] din;
    logic        dec;
    logic [63:0] exp;
  } vec_t;

  localparam vec_t VEC [10] = '{
    '{64'h133457799bbcdff1, 64'h0123456789abcdef, 1'b0, 64'h85e813540f0ab405},
    '{64'h4b4952415450414c, 64'h00000000cb97f7ee, 1'b0, 64'h10539160018d5ff7},
    '{64'h4b4952415450414c, 64'hda352fffce6992ca, 1'b1, 64'hc27d856eda04fa52},
    '{64'h4b4952415450414c, 64'h517e9015fb7bd8a3, 1'b1, 64'h0000000020010007},
    '{64'hf2a74de452e6b438, 64'h6513270e269e0d37, 1'b0, 64'h391bbccb4492fc51},
    '{64'h0c5c7fd0a6a3a450, 64'hd23f0824128b2f33, 1'b1, 64'hae29325ee99eb674},
    '{64'h1818e811892f902b, 64'h9531985d5d9dc9f8, 1'b0, 64'h1c83b420f9b5ac73},
    '{64'he8e25d940ed90475, 64'h36f675cc81e74ef5, 1'b1, 64'hec93aea0b97679bd},
    '{64'h1600a35a099950d8, 64'h6b0d549b6f03675a, 1'b0, 64'h2850d47958dfd9ec},
    '{64'h3d9c172411e20b8f, 64'h8d116ece1738f7d9, 1'b1, 64'h517f0bb8f5034589}};

  logic clk = 1'b0;
  logic rst, start, decrypt, busy, done;
  logic [63:0] key, din, dout;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  des_core dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Start one block, wait for done, return result and measured latency.
  task automatic run(input logic [63:0] k, input logic [63:0] d, input logic dec,
                     output logic [63:0] y, output int lat);
    @(negedge clk);
    key = k; din = d; decrypt = dec; start = 1'b1;
    @(negedge clk);
    start = 1'b0; key = '0; din = '0;   // inputs only sampled in the start cycle
    lat = 1;
    while (!done) begin
      if (!busy) begin
        check(1'b0, "busy low before done");
        break;
      end
      @(negedge clk);
      lat++;
    end
    y = dout;
  endtask

  initial begin
    logic [63:0] y, y2;
    int lat;
    rst = 1'b1; start = 1'b0; decrypt = 1'b0; key = '0; din = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    foreach (VEC[i]) begin
      run(VEC[i].key, VEC[i].din, VEC[i].dec, y, lat);
      check(y == VEC[i].exp, $sformatf("vector %0d: got %h expected %h", i, y, VEC[i].exp));
      check(lat == 16, $sformatf("vector %0d: latency %0d, expected 16", i, lat));
      @(negedge clk);
      check(dout == VEC[i].exp && !busy, $sformatf("vector %0d: result not held", i));
    end
    // Round trip.
    for (int i = 0; i < 4; i++) begin
      logic [63:0] k, p;
      k = {$urandom, $urandom};
      p = {$urandom, $urandom};
      run(k, p, 1'b0, y, lat);
      run(k, y, 1'b1, y2, lat);
      check(y2 == p, $sformatf("round trip %0d", i));
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
