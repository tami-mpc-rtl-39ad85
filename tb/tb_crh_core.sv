// tb_crh_core: checks the four-lane correlation-robust hash against the
// FIPS-197 AES-128 example and against a reference model on random batches,
// and checks the 12-cycle batch latency (1 key-expansion step + 11 AES
// rounds) and that output backpressure holds the result.
module tb_crh_core;
  import tami_pkg::*;
  import tb_aes_ref_pkg::*;

  localparam int L = CRH_LANES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  crh_req_t [L-1:0] in_req;
  blk_t     [L-1:0] out_hash;
  int checks = 0, failures = 0;

  crh_core dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int lat;
    in_valid = 0; out_ready = 0; in_req = '0;
    // the reference model alone against FIPS-197 Appendix C.1
    check(ref_aes128(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff)
          == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "reference AES vector");
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 12; b++) begin
      for (int l = 0; l < L; l++) begin
        if (b == 0 && l == 0) begin
          in_req[l].key = 128'h000102030405060708090a0b0c0d0e0f;
          in_req[l].blk = 128'h00112233445566778899aabbccddeeff;
        end else begin
          in_req[l].key = {$urandom, $urandom, $urandom, $urandom};
          in_req[l].blk = {$urandom, $urandom, $urandom, $urandom};
        end
      end
      @(negedge clk);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      check(!in_ready, "busy while hashing");
      // count edges from acceptance until the edge that can take the result
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      check(lat == 12, $sformatf("latency %0d, expected 12", lat));
      if (b == 0)
        check(out_hash[0] == (128'h69c4e0d86a7b0430d8cdb78070b4c55a ^ 128'h00112233445566778899aabbccddeeff),
              "FIPS-197 vector through the hash");
      // hold under backpressure
      repeat (b % 3) begin
        @(negedge clk);
        check(out_valid, "output held while not ready");
      end
      for (int l = 0; l < L; l++)
        check(out_hash[l] == ref_crh(in_req[l].key, in_req[l].blk),
              $sformatf("batch %0d lane %0d", b, l));
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      check(!out_valid, "output released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
