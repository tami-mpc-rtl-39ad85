// tb_layout_adaptor: pushes random hash requests with random gaps and
// random output backpressure, and checks that every batch holds the next
// four requests in arrival order, lane q getting the q-th.
module tb_layout_adaptor;
  import tami_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  crh_req_t in_req;
  crh_req_t [CRH_LANES-1:0] out_batch;
  int checks = 0, failures = 0;
  crh_req_t sent [$];
  int n_in = 0, n_batches = 0;

  layout_adaptor dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin : produce
        while (n_in < 40) begin
          @(negedge clk);
          if (!in_valid && ($urandom % 3 != 0)) begin
            in_req   = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
            in_valid = 1;
          end
          @(posedge clk);
          if (in_valid && in_ready) begin
            sent.push_back(in_req);
            n_in++;
            #1 in_valid = 0;
          end
        end
      end
      begin : consume
        while (n_batches < 10) begin
          @(negedge clk);
          out_ready = ($urandom % 2);
          @(posedge clk);
          checks++;
          if (out_valid && sent.size() < CRH_LANES) begin
            failures++; $display("FAIL: batch offered before four requests");
          end
          if (out_valid && out_ready) begin
            for (int l = 0; l < CRH_LANES; l++) begin
              checks++;
              if (sent.size() == 0 || out_batch[l] != sent[0]) begin
                failures++; $display("FAIL: batch %0d lane %0d", n_batches, l);
              end
              if (sent.size() != 0) void'(sent.pop_front());
            end
            n_batches++;
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
