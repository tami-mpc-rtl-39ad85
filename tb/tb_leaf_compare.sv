// tb_leaf_compare: plays the sender and the TEE around the receiver's leaf
// comparison. For every leaf OT it draws a key and block for the hash, the
// receiver chunk x_j, the sender chunk y_j and the sender share <lt_j>_S,
// and builds the 16 messages, the one at index x_j being
// 1{y_j < x_j} xor <lt_j>_S xor u_c with u_c from a reference hash model
// (the others are random, as they would be under the other masks). It
// checks <lt_j>_R xor <lt_j>_S = 1{y_j < x_j} for every leaf and that a
// message word takes 96 cycles in steady state (8 CRH batches of 12).
module tb_leaf_compare;
  import tami_pkg::*;
  import tb_aes_ref_pkg::*;
  localparam int L = LEAF_PER_W, K = CHUNK_K, WORDS = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, x_valid, x_ready, m_valid, m_ready, lt_valid, lt_ready, mask_wait;
  crh_req_t req;
  logic [L*K-1:0] x_data;
  logic [L*(1<<K)-1:0] m_data;
  logic [L-1:0] lt_data;
  int checks = 0, failures = 0;

  leaf_compare dut (.*);

  crh_req_t            reqs [WORDS][L];
  logic [L*K-1:0]      xs   [WORDS];
  logic [L*(1<<K)-1:0] ms   [WORDS];
  logic [L-1:0]        lts  [WORDS];   // sender shares
  logic [L-1:0]        cmp  [WORDS];   // 1{y < x}
  int t_out [WORDS];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < WORDS; w++)
      for (int q = 0; q < L; q++) begin
        logic [3:0] x, y;
        logic u;
        reqs[w][q].key = {$urandom, $urandom, $urandom, $urandom};
        reqs[w][q].blk = {$urandom, $urandom, $urandom, $urandom};
        u = ref_crh(reqs[w][q].key, reqs[w][q].blk)[0];
        x = 4'($urandom); y = 4'($urandom);
        xs[w][q*K +: K] = x;
        lts[w][q] = 1'($urandom);
        cmp[w][q] = (y < x);
        for (int i = 0; i < 16; i++) ms[w][q*16 + i] = 1'($urandom);
        ms[w][q*16 + int'(x)] = cmp[w][q] ^ lts[w][q] ^ u;
      end
    req_valid = 0; x_valid = 0; m_valid = 0; lt_ready = 1; req = '0; x_data = '0; m_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int w = 0; w < WORDS; w++)
        for (int q = 0; q < L; q++) begin
          @(negedge clk);
          req = reqs[w][q]; req_valid = 1;
          do @(posedge clk); while (!req_ready);
          #1 req_valid = 0;
        end
      for (int w = 0; w < WORDS; w++) begin
        @(negedge clk);
        x_data = xs[w]; m_data = ms[w]; x_valid = 1; m_valid = 1;
        do @(posedge clk); while (!x_ready);
        #1 x_valid = 0; m_valid = 0;
      end
      for (int w = 0; w < WORDS; w++) begin
        do @(posedge clk); while (!lt_valid);
        t_out[w] = cyc;
        checks++;
        if ((lt_data ^ lts[w]) != cmp[w]) begin
          failures++; $display("FAIL: word %0d shares %h expected %h", w, lt_data ^ lts[w], cmp[w]);
        end
      end
    join
    for (int w = 2; w < WORDS; w++) begin
      checks++;
      if (t_out[w] - t_out[w-1] != 12 * L / CRH_LANES) begin
        failures++; $display("FAIL: word period %0d", t_out[w] - t_out[w-1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
