// aes256_pipe_tb: feeds AES-256 known-answer vectors (FIPS-197 C.3 and four vectors from an
// independent AES implementation) back to back, each with its own key, followed by random
// key/block pairs checked against the reference model. Every result must appear exactly
// 15 cycles after its block went in.
module aes256_pipe_tb;
  import gcm_ref_pkg::*;
  localparam int LAT = 15;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid = 0, out_valid;
  logic [127:0] in_block = 0, out_block;
  logic [255:0] in_key = 0;
  logic [15:0]  in_meta = 0, out_meta;
  int checks = 0, failures = 0;

  aes256_pipe #(.META_W(16)) dut (.*);

  localparam int NKAT = 5;
  logic [255:0] kat_k [NKAT] = '{
    256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f,
    256'h52f22665a60c12d289185d950ee8813609166f6b113d178d6c0fd3901ff239a1,
    256'h248a1e924e8fd0ae2e1a9492a3305f188cb610900f9e347fae886dc6507795ec,
    256'hba72499bfa121e836b2ac15726ee7d6b0af6ab13c38e92cae0d15057b159987f,
    256'ha593feaed27248b762e3ab5805f0765a2b9c1d7e0f37c44921bd3f6564eadf7f};
  logic [127:0] kat_p [NKAT] = '{
    128'h00112233445566778899aabbccddeeff, 128'ha095f20f9395650cf9380b8edb224a6b,
    128'h745c4c3fcb2eb2c73e14934c867ee057, 128'h94cc7411d717f14579b2aa100fbbb34f,
    128'h142a72668c47e223d16edd8c47b46afc};
  logic [127:0] kat_c [NKAT] = '{
    128'h8ea2b7ca516745bfeafc49904b496089, 128'h7e3b8edd008da42b9e1499a5cbbbe67e,
    128'h4f479c74ed11892a4af8ec51572b5d29, 128'h3a67e2e23681b3769b4f2e914507cc3c,
    128'he5f0a6f81cc02fef1c905af85a0bebac};

  localparam int NRND = 20;
  localparam int N = NKAT + NRND;
  logic [127:0] exp_c [N];
  int sent_cycle [N];
  int cycle = 0, nout = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int id;
    id = int'(out_meta);
    checks++;
    if (out_block !== exp_c[id]) begin
      failures++; $display("FAIL block %0d: got %h exp %h", id, out_block, exp_c[id]);
    end
    checks++;
    if (cycle - sent_cycle[id] != LAT) begin
      failures++; $display("FAIL block %0d latency %0d", id, cycle - sent_cycle[id]);
    end
    nout++;
  end

  initial begin
    // the reference model itself must reproduce the FIPS-197 vector
    checks++;
    if (aes256_encrypt(kat_k[0], kat_p[0]) !== kat_c[0]) begin
      failures++; $display("FAIL reference model");
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      logic [255:0] k; logic [127:0] p;
      if (i < NKAT) begin k = kat_k[i]; p = kat_p[i]; exp_c[i] = kat_c[i]; end
      else begin
        k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        p = {$urandom, $urandom, $urandom, $urandom};
        exp_c[i] = aes256_encrypt(k, p);
      end
      in_valid <= 1; in_key <= k; in_block <= p; in_meta <= 16'(i);
      sent_cycle[i] = cycle + 1;
      @(posedge clk);
      if (i == 7) begin in_valid <= 0; @(posedge clk); end  // one bubble
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (nout != N) begin failures++; $display("FAIL %0d outputs, expected %0d", nout, N); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
