// tb_tiara_resp_arb: nine sources each send a numbered stream of responses
// with random valid timing and a randomly stalling sink; checks every
// response arrives once, in per-source order, unchanged, and that no source
// waits more than N grants while requesting (round-robin fairness).
module tb_tiara_resp_arb;
  import tiara_pkg::*;
  localparam int N = 9, PER = 200;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready;
  resp_t [N-1:0] in;
  logic out_valid, out_ready;
  resp_t out;
  int sent [N], got [N], waited [N];
  bit fired [N];

  tiara_resp_arb dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb
    for (int i = 0; i < N; i++) begin
      in[i].ctag   = 16'(i);
      in[i].status = 8'(i * 3);
      in[i].value  = 64'(sent[i]);
    end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int s;
      s = int'(out.ctag);
      checks++;
      if (s >= N || out.value != 64'(got[s]) || out.status != 8'(s * 3)) begin
        failures++;
        $display("bad response from %0d value %0d expected %0d", s, out.value, got[s]);
      end else got[s]++;
    end
    for (int i = 0; i < N; i++) begin
      fired[i] = in_valid[i] && in_ready[i];
      if (fired[i]) begin sent[i]++; waited[i] = 0; end
      else if (in_valid[i] && out_ready) begin
        waited[i]++;
        if (waited[i] > N) begin failures++; $display("source %0d starved", i); end
      end
    end
  end

  always @(negedge clk) begin
    out_ready = ($urandom_range(0, 3) != 0);
    for (int i = 0; i < N; i++)
      if (!in_valid[i] || fired[i]) in_valid[i] = (sent[i] < PER) && ($urandom_range(0, 2) != 0);
  end

  initial begin
    in_valid = '0; out_ready = 0;
    for (int i = 0; i < N; i++) begin sent[i] = 0; got[i] = 0; waited[i] = 0; fired[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (got.sum() == N * PER);
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
