// tb_input_queue: the processor side pushes inputs of 5 features for a
// 3-label problem (gamma = 10, the paper's example entry) into a 4-grove
// input queue while model groves report room at random and acknowledge after
// random delays. Checked: each entry reaches exactly one grove; it is laid
// out as {hops = 0, 5 features, id, 3 zero probabilities}; ids count up; the
// chosen grove is the first one with room from a start given by a reference
// copy of the LFSR; every grove is chosen as a start at least once.
module tb_input_queue;
  import fog_pkg::*;
  localparam int N = 4, F = 5, C = 3;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid = 0, in_ready;
  features_t in_features = '0;
  logic [N-1:0] grove_space = '1, grove_req, grove_ack = '0;
  entry_t entry_out;
  logic [1:0] target;
  int checks = 0, failures = 0;
  byte_t sent [$][F];
  int got = 0, started [N];
  logic [15:0] m_lfsr = 16'hACE1;
  logic [N-1:0] space_q;
  logic req_q = 0;

  input_queue #(.N(N), .DEPTH(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    cfg = '{thresh: 8'd26, max_hops: 8'd4, gamma: GAMMA_W'(F + C + 2), n_classes: (CLASS_W+1)'(C), q_entries: 8'd8};
    repeat (2) @(posedge clk);
    rst_n = 1;
  end

  // processor
  initial begin
    @(posedge rst_n);
    for (int n = 0; n < 60; n++) begin
      automatic byte_t f [F];
      @(negedge clk);
      for (int i = 0; i < F; i++) begin f[i] = byte_t'($urandom); in_features[i] = f[i]; end
      in_features[F] = 8'hEE;   // beyond the feature count: must not appear
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      sent.push_back(f);
      @(negedge clk) in_valid = 0;
      repeat ($urandom_range(3)) @(negedge clk);
    end
  end

  // model groves
  always @(negedge clk) begin
    grove_space <= N'($urandom) | N'(1 << $urandom_range(N - 1));
    grove_ack <= '0;
    if (|grove_req && $urandom_range(2) == 0) grove_ack <= grove_req;
  end

  always @(posedge clk) begin
    space_q <= grove_space;
    req_q   <= |grove_req;
    if (rst_n) begin
      if (|grove_req) chk("one target", $onehot(grove_req));
      if (|grove_req && !req_q) begin
        automatic int s = int'(m_lfsr % N), e = -1;
        for (int i = 0; i < N; i++) if (e < 0 && space_q[(s + i) % N]) e = (s + i) % N;
        chk("target choice", grove_req[e]);
        started[e]++;
      end
      if (|(grove_ack & grove_req)) begin
        automatic byte_t f [F];
        f = sent[got];
        chk("hops 0", entry_out[0] == 0);
        for (int i = 0; i < F; i++) chk("feature", entry_out[1 + i] == f[i]);
        chk("id", entry_out[F + 1] == byte_t'(got));
        for (int c = 0; c < C; c++) chk("prob 0", entry_out[F + 2 + c] == 0);
        got++;
        m_lfsr = {1'b0, m_lfsr[15:1]} ^ (m_lfsr[0] ? 16'hB400 : 16'h0000);
      end
    end
  end

  initial begin
    @(posedge rst_n);
    while (got < 60) @(posedge clk);
    for (int g = 0; g < N; g++) chk("every grove starts some input", started[g] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
