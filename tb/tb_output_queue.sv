// tb_output_queue: four model groves each offer a numbered stream of results
// (valid held until ready) while the processor drains the queue with random
// out_ready. Checked: every result comes out exactly once with its contents,
// each grove's results stay in order, a grant only goes to a valid grove, and
// no grove with a pending result is passed over more than N-1 times.
module tb_output_queue;
  import fog_pkg::*;
  localparam int N = 4, PER = 40;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] res_valid = '0, res_ready;
  result_t res [N];
  logic out_valid, out_ready = 0;
  result_t out_result;
  int checks = 0, failures = 0;
  int sent_n [N], next_exp [N], waited [N], total = 0;
  logic [N-1:0] taken = '0;   // result accepted at the last clock edge

  output_queue #(.N(N), .DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic result_t mk(int g, int n);
    result_t r = '0;
    r.id = byte_t'(n); r.label = byte_t'(g); r.hops = byte_t'(g + 1); r.conf = byte_t'(n * 3);
    r.prob[0] = byte_t'(n ^ g);
    return r;
  endfunction

  initial begin
    for (int g = 0; g < N; g++) res[g] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
  end

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < N; g++) begin
      if (res_ready[g]) chk("grant to valid", res_valid[g]);
      if (res_valid[g] && !res_ready[g] && (res_ready != 0)) begin
        waited[g]++;
        chk("round robin", waited[g] < N);
      end
      if (res_valid[g] && res_ready[g]) waited[g] = 0;
      taken[g] = res_valid[g] && res_ready[g];
    end
    chk("one grant", $onehot0(res_ready));
    if (out_valid && out_ready) begin
      automatic int g = out_result.label;
      chk("content", out_result == mk(g, next_exp[g]));
      next_exp[g]++;
      total++;
    end
  end

  always @(negedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(3) != 0);
    for (int g = 0; g < N; g++) begin
      if (taken[g]) begin res_valid[g] <= 0; sent_n[g]++; taken[g] = 0; end
      else if (!res_valid[g] && sent_n[g] < PER && $urandom_range(1)) begin
        res[g] <= mk(g, sent_n[g]);
        res_valid[g] <= 1;
      end
    end
  end

  initial begin
    @(posedge rst_n);
    while (total < N * PER) @(posedge clk);
    repeat (10) @(posedge clk);
    for (int g = 0; g < N; g++) chk("all out", next_exp[g] == PER);
    chk("nothing extra", !out_valid && total == N * PER);
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
