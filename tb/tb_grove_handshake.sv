// tb_grove_handshake: fills the outgoing register with random bytes and sends
// it to a model neighbour that answers after a random delay with a one-cycle
// ack; req must rise on the edge after send_next, hold the data unchanged,
// and fall on the ack edge. Results sent with send_out must appear with
// res_valid and stay until res_ready. busy must cover both.
module tb_grove_handshake;
  import fog_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [GAMMA_W-1:0] wr_idx = 0;
  byte_t wr_byte = 0;
  logic send_next = 0, send_out = 0;
  result_t result_in = '0, result;
  logic busy, req, ack = 0, res_valid, res_ready = 0;
  entry_t data;
  byte_t exp_bytes [MAX_GAMMA];
  int checks = 0, failures = 0;

  grove_handshake dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("idle after reset", !req && !res_valid && !busy);
    for (int n = 0; n < 40; n++) begin
      automatic int len = 10 + $urandom_range(MAX_GAMMA - 10);
      for (int k = 0; k < len; k++) begin
        exp_bytes[k] = byte_t'($urandom);
        wr_en = 1; wr_idx = GAMMA_W'(k); wr_byte = exp_bytes[k];
        @(negedge clk);
      end
      wr_en = 0;
      if (n % 2 == 0) begin
        automatic int dly = $urandom_range(6);
        send_next = 1;
        @(negedge clk); send_next = 0;
        chk("req rises", req && busy);
        repeat (dly) begin
          @(negedge clk);
          chk("req held", req);
        end
        begin
          automatic bit same = 1;
          for (int k = 0; k < len; k++) if (data[k] !== exp_bytes[k]) same = 0;
          chk("data held", same);
        end
        ack = 1;
        @(negedge clk); ack = 0;
        chk("req falls on ack", !req && !busy);
      end else begin
        automatic int dly = $urandom_range(6);
        result_in = '{id: byte_t'(n), label: byte_t'($urandom), hops: 8'd3, conf: 8'd9, prob: '0};
        send_out = 1;
        @(negedge clk); send_out = 0;
        chk("valid rises", res_valid && busy && result == result_in);
        repeat (dly) begin @(negedge clk); chk("valid held", res_valid && result == result_in); end
        res_ready = 1;
        @(negedge clk); res_ready = 0;
        chk("valid falls", !res_valid && !busy);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
