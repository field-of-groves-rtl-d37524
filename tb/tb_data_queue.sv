// tb_data_queue: random push_back / push_front / pop_front sequences on a
// small data queue (gamma = 6 bytes, 4 entries, so pointers wrap often).
// fr, bk, fr_prev and count are compared with a modular-arithmetic model, and
// bytes written through the write port are read back on both read ports.
module tb_data_queue;
  import fog_pkg::*;
  localparam int BYTES = 64, NRD = 2, AW = $clog2(BYTES);
  localparam int G = 6, Q = 4;
  logic clk = 0, rst_n = 0;
  logic [GAMMA_W-1:0] gamma = G;
  byte_t q_entries = Q;
  logic push_back = 0, push_front = 0, pop_front = 0;
  logic [AW-1:0] fr, bk, fr_prev;
  byte_t count;
  logic we = 0;
  logic [AW-1:0] waddr = 0;
  byte_t wdata = 0;
  logic [AW-1:0] raddr [NRD];
  byte_t rdata [NRD];
  int checks = 0, failures = 0;
  int m_fr = 0, m_bk = 0, m_cnt = 0;
  byte_t shadow [BYTES];

  data_queue #(.BYTES(BYTES), .N_RD(NRD)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    raddr[0] = 0; raddr[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int op;
      @(negedge clk);
      push_back = 0; push_front = 0; pop_front = 0; we = 0;
      op = $urandom_range(3);
      if (op == 0 && m_cnt < Q) begin
        push_back = 1; m_bk = (m_bk + G) % (G * Q); m_cnt++;
      end else if (op == 1 && m_cnt < Q) begin
        push_front = 1; m_fr = (m_fr + G * Q - G) % (G * Q); m_cnt++;
      end else if (op == 2 && m_cnt > 0) begin
        pop_front = 1; m_fr = (m_fr + G) % (G * Q); m_cnt--;
      end
      we = 1; waddr = AW'($urandom_range(G * Q - 1)); wdata = byte_t'($urandom);
      shadow[waddr] = wdata;
      @(negedge clk);
      push_back = 0; push_front = 0; pop_front = 0; we = 0;
      chk("fr", int'(fr), m_fr);
      chk("bk", int'(bk), m_bk);
      chk("count", int'(count), m_cnt);
      chk("fr_prev", int'(fr_prev), (m_fr + G * Q - G) % (G * Q));
      raddr[0] = waddr; raddr[1] = AW'($urandom_range(G * Q - 1));
      #1;
      chk("rd0", int'(rdata[0]), int'(shadow[raddr[0]]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
