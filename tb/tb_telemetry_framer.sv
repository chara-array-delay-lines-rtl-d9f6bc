// tb_telemetry_framer: drives random records at random times and a random
// tx_ready, decodes the byte stream (sync byte, record, checksum, tx_last)
// and checks every frame against the record captured by a model of the
// framer, including the running sequence number and the count of samples
// dropped while a frame is in flight. Inputs change on the falling edge;
// the monitor samples on the rising edge.
module tb_telemetry_framer;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;
  logic clk = 0, rst_n = 0, sample_stb = 0, tx_ready = 0;
  tlm_rec_t rec = '0;
  logic [7:0] tx_data;
  logic tx_valid, tx_last;
  logic [15:0] drop_cnt;
  int checks = 0, failures = 0;

  telemetry_framer dut (.clk, .rst_n, .sample_stb, .rec, .tx_data, .tx_valid, .tx_last, .tx_ready, .drop_cnt);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #20_000_000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  tlm_rec_t exp_q[$];
  logic [15:0] m_seq = 0;
  int m_drops = 0, frames = 0;
  bit m_busy = 0;
  // receiver
  int pos = 0;
  logic [7:0] sum = 0;
  logic [$bits(tlm_rec_t)-1:0] got;

  always @(posedge clk) if (rst_n) begin
    if (sample_stb) begin
      if (!m_busy) begin
        tlm_rec_t r;
        r = rec; r.seq = m_seq;
        exp_q.push_back(r);
        m_busy = 1;
      end else m_drops++;
      m_seq++;
    end
    if (tx_valid && tx_ready) begin
      if (pos == 0) begin
        check(tx_data == 8'hA5, $sformatf("sync byte %h", tx_data));
        check(!tx_last, "tx_last on sync");
        sum = 0;
        pos = 1;
      end else if (pos <= TLM_BYTES) begin
        got = {got[$bits(tlm_rec_t)-9:0], tx_data};
        sum += tx_data;
        check(!tx_last, "tx_last in body");
        pos++;
      end else begin
        check(tx_last, "tx_last on checksum");
        check(tx_data == sum, $sformatf("checksum %h exp %h", tx_data, sum));
        if (exp_q.size() == 0) begin
          checks++; failures++; $display("FAIL: frame with no sample");
        end else begin
          tlm_rec_t e;
          e = exp_q.pop_front();
          check(got == e, $sformatf("record mismatch seq %0d", e.seq));
        end
        frames++;
        pos = 0;
        m_busy = 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 60000; i++) begin
      @(negedge clk);
      tx_ready   = ($urandom_range(0, 3) != 0);
      sample_stb = ($urandom_range(0, 49) == 0);
      for (int b = 0; b < $bits(tlm_rec_t); b++)
        rec[b] = 1'($urandom);
    end
    @(negedge clk) sample_stb = 0; tx_ready = 1;
    repeat (100) @(negedge clk);
    check(exp_q.size() == 0, "all frames delivered");
    check(drop_cnt == 16'(m_drops), $sformatf("drop_cnt %0d exp %0d", drop_cnt, m_drops));
    check(frames > 500 && m_drops > 100, $sformatf("frames %0d drops %0d", frames, m_drops));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
