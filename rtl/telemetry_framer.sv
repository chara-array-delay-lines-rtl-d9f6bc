// telemetry_framer: turns servo samples into a byte stream for the network
// link to the cart's supervisory computer.
//
// On sample_stb (1 kHz status, or every 5 kHz loop for high-rate telemetry,
// chosen by the caller) the record `rec` is captured, its `seq` field is
// replaced by a running 16-bit sequence number, and a frame is sent on a
// valid/ready byte interface:
//     0xA5, TLM_BYTES record bytes (most significant first), checksum
// where the checksum is the 8-bit sum of the record bytes. tx_last marks the
// checksum byte. A byte moves when tx_valid and tx_ready are both high. If a
// sample arrives while a frame is still being sent it is dropped and
// drop_cnt (saturating) counts it; the sequence number still advances, so
// the receiver sees the gap. The record contents (time, target, measured
// position, error, actuator commands) follow the published telemetry list;
// the framing is this design's choice. A frame takes TLM_BYTES + 2 = 37
// cycles when tx_ready stays high.
module telemetry_framer
  import cdl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sample_stb,
  input  tlm_rec_t    rec,
  output logic  [7:0] tx_data,
  output logic        tx_valid,
  output logic        tx_last,
  input  logic        tx_ready,
  output logic [15:0] drop_cnt
);

  typedef enum logic [1:0] {S_IDLE, S_SYNC, S_BODY, S_SUM} state_e;

  localparam int NB = TLM_BYTES;

  state_e          state;
  tlm_rec_t        shreg;
  logic     [15:0] seq;
  logic      [7:0] sum;
  logic      [5:0] idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      shreg    <= '0;
      seq      <= '0;
      sum      <= '0;
      idx      <= '0;
      drop_cnt <= '0;
    end else begin
      if (sample_stb) begin
        seq <= seq + 1'b1;
        if (state == S_IDLE) begin
          shreg     <= rec;
          shreg.seq <= seq;
          sum       <= '0;
          idx       <= '0;
          state     <= S_SYNC;
        end else if (drop_cnt != '1) begin
          drop_cnt <= drop_cnt + 1'b1;
        end
      end
      if (tx_valid && tx_ready) begin
        unique case (state)
          S_SYNC: state <= S_BODY;
          S_BODY: begin
            sum   <= sum + shreg[$bits(tlm_rec_t)-1 -: 8];
            shreg <= tlm_rec_t'({shreg[$bits(tlm_rec_t)-9:0], 8'h00});
            idx   <= idx + 1'b1;
            if (idx == 6'(NB - 1)) state <= S_SUM;
          end
          S_SUM:  state <= S_IDLE;
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    tx_valid = (state != S_IDLE);
    tx_last  = (state == S_SUM);
    unique case (state)
      S_SYNC:  tx_data = 8'hA5;
      S_BODY:  tx_data = shreg[$bits(tlm_rec_t)-1 -: 8];
      S_SUM:   tx_data = sum;
      default: tx_data = 8'h00;
    endcase
  end

  // a frame, once started, is never withdrawn
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (tx_valid && !tx_ready) |=> (tx_valid && $stable(tx_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
