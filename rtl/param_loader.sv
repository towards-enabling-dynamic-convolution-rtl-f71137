// param_loader: AXI4-Stream sink that moves one block of streamed words into a
// memory.
//
// The host streams every parameter and pixel as a 32-bit integer (value times
// 2^FRAC). When start is pulsed with a word count, the loader raises s_tready,
// accepts exactly that many words, converts each to the internal 16-bit fixed
// point with saturation (dcnn_pkg::int_to_fix) and presents it as a write
// (we, waddr = index within the block, wdata) one clock after the handshake.
// done pulses together with the last write. Which memory the write goes to is
// decoded outside.
//
// Framing: the whole inference input is one stream ending with tlast. The
// controller sets expect_last for the block that ends the stream; a word whose
// tlast disagrees with that sets the sticky framing_err flag (cleared by the
// next start with clear_err). Data is taken as it comes; a framing error is
// only reported. The AXI4-Stream rule that a valid word is held until accepted
// is checked by assertions.
module param_loader
  import dcnn_pkg::*;
#(
  parameter int AW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Stream slave (IN_DATA)
  input  word_t         s_tdata,
  input  logic          s_tvalid,
  output logic          s_tready,
  input  logic          s_tlast,
  // block control
  input  logic          start,
  input  logic [AW-1:0] count,
  input  logic          expect_last,
  input  logic          clear_err,
  output logic          busy,
  output logic          done,
  // write port
  output logic          we,
  output logic [AW-1:0] waddr,
  output data_t         wdata,
  output logic          framing_err
);

  logic [AW-1:0] cnt, count_q;
  logic          expect_last_q;
  logic          hs, final_word;

  assign s_tready   = busy;
  assign hs         = s_tvalid && s_tready;
  assign final_word = (cnt == count_q - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      cnt           <= '0;
      count_q       <= '0;
      expect_last_q <= 1'b0;
      done          <= 1'b0;
      we            <= 1'b0;
      waddr         <= '0;
      wdata         <= '0;
      framing_err   <= 1'b0;
    end else begin
      done <= 1'b0;
      we   <= 1'b0;
      if (clear_err) framing_err <= 1'b0;
      if (start && !busy) begin
        cnt           <= '0;
        count_q       <= count;
        expect_last_q <= expect_last;
        busy          <= (count != 0);
        done          <= (count == 0);
      end else if (hs) begin
        we    <= 1'b1;
        waddr <= cnt;
        wdata <= int_to_fix(s_tdata);
        cnt   <= cnt + 1'b1;
        if (s_tlast != (expect_last_q && final_word)) framing_err <= 1'b1;
        if (final_word) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // AXI4-Stream: once valid, a word stays valid and unchanged until accepted.
  logic  stalled;
  word_t stalled_data;
  logic  stalled_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stalled      <= 1'b0;
      stalled_data <= '0;
      stalled_last <= 1'b0;
    end else begin
      stalled      <= s_tvalid && !s_tready;
      stalled_data <= s_tdata;
      stalled_last <= s_tlast;
      if (stalled) begin
        assert (s_tvalid) else $error("IN_DATA: tvalid dropped before tready");
        assert (s_tdata == stalled_data && s_tlast == stalled_last)
          else $error("IN_DATA: payload changed while stalled");
      end
    end
  end

endmodule
