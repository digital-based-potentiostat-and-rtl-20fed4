// Acquisition counter of the DB potentiostat output streams.
//
// The faradaic current is read from the two digital streams of the
// FI-DIGOTA as i_f = (p*ip - n*in)/M, where p and n are the numbers of clock
// periods in which voutP and voutN are active during an acquisition window of
// M clock periods (Eq. (1) of the paper). This block produces p and n. The
// paper records the streams with an oscilloscope and counts them in
// software; here the same count is done in logic, which is this design's
// choice of where to put it.
//
// Operation: a pulse on start while idle captures window_len (M) and opens a
// window; the M clock edges after the start edge each sample the streams and
// add one to p when voutp_n is low and one to n when voutn is high. On the
// M-th edge done pulses for one cycle and p_count/n_count take the totals,
// holding them until the next window ends. start while busy is ignored.
// window_len = 0 is taken as 1. CNT_W = 18 holds the paper's longest window,
// 5 s at 50 kHz = 250,000 periods.
module pulse_counter
  import digota_pkg::*;
#(
  parameter int unsigned W = CNT_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] window_len,  // M, in clock periods
  input  logic         voutp_n,     // pull-up drive, low = active
  input  logic         voutn,       // pull-down drive, high = active
  output logic         busy,
  output logic         done,        // one-cycle pulse at the end of a window
  output logic [W-1:0] m_count,     // M of the last completed window
  output logic [W-1:0] p_count,     // p of the last completed window
  output logic [W-1:0] n_count      // n of the last completed window
);

  logic [W-1:0] cyc, m_len, p_acc, n_acc;
  logic [W-1:0] p_next, n_next;

  assign p_next = p_acc + W'(!voutp_n);
  assign n_next = n_acc + W'(voutn);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      cyc     <= '0;
      m_len   <= '0;
      p_acc   <= '0;
      n_acc   <= '0;
      m_count <= '0;
      p_count <= '0;
      n_count <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          cyc   <= '0;
          m_len <= (window_len == '0) ? W'(1) : window_len;
          p_acc <= '0;
          n_acc <= '0;
        end
      end else begin
        p_acc <= p_next;
        n_acc <= n_next;
        cyc   <= cyc + W'(1);
        if (cyc == m_len - W'(1)) begin
          busy    <= 1'b0;
          done    <= 1'b1;
          m_count <= m_len;
          p_count <= p_next;
          n_count <= n_next;
        end
      end
    end
  end

  // A window never counts more active periods than it has periods.
  a_counts_bounded: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> (p_count <= m_count) && (n_count <= m_count));

endmodule
