// link_tx: sender side of the 16-bit asynchronous link between the two FPGAs.
//
// VME-like four-phase handshake: the word is placed on DATA, then DATA_STROBE
// is raised; the receiver answers with ACK_LINK; the sender drops DATA_STROBE
// and waits for ACK_LINK to fall before the next word. ACK_LINK and BUSY come
// from the other FPGA and pass through two synchronising flip-flops. BUSY,
// raised by the receiver when it cannot take more data, is given back to the
// processing (busy_out) to stop trigger requests and frame production; a word
// already started is still completed.
// Upstream interface: valid/ready, a word is taken when both are high.
// Timing: at least 6 clocks per word (strobe set, two-flop sync of ACK up,
// strobe clear, two-flop sync of ACK down).
//
// The 16-bit width, DATA_STROBE, ACK_LINK and BUSY follow the published
// design; the exact phase sequence is the usual VME one.
module link_tx
  import numexo2_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              valid,
  input  logic [LINK_W-1:0] data,
  output logic              ready,
  output logic [LINK_W-1:0] link_data,
  output logic              data_strobe,
  input  logic              ack_link,
  input  logic              busy_link,
  output logic              busy_out
);
  typedef enum logic [1:0] {L_IDLE, L_SETUP, L_WAIT_ACK, L_WAIT_REL} state_e;
  state_e state;
  logic [1:0] ack_s, busy_s;

  assign ready    = (state == L_IDLE) && !busy_s[1];
  assign busy_out = busy_s[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      ack_s <= '0; busy_s <= '0;
    end else begin
      ack_s  <= {ack_s[0], ack_link};
      busy_s <= {busy_s[0], busy_link};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= L_IDLE; link_data <= '0; data_strobe <= 1'b0;
    end else begin
      unique case (state)
        L_IDLE: if (valid && ready) begin
          link_data <= data;
          state     <= L_SETUP;
        end
        L_SETUP: begin                 // data stable one clock before the strobe
          data_strobe <= 1'b1;
          state       <= L_WAIT_ACK;
        end
        L_WAIT_ACK: if (ack_s[1]) begin
          data_strobe <= 1'b0;
          state       <= L_WAIT_REL;
        end
        L_WAIT_REL: if (!ack_s[1]) state <= L_IDLE;
        default: state <= L_IDLE;
      endcase
    end
  end

  a_data_stable: assert property (@(posedge clk) disable iff (rst)
    data_strobe && $past(data_strobe) |-> link_data == $past(link_data))
    else $error("link_tx: data changed under DATA_STROBE");
endmodule
