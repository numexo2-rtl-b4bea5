// v5_link_rx: behavioural model of the receiving FPGA of the 16-bit link.
// It takes a word on each rising DATA_STROBE, answers with ACK_LINK after a
// random delay of 1..max_delay clocks (sampling on the falling edge), drops ACK_LINK after
// DATA_STROBE falls, and checks that the data did not change while the
// strobe was high. Each word received is pulsed out on word_valid/word.
module v5_link_rx (
  input  logic        clk,
  input  logic [15:0] link_data,
  input  logic        data_strobe,
  output logic        ack_link,
  output logic        word_valid,
  output logic [15:0] word,
  output int          errors
);
  int max_delay = 3;
  initial begin
    ack_link = 0; word_valid = 0; word = 0; errors = 0;
    forever begin
      @(negedge clk);
      word_valid = 0;
      if (data_strobe && !ack_link) begin
        word = link_data;
        repeat ($urandom_range(1, max_delay)) begin
          @(negedge clk);
          word_valid = 0;
          if (link_data != word) errors++;
        end
        ack_link = 1;
        word_valid = 1;
        while (data_strobe) begin @(negedge clk); word_valid = 0; end
        repeat ($urandom_range(0, max_delay)) @(negedge clk);
        ack_link = 0;
      end
    end
  end
endmodule
