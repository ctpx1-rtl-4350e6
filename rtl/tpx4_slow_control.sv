// tpx4_slow_control: slow-control bridge from the processing system to the
// Timepix4 ("Timepix4 Slow Control" fed by an AXI4-Stream FIFO).
//
// Bytes from the PS (s_*, AXI-Stream, 8 bits) queue in a FIFO_DEPTH-byte
// FIFO. Each byte is shifted out MSB first on sc_dout with a serial clock
// sc_clk of clk/(2*DIV); one reply bit is sampled from sc_din on each rising
// sc_clk edge, and the eight reply bits leave as one byte on m_* (AXI-Stream).
// sc_cs_n is low from the first bit of a byte group until the FIFO runs
// empty. A byte is only started when the reply register is free, so no reply
// is lost. The paper names the block and its AXI4-Stream FIFO; the Timepix4
// slow-control protocol is not given there, so the serial framing here
// (SPI mode 0 style) is this design's own simple choice.
module tpx4_slow_control #(
  parameter int DIV        = 8,
  parameter int FIFO_DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       s_valid,
  output logic       s_ready,
  input  logic [7:0] s_data,
  output logic       m_valid,
  input  logic       m_ready,
  output logic [7:0] m_data,
  output logic       sc_clk,
  output logic       sc_cs_n,
  output logic       sc_dout,
  input  logic       sc_din
);
  localparam int DW = (DIV > 1) ? $clog2(DIV) : 1;

  typedef enum logic [1:0] {S_IDLE, S_LOW, S_HIGH} state_t;
  state_t state;

  logic       full, empty, pop;
  logic [7:0] head, tx, rx;
  logic [2:0] bitn;
  logic [DW-1:0] div;
  logic       tick;

  sync_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr_en(s_valid), .wr_data(s_data), .rd_en(pop), .rd_data(head),
    .full, .empty, .count());

  assign s_ready = !full;
  assign tick    = div == DW'(DIV-1);
  assign pop     = state == S_IDLE && !empty && !m_valid;
  assign sc_dout = tx[7];

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      div     <= '0;
      tx      <= '0;
      rx      <= '0;
      bitn    <= '0;
      sc_clk  <= 1'b0;
      sc_cs_n <= 1'b1;
      m_valid <= 1'b0;
      m_data  <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      div <= (state == S_IDLE || tick) ? '0 : div + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (pop) begin
            tx      <= head;
            bitn    <= '0;
            sc_cs_n <= 1'b0;
            state   <= S_LOW;
          end else if (empty && !m_valid) begin
            sc_cs_n <= 1'b1;
          end
        end
        S_LOW: if (tick) begin           // rising edge: sample the reply bit
          sc_clk <= 1'b1;
          rx     <= {rx[6:0], sc_din};
          state  <= S_HIGH;
        end
        S_HIGH: if (tick) begin          // falling edge: next bit
          sc_clk <= 1'b0;
          tx     <= {tx[6:0], 1'b0};
          bitn   <= bitn + 1'b1;
          if (bitn == 3'd7) begin
            m_valid <= 1'b1;
            m_data  <= rx;
            state   <= S_IDLE;
          end else begin
            state <= S_LOW;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
