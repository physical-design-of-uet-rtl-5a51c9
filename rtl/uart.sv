// uart: serial port of the microcontroller (8 data bits, no parity, 1 stop).
//
// Transmitter: a write to DATA fills a one-byte holding register (if it is
// full the write is dropped); the shifter takes the byte as soon as it is idle
// and sends start bit, eight data bits LSB first and a stop bit, each bit lasting
// DIV clocks. Receiver: rx passes a two-flop synchroniser; a falling edge starts
// a frame, the start bit is re-checked half a bit later and each data bit is
// sampled in its middle. A complete frame with a valid stop bit lands in the
// receive register and sets rx_full; if rx_full was still set the new byte is
// kept and rx_overrun is set. Reading DATA returns the received byte and clears
// rx_full and rx_overrun. irq is a level: (IE[0] & rx_full) | (IE[1] & tx
// holding register empty). Registers: 0x0 DATA, 0x4 STATUS {rx_overrun,
// rx_full, tx_busy, tx_full}, 0x8 DIV (clocks per bit, >= 2), 0xC IE. One cycle
// read latency. The paper names the UART only; all of this is this design's
// own choice.
module uart
  import rvmcu_pkg::*;
#(
  parameter logic [15:0] DIV_RESET = 16'd868
) (
  input  logic      clk,
  input  logic      rst,
  input  dbus_req_t req,
  output dbus_rsp_t rsp,
  output logic      tx,
  input  logic      rx,
  output logic      irq
);

  typedef enum logic [1:0] {IDLE, START, DATA, STOP} uart_state_e;

  logic [15:0] div;
  logic [1:0]  ie;
  // transmitter
  logic [7:0]  tx_hold, tx_shift;
  logic        tx_full;
  uart_state_e tx_st;
  logic [15:0] tx_cnt;
  logic [2:0]  tx_bit;
  // receiver
  logic [1:0]  rx_sync;
  logic        rx_prev;
  uart_state_e rx_st;
  logic [15:0] rx_cnt;
  logic [2:0]  rx_bit;
  logic [7:0]  rx_shift, rx_data;
  logic        rx_full, rx_overrun;

  logic [3:0]  off;
  logic [31:0] rdata;
  logic        wr, rd_data;

  assign off     = req.addr[3:0];
  assign wr      = req.valid && req.we;
  assign rd_data = req.valid && !req.we && off == 4'h0;

  always_comb begin
    unique case (off)
      4'h0:    rdata = {24'h0, rx_data};
      4'h4:    rdata = {28'h0, rx_overrun, rx_full, tx_st != IDLE, tx_full};
      4'h8:    rdata = {16'h0, div};
      4'hC:    rdata = {30'h0, ie};
      default: rdata = '0;
    endcase
  end

  assign irq = (ie[0] && rx_full) || (ie[1] && !tx_full);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      rsp        <= DBUS_RSP_IDLE;
      div        <= DIV_RESET;
      ie         <= '0;
      tx_hold    <= '0;
      tx_full    <= 1'b0;
      tx_shift   <= '0;
      tx_st      <= IDLE;
      tx_cnt     <= '0;
      tx_bit     <= '0;
      tx         <= 1'b1;
      rx_sync    <= 2'b11;
      rx_prev    <= 1'b1;
      rx_st      <= IDLE;
      rx_cnt     <= '0;
      rx_bit     <= '0;
      rx_shift   <= '0;
      rx_data    <= '0;
      rx_full    <= 1'b0;
      rx_overrun <= 1'b0;
    end else begin
      rsp.valid <= req.valid;
      if (req.valid && !req.we) rsp.rdata <= rdata;

      // ---------------- register writes
      if (wr && off == 4'h0 && req.strb[0] && !tx_full) begin
        tx_hold <= req.wdata[7:0];
        tx_full <= 1'b1;
      end
      if (wr && off == 4'h8) div <= 16'(apply_strb({16'h0, div}, req.wdata, req.strb));
      if (wr && off == 4'hC && req.strb[0]) ie <= req.wdata[1:0];

      // ---------------- transmitter
      unique case (tx_st)
        IDLE: begin
          tx <= 1'b1;
          if (tx_full) begin
            tx_shift <= tx_hold;
            tx_full  <= 1'b0;
            tx_st    <= START;
            tx_cnt   <= div - 16'd1;
            tx       <= 1'b0;
          end
        end
        START, DATA, STOP: begin
          if (tx_cnt != 0) begin
            tx_cnt <= tx_cnt - 16'd1;
          end else begin
            tx_cnt <= div - 16'd1;
            if (tx_st == START) begin
              tx_st  <= DATA;
              tx_bit <= '0;
              tx     <= tx_shift[0];
            end else if (tx_st == DATA) begin
              if (tx_bit == 3'd7) begin
                tx_st <= STOP;
                tx    <= 1'b1;
              end else begin
                tx_bit <= tx_bit + 3'd1;
                tx     <= tx_shift[tx_bit + 3'd1];
              end
            end else begin
              tx_st <= IDLE;
              tx    <= 1'b1;
            end
          end
        end
      endcase

      // ---------------- receiver
      rx_sync <= {rx_sync[0], rx};
      rx_prev <= rx_sync[1];
      if (rd_data) begin
        rx_full    <= 1'b0;
        rx_overrun <= 1'b0;
      end
      unique case (rx_st)
        IDLE: if (rx_prev && !rx_sync[1]) begin
          rx_st  <= START;
          rx_cnt <= (div >> 1) - 16'd1;
        end
        START: begin
          if (rx_cnt != 0) rx_cnt <= rx_cnt - 16'd1;
          else if (rx_sync[1]) rx_st <= IDLE;        // glitch, not a start bit
          else begin
            rx_st  <= DATA;
            rx_cnt <= div - 16'd1;
            rx_bit <= '0;
          end
        end
        DATA: begin
          if (rx_cnt != 0) rx_cnt <= rx_cnt - 16'd1;
          else begin
            rx_shift <= {rx_sync[1], rx_shift[7:1]};
            rx_cnt   <= div - 16'd1;
            rx_bit   <= rx_bit + 3'd1;
            if (rx_bit == 3'd7) rx_st <= STOP;
          end
        end
        STOP: begin
          if (rx_cnt != 0) rx_cnt <= rx_cnt - 16'd1;
          else begin
            rx_st <= IDLE;
            if (rx_sync[1]) begin
              rx_data <= rx_shift;
              rx_full <= 1'b1;
              if (rx_full && !rd_data) rx_overrun <= 1'b1;
            end
          end
        end
      endcase
    end
  end

endmodule
