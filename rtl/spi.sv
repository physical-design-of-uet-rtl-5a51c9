// spi: SPI master of the microcontroller.
//
// Mode 0 (clock idles low, data changes on the falling edge and is sampled on
// the rising edge), MSB first, 8-bit transfers. Writing DATA while idle loads
// the shift register, puts bit 7 on mosi and starts 8 clock periods; each half
// period lasts DIV clocks. miso is sampled on every rising sclk edge. At the end
// the received byte is readable in DATA and done is set (cleared by a DATA read
// or the next transfer). cs_n is driven by software through CTRL[0] so that
// multi-byte transactions stay selected. irq = CTRL[1] & done. Registers: 0x0
// DATA, 0x4 STATUS {done, busy}, 0x8 DIV (>= 1), 0xC CTRL {irq_en, cs}. One
// cycle read latency; a DATA write while busy is ignored. The paper names the
// SPI block only; everything here is this design's own choice.
module spi
  import rvmcu_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  dbus_req_t req,
  output dbus_rsp_t rsp,
  output logic      sclk,
  output logic      mosi,
  input  logic      miso,
  output logic      cs_n,
  output logic      irq
);

  logic [15:0] div, cnt;
  logic [1:0]  ctrl;
  logic [7:0]  shift, rx_data;
  logic [3:0]  edges;      // rising edges still to come
  logic        busy, done;
  logic [3:0]  off;
  logic [31:0] rdata;

  assign off = req.addr[3:0];

  always_comb begin
    unique case (off)
      4'h0:    rdata = {24'h0, rx_data};
      4'h4:    rdata = {30'h0, done, busy};
      4'h8:    rdata = {16'h0, div};
      4'hC:    rdata = {30'h0, ctrl};
      default: rdata = '0;
    endcase
  end

  assign cs_n = !ctrl[0];
  assign irq  = ctrl[1] && done;
  assign mosi = shift[7];

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      rsp     <= DBUS_RSP_IDLE;
      div     <= 16'd4;
      cnt     <= '0;
      ctrl    <= '0;
      shift   <= '0;
      rx_data <= '0;
      edges   <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      sclk    <= 1'b0;
    end else begin
      rsp.valid <= req.valid;
      if (req.valid && !req.we) rsp.rdata <= rdata;
      if (req.valid && !req.we && off == 4'h0) done <= 1'b0;
      if (req.valid && req.we) begin
        unique case (off)
          4'h0: if (!busy && req.strb[0]) begin
            shift <= req.wdata[7:0];
            busy  <= 1'b1;
            done  <= 1'b0;
            edges <= 4'd8;
            cnt   <= (div == 0) ? 16'd0 : div - 16'd1;
          end
          4'h8: div  <= 16'(apply_strb({16'h0, div}, req.wdata, req.strb));
          4'hC: if (req.strb[0]) ctrl <= req.wdata[1:0];
          default: ;
        endcase
      end
      if (busy) begin
        if (cnt != 0) begin
          cnt <= cnt - 16'd1;
        end else begin
          cnt <= (div == 0) ? 16'd0 : div - 16'd1;
          if (!sclk) begin                    // rising edge: sample
            sclk    <= 1'b1;
            rx_data <= {rx_data[6:0], miso};
            edges   <= edges - 4'd1;
          end else begin                      // falling edge: shift
            sclk  <= 1'b0;
            shift <= {shift[6:0], 1'b0};
            if (edges == 0) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
