// control_interface: the "Control Interface" of both node types.  It connects
// the node's serial link to the control PC with an internal register bus,
// through which the PC sets the operating mode, loads beamforming coefficients
// and bin masks, and reads back status, error counters and the coefficients
// themselves.
//
// The paper says the nodes are configured and queried through a UART with bit
// strings produced by programs on the control PC; the byte protocol here is
// this design's choice:
//   write: 'W' (0x57), address[15:8], address[7:0], data[31:24] .. data[7:0]
//   read:  'R' (0x52), address[15:8], address[7:0]; the node answers with
//          data[31:24] .. data[7:0].
// Other command bytes are ignored.  On the bus a write is one `bus_we` cycle;
// a read is one `bus_re` cycle and `bus_rdata` is taken RD_LAT cycles later.
module control_interface #(
  parameter int unsigned CLKS_PER_BIT = 543,
  parameter int unsigned RD_LAT       = 3
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        uart_rxd,
  output logic        uart_txd,
  output logic [15:0] bus_addr,
  output logic [31:0] bus_wdata,
  output logic        bus_we,
  output logic        bus_re,
  input  logic [31:0] bus_rdata
);
  typedef enum logic [2:0] {C_IDLE, C_ADDR, C_DATA, C_RWAIT, C_SEND} cst_t;
  cst_t        st;
  logic        rv, is_wr;
  logic [7:0]  rb;
  logic [2:0]  nb;
  logic [31:0] rd_sh;
  logic [3:0]  lat;
  logic        tx_start, tx_busy, tx_busy_d;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (.clk, .rst, .rxd(uart_rxd), .valid(rv), .data(rb));
  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (.clk, .rst, .start(tx_start), .data(rd_sh[31:24]),
                                               .busy(tx_busy), .txd(uart_txd));

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= C_IDLE; is_wr <= 1'b0; nb <= '0; bus_addr <= '0; bus_wdata <= '0;
      bus_we <= 1'b0; bus_re <= 1'b0; rd_sh <= '0; lat <= '0; tx_start <= 1'b0;
      tx_busy_d <= 1'b0;
    end else begin
      bus_we    <= 1'b0;
      bus_re    <= 1'b0;
      tx_start  <= 1'b0;
      tx_busy_d <= tx_busy;
      unique case (st)
        C_IDLE: if (rv && (rb == 8'h57 || rb == 8'h52)) begin
          is_wr <= (rb == 8'h57); nb <= '0; st <= C_ADDR;
        end
        C_ADDR: if (rv) begin
          bus_addr <= {bus_addr[7:0], rb};
          nb <= nb + 3'd1;
          if (nb == 3'd1) begin
            nb <= '0;
            if (is_wr) st <= C_DATA;
            else begin st <= C_RWAIT; bus_re <= 1'b1; lat <= '0; end
          end
        end
        C_DATA: if (rv) begin
          bus_wdata <= {bus_wdata[23:0], rb};
          nb <= nb + 3'd1;
          if (nb == 3'd3) begin bus_we <= 1'b1; st <= C_IDLE; end
        end
        C_RWAIT: begin
          lat <= lat + 4'd1;
          if (32'(lat) == RD_LAT - 1) begin
            rd_sh <= bus_rdata; st <= C_SEND; nb <= '0; tx_start <= 1'b1;
          end
        end
        C_SEND: begin
          // next byte once the transmitter has finished the current one
          if (tx_busy_d && !tx_busy) begin
            if (nb == 3'd3) st <= C_IDLE;
            else begin
              nb <= nb + 3'd1; rd_sh <= {rd_sh[23:0], 8'h00}; tx_start <= 1'b1;
            end
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
