// i2c_rheo -- I2C master that sets the MCP40D17 digital rheostats.
//
// The gain of the reference stage (R_in) and the transimpedance of every WE channel
// (R_out,j) are set by 7-bit rheostats, R = R_min + R_max * N / 127. All MCP40D17 parts
// answer to the same fixed 7-bit address (0101110), so each one sits on a bus of its own:
// device 0 is R_in, device j (1..4) is R_out,j. On `go` the master writes wiper[d] to every
// device d in turn with the chip's write sequence
//     START, address+W (0x5C), ACK, command 0x00, ACK, {0, N[6:0]}, ACK, STOP.
// Bits are generated from a quarter-bit tick of QTR fabric clocks (QTR = 125 gives
// 100 kHz at 50 MHz): SDA changes while SCL is low and is sampled for ACK while SCL is
// high. Outputs are open-drain enables (1 = pull the line low). A missing ACK sets the
// sticky `nack` bit of that device; `done` pulses when all NDEV writes have finished.
// The rheostats and the use of I2C follow the publication; the bus arrangement and the
// sequencing over devices are this design's choice.
module i2c_rheo #(
  parameter int unsigned NDEV = 5,
  parameter int unsigned QTR  = 125,
  parameter logic [6:0]  ADDR = 7'b0101110
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            go,
  input  logic [6:0]      wiper [NDEV],
  output logic [NDEV-1:0] scl_oe,
  output logic [NDEV-1:0] sda_oe,
  input  logic [NDEV-1:0] sda_in,
  output logic            busy,
  output logic            done,
  output logic [NDEV-1:0] nack
);
  localparam int unsigned NSYM = 29;            // START, 3 x (8 bits + ACK), STOP

  logic [$clog2(QTR+1)-1:0]  tick;
  logic [1:0]                qph;               // quarter of the current symbol
  logic [4:0]                sym;               // 0 = START, 1..27 bits, 28 = STOP
  logic [$clog2(NDEV+1)-1:0] dev;
  logic [26:0]               frame;             // 27 bit slots, MSB first
  logic                      scl_v, sda_v;      // wanted line levels
  logic [4:0]                bidx;
  logic                      is_ack;

  assign bidx   = sym - 5'd1;
  assign is_ack = (sym >= 1) && (sym <= 27) && ((bidx == 8) || (bidx == 17) || (bidx == 26));

  // line levels per symbol and quarter
  always_comb begin
    scl_v = 1'b1;
    sda_v = 1'b1;
    if (busy) begin
      if (sym == 0) begin                       // START: SDA falls while SCL high
        scl_v = (qph != 2'd3);
        sda_v = (qph < 2'd2);
      end else if (32'(sym) == NSYM - 1) begin       // STOP: SDA rises while SCL high
        scl_v = (qph != 2'd0);
        sda_v = (qph >= 2'd2);
      end else begin
        scl_v = (qph == 2'd1) || (qph == 2'd2);
        sda_v = is_ack ? 1'b1 : frame[26 - bidx];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick   <= '0;
      qph    <= '0;
      sym    <= '0;
      dev    <= '0;
      frame  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      nack   <= '0;
      scl_oe <= '0;
      sda_oe <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        scl_oe <= '0;
        sda_oe <= '0;
        if (go) begin
          busy  <= 1'b1;
          dev   <= '0;
          nack  <= '0;
          sym   <= '0;
          qph   <= '0;
          tick  <= '0;
          frame <= {ADDR, 1'b0, 1'b1, 8'h00, 1'b1, 1'b0, wiper[0], 1'b1};
        end
      end else begin
        scl_oe <= '0;
        sda_oe <= '0;
        scl_oe[dev] <= ~scl_v;
        sda_oe[dev] <= ~sda_v;
        if (32'(tick) == QTR - 1) begin
          tick <= '0;
          // sample ACK at the end of the second SCL-high quarter
          if (is_ack && qph == 2'd2 && sda_in[dev]) nack[dev] <= 1'b1;
          qph <= qph + 1'b1;
          if (qph == 2'd3) begin
            if (32'(sym) == NSYM - 1) begin
              sym <= '0;
              if (32'(dev) == NDEV - 1) begin
                busy <= 1'b0;
                done <= 1'b1;
              end else begin
                dev   <= dev + 1'b1;
                frame <= {ADDR, 1'b0, 1'b1, 8'h00, 1'b1, 1'b0, wiper[dev + 1'b1], 1'b1};
              end
            end else begin
              sym <= sym + 1'b1;
            end
          end
        end else begin
          tick <= tick + 1'b1;
        end
      end
    end
  end
endmodule
