// Camera configuration over I2C (exposure and zoom).
//
// A small register table (the "LUT") holds the sensor registers to write:
//   0x09 shutter width   = exposure input (light exposure)
//   0x22 row mode        = 0x0000 when zoomed in, 0x0011 (2x skip) out
//   0x23 column mode     = same
//   0x03 row size - 1    = 959 zoomed in, 1919 out
//   0x04 column size - 1 = 1279 zoomed in, 2559 out
// so the sensor always delivers 1280x960: zoomed out it skips every
// other row and column of a 2560x1920 window, zoomed in it reads the
// centre 1280x960 window without skipping.
// Each entry is one I2C write of four bytes: device address (write),
// register, data high, data low. The whole table is written after reset
// and again whenever exposure or zoom changes.
//
// The I2C master works in quarter-bit steps of CLK_DIV clocks: a start
// condition, 4 x (8 data bits + acknowledge slot), a stop condition. SCL
// and SDA are open drain: *_oe = 1 pulls the line low, 0 releases it.
// A high SDA in an acknowledge slot sets ack_err (sticky until the table
// is written again).
//
// Interface: clk is the 50 MHz board clock (CLK_DIV = 125 gives 100 kHz);
// done is high while the sensor holds the current settings.
// The role of the module follows the paper; register numbers and values
// come from the sensor's data sheet, the rest is this design's.
module i2c_ccd_config #(
  parameter int          CLK_DIV  = 125,
  parameter logic [7:0]  DEV_ADDR = 8'hBA
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] exposure,
  input  logic        zoom,
  output logic        scl_oe,
  output logic        sda_oe,
  input  logic        sda_in,
  output logic        done,
  output logic        ack_err
);
  localparam int N_REGS = 5;
  localparam int DW     = $clog2(CLK_DIV);

  typedef enum logic [2:0] {S_IDLE, S_START, S_BIT, S_ACK, S_STOP} i2c_state_e;

  // ----------------------------------------------------------- table
  logic [15:0] exp_q;
  logic        zoom_q;
  logic [2:0]  entry;
  logic [31:0] word;       // device, register, data high, data low

  always_comb begin
    unique case (entry)
      3'd0:    word = {DEV_ADDR, 8'h09, exp_q};
      3'd1:    word = {DEV_ADDR, 8'h22, zoom_q ? 16'h0000 : 16'h0011};
      3'd2:    word = {DEV_ADDR, 8'h23, zoom_q ? 16'h0000 : 16'h0011};
      3'd3:    word = {DEV_ADDR, 8'h03, zoom_q ? 16'd959  : 16'd1919};
      default: word = {DEV_ADDR, 8'h04, zoom_q ? 16'd1279 : 16'd2559};
    endcase
  end

  // ------------------------------------------------------- bit engine
  i2c_state_e     state;
  logic [DW-1:0]  div;
  logic [1:0]     phase;
  logic [1:0]     byte_i;
  logic [2:0]     bit_i;
  logic           tick;

  assign tick = (div == DW'(CLK_DIV - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; div <= '0; phase <= '0; byte_i <= '0; bit_i <= '0;
      entry <= '0; exp_q <= '0; zoom_q <= 1'b0; done <= 1'b0; ack_err <= 1'b0;
      scl_oe <= 1'b0; sda_oe <= 1'b0;
    end else begin
      div <= tick ? '0 : div + 1'b1;

      unique case (state)
        S_IDLE: begin
          scl_oe <= 1'b0;
          sda_oe <= 1'b0;
          if (!done || exposure != exp_q || zoom != zoom_q) begin
            exp_q   <= exposure;
            zoom_q  <= zoom;
            entry   <= '0;
            done    <= 1'b0;
            ack_err <= 1'b0;
            phase   <= '0;
            state   <= S_START;
          end
        end

        S_START: if (tick) begin
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: begin scl_oe <= 1'b0; sda_oe <= 1'b0; end   // both high
            2'd1: begin scl_oe <= 1'b0; sda_oe <= 1'b1; end   // SDA falls
            2'd2: begin scl_oe <= 1'b1; sda_oe <= 1'b1; end   // SCL falls
            default: begin
              byte_i <= '0;
              bit_i  <= 3'd7;
              state  <= S_BIT;
            end
          endcase
        end

        S_BIT: if (tick) begin
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: begin scl_oe <= 1'b1; sda_oe <= !word[8*(3 - int'(byte_i)) + int'(bit_i)]; end
            2'd1: scl_oe <= 1'b0;
            2'd2: scl_oe <= 1'b0;
            default: begin
              scl_oe <= 1'b1;
              if (bit_i == 3'd0) state <= S_ACK;
              bit_i <= bit_i - 1'b1;
            end
          endcase
        end

        S_ACK: if (tick) begin
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: begin scl_oe <= 1'b1; sda_oe <= 1'b0; end   // release SDA
            2'd1: scl_oe <= 1'b0;
            2'd2: begin scl_oe <= 1'b0; if (sda_in) ack_err <= 1'b1; end
            default: begin
              scl_oe <= 1'b1;
              bit_i  <= 3'd7;
              if (byte_i == 2'd3) state <= S_STOP;
              else begin
                byte_i <= byte_i + 1'b1;
                state  <= S_BIT;
              end
            end
          endcase
        end

        default: if (tick) begin   // S_STOP
          phase <= phase + 1'b1;
          unique case (phase)
            2'd0: begin scl_oe <= 1'b1; sda_oe <= 1'b1; end
            2'd1: begin scl_oe <= 1'b0; sda_oe <= 1'b1; end   // SCL rises
            2'd2: begin scl_oe <= 1'b0; sda_oe <= 1'b0; end   // SDA rises
            default: begin
              if (entry == 3'(N_REGS - 1)) begin
                done  <= 1'b1;
                state <= S_IDLE;
              end else begin
                entry <= entry + 1'b1;
                state <= S_START;
              end
            end
          endcase
        end
      endcase
    end
  end

endmodule
