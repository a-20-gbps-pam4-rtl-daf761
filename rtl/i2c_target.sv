// i2c_target: I2C target (slave) giving byte access to the configuration
// registers.
//
// SCL and SDA are synchronized to `clk`, which must be at least about ten
// times faster than SCL; START, STOP and the SCL edges are detected from
// the synchronized samples. A transfer addressed to ADDR is acknowledged.
// Write transfer: the first data byte sets the register pointer, every
// further byte is written to the pointed register (`wr_en` for one clk) and
// the pointer advances. Read transfer: bytes are sent from the pointed
// register, most significant bit first, and the pointer advances after each
// byte; the controller ends with a NACK. A repeated START is accepted, so
// the usual "write pointer, repeated START, read" sequence works. Transfers
// to other addresses are ignored until the next START.
//
// Interface: `sda_oe` = 1 pulls SDA low (open drain); the read side is a
// combinational port (`rd_addr` -> `rd_data`) into the register file.
//
// From the paper: configuration through an I2C target. The 7-bit address,
// the pointer/auto-increment protocol and the oversampling design are this
// design's own choices.
module i2c_target #(
  parameter logic [6:0] ADDR = 7'h2A
) (
  input  logic       clk,
  input  logic       rst_n,     // synchronous, active low
  input  logic       scl,
  input  logic       sda_in,
  output logic       sda_oe,    // 1: drive SDA low
  output logic       wr_en,
  output logic [7:0] wr_addr,
  output logic [7:0] wr_data,
  output logic [7:0] rd_addr,
  input  logic [7:0] rd_data
);

  typedef enum logic [2:0] {
    S_IDLE,   // not addressed: wait for START
    S_RX,     // receiving a byte (address or data)
    S_ACK,    // driving our ACK during the 9th clock
    S_TX,     // sending a byte
    S_RACK    // sampling the controller's ACK/NACK
  } state_e;

  state_e     state_q;
  logic [2:0] scl_s, sda_s;     // synchronizer + edge history
  logic [7:0] shreg_q;
  logic [3:0] cnt_q;
  logic       addr_phase_q;     // byte being received is the address byte
  logic       ptr_phase_q;      // next written byte is the register pointer
  logic       read_q;           // current transfer is a read
  logic       nack_q;           // controller NACKed the last byte
  logic [7:0] ptr_q;
  logic       oe_q;

  logic scl_rise, scl_fall, start_c, stop_c, sda_now;
  always_comb begin
    sda_now  = sda_s[1];
    scl_rise = scl_s[1] & ~scl_s[2];
    scl_fall = ~scl_s[1] & scl_s[2];
    start_c  = scl_s[1] & scl_s[2] & ~sda_s[1] & sda_s[2];
    stop_c   = scl_s[1] & scl_s[2] & sda_s[1] & ~sda_s[2];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      scl_s <= '1;
      sda_s <= '1;
    end else begin
      scl_s <= {scl_s[1:0], scl};
      sda_s <= {sda_s[1:0], sda_in};
    end
  end

  always_ff @(posedge clk) begin
    wr_en <= 1'b0;
    if (!rst_n) begin
      state_q      <= S_IDLE;
      shreg_q      <= '0;
      cnt_q        <= '0;
      addr_phase_q <= 1'b0;
      ptr_phase_q  <= 1'b0;
      read_q       <= 1'b0;
      nack_q       <= 1'b0;
      ptr_q        <= '0;
      oe_q         <= 1'b0;
      wr_addr      <= '0;
      wr_data      <= '0;
    end else if (start_c) begin
      state_q      <= S_RX;
      cnt_q        <= '0;
      addr_phase_q <= 1'b1;
      oe_q         <= 1'b0;
    end else if (stop_c) begin
      state_q <= S_IDLE;
      oe_q    <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: oe_q <= 1'b0;
        S_RX: begin
          if (scl_rise && cnt_q < 4'd8) begin
            shreg_q <= {shreg_q[6:0], sda_now};
            cnt_q   <= cnt_q + 4'd1;
          end else if (scl_fall && cnt_q == 4'd8) begin
            if (addr_phase_q) begin
              addr_phase_q <= 1'b0;
              if (shreg_q[7:1] == ADDR) begin
                read_q      <= shreg_q[0];
                ptr_phase_q <= ~shreg_q[0];
                oe_q        <= 1'b1;
                state_q     <= S_ACK;
              end else begin
                state_q <= S_IDLE;
              end
            end else begin
              if (ptr_phase_q) begin
                ptr_q       <= shreg_q;
                ptr_phase_q <= 1'b0;
              end else begin
                wr_en   <= 1'b1;
                wr_addr <= ptr_q;
                wr_data <= shreg_q;
                ptr_q   <= ptr_q + 8'd1;
              end
              oe_q    <= 1'b1;
              state_q <= S_ACK;
            end
          end
        end
        S_ACK: if (scl_fall) begin
          cnt_q <= '0;
          if (read_q) begin
            shreg_q <= {rd_data[6:0], 1'b0};
            oe_q    <= ~rd_data[7];
            cnt_q   <= 4'd1;
            state_q <= S_TX;
          end else begin
            oe_q    <= 1'b0;
            state_q <= S_RX;
          end
        end
        S_TX: if (scl_fall) begin
          if (cnt_q == 4'd8) begin
            oe_q    <= 1'b0;           // release SDA for the controller's ACK
            ptr_q   <= ptr_q + 8'd1;
            state_q <= S_RACK;
          end else begin
            oe_q    <= ~shreg_q[7];
            shreg_q <= {shreg_q[6:0], 1'b0};
            cnt_q   <= cnt_q + 4'd1;
          end
        end
        S_RACK: begin
          if (scl_rise) nack_q <= sda_now;
          else if (scl_fall) begin
            if (!nack_q) begin
              shreg_q <= {rd_data[6:0], 1'b0};
              oe_q    <= ~rd_data[7];
              cnt_q   <= 4'd1;
              state_q <= S_TX;
            end else begin
              state_q <= S_IDLE;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign sda_oe  = oe_q;
  assign rd_addr = ptr_q;

endmodule
