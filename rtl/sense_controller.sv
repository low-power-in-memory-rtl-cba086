// sense_controller: sequences one read of a row of the 2T2R array.
//
// A read has the two phases of a precharge sense amplifier. After 'start'
// the row address is latched and the row's word line and source line are
// driven. During PRECHARGE_CYCLES clock cycles SEN is 0 (Q and Qb charge to
// VDD). Then SEN is 1 for SENSE_CYCLES cycles while the bit lines discharge;
// 'sample' is high in the last of these cycles, so the readouts capture Q
// and the XOR at the edge that ends the window, SENSE_CYCLES clock periods
// after SEN rose. 'done' pulses on the following cycle, when the captured
// weights are valid, and SEN, WL and SL return to 0.
// The two phases and the 70 ns window come from the paper; the clock (10 ns,
// so that SENSE_CYCLES = 7 is 70 ns), the precharge length and the
// start/busy/done handshake are this design's choices. 'start' while busy is
// ignored. Latency from 'start' to 'done': PRECHARGE_CYCLES + SENSE_CYCLES + 1
// cycles.
module sense_controller #(
  parameter int unsigned ROWS             = 32,
  parameter int unsigned PRECHARGE_CYCLES = 2,
  parameter int unsigned SENSE_CYCLES     = 7,
  localparam int unsigned AW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW = $clog2(PRECHARGE_CYCLES + SENSE_CYCLES + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] row_addr_in,
  output logic [AW-1:0] row_addr,
  output logic          wl_drv,
  output logic          sl_drv,
  output logic          sen,
  output logic          sample,
  output logic          busy,
  output logic          done
);

  typedef enum logic [1:0] {S_IDLE, S_PRECHARGE, S_SENSE} state_t;

  state_t        state;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cnt      <= '0;
      row_addr <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          row_addr <= row_addr_in;
          cnt      <= '0;
          state    <= S_PRECHARGE;
        end
        S_PRECHARGE: begin
          if (cnt == CW'(PRECHARGE_CYCLES - 1)) begin
            cnt   <= '0;
            state <= S_SENSE;
          end else
            cnt <= cnt + 1'b1;
        end
        S_SENSE: begin
          if (cnt == CW'(SENSE_CYCLES - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
            done  <= 1'b1;
          end else
            cnt <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy   = (state != S_IDLE);
    wl_drv = busy;
    sl_drv = busy;
    sen    = (state == S_SENSE);
    sample = (state == S_SENSE) && (cnt == CW'(SENSE_CYCLES - 1));
  end

  initial begin
    assert (PRECHARGE_CYCLES >= 1 && SENSE_CYCLES >= 1)
      else $error("sense_controller: both phases need at least one cycle");
  end
  // sample is a single-cycle strobe, and done follows it.
  a_done_after_sample: assert property (@(posedge clk) disable iff (!rst_n)
    sample |=> done);

endmodule
