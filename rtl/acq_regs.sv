// acq_regs: control and status registers through which the processor (the
// PYNQ software on the RFSoC's ARM cores in the paper) configures and
// watches the acquisition fabric.
//
// The paper says only that the processor orchestrates configuration and
// control; the register set, the map (see photonids_pkg) and the simple bus
// are this design's choice. The bus is a plain word-addressed register port:
// a write (`wr_en`, `wr_addr`, `wr_data`) takes effect at the clock edge; a
// read (`rd_en`, `rd_addr`) returns `rd_data` with `rd_valid` one cycle
// later. Writing CTRL issues one-cycle command pulses: bit0 Start (arm the
// trigger), bit1 Stop (return to IDLE), bit2 Clear (zero time base and
// counters). THRESHOLD (signed, low 16 bits) and TIMEOUT are read/write and
// reset to THRESH_RESET and 0 (timeout off). STATUS, the three event
// counters and the 64-bit sample time are read-only; reading TS_LO latches
// the high word so that a following read of TS_HI returns the same time.
// Unmapped addresses read as zero.
module acq_regs
  import photonids_pkg::*;
#(
  parameter int          TIMEOUT_W    = 32,
  parameter int          FILL_W       = 6,
  parameter logic [15:0] THRESH_RESET = 16'd2000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // register port
  input  logic                 wr_en,
  input  logic [3:0]           wr_addr,
  input  logic [31:0]          wr_data,
  input  logic                 rd_en,
  input  logic [3:0]           rd_addr,
  output logic [31:0]          rd_data,
  output logic                 rd_valid,
  // commands and configuration
  output logic                 start,
  output logic                 stop,
  output logic                 clear,
  output sample_t              threshold,
  output logic [TIMEOUT_W-1:0] armed_timeout,
  // status
  input  acq_state_e           state,
  input  logic [FILL_W-1:0]    fill,
  input  logic [COUNT_W-1:0]     n_trig,
  input  logic [COUNT_W-1:0]     n_stored,
  input  logic [COUNT_W-1:0]     n_dropped,
  input  logic [TSTAMP_W-1:0]      timestamp
);

  logic [31:0] ts_hi_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      start         <= 1'b0;
      stop          <= 1'b0;
      clear         <= 1'b0;
      threshold     <= THRESH_RESET;
      armed_timeout <= '0;
      rd_data       <= '0;
      rd_valid      <= 1'b0;
      ts_hi_q       <= '0;
    end else begin
      start <= wr_en && (wr_addr == REG_CTRL) && wr_data[0];
      stop  <= wr_en && (wr_addr == REG_CTRL) && wr_data[1];
      clear <= wr_en && (wr_addr == REG_CTRL) && wr_data[2];
      if (wr_en && wr_addr == REG_THRESHOLD) threshold     <= wr_data[SAMPLE_W-1:0];
      if (wr_en && wr_addr == REG_TIMEOUT)   armed_timeout <= wr_data[TIMEOUT_W-1:0];

      rd_valid <= rd_en;
      if (rd_en) begin
        unique case (rd_addr)
          REG_THRESHOLD: rd_data <= 32'(signed'(threshold));
          REG_TIMEOUT:   rd_data <= 32'(armed_timeout);
          REG_STATUS:    rd_data <= {16'd0, 8'(fill), 6'd0, state};
          REG_N_TRIG:    rd_data <= 32'(n_trig);
          REG_N_STORED:  rd_data <= 32'(n_stored);
          REG_N_DROP:    rd_data <= 32'(n_dropped);
          REG_TS_LO: begin
            rd_data <= timestamp[31:0];
            ts_hi_q <= timestamp[63:32];
          end
          REG_TS_HI:     rd_data <= ts_hi_q;
          default:       rd_data <= '0;
        endcase
      end
    end
  end

endmodule
