// axil_regs: AXI4-Lite slave between the processing system and the PL.
//
// The published system moves the transmit waveform into the PL and the range profiles out
// of it over AXI; this block is that port. It decodes a 256 KiB window into
// four regions of 8192 32-bit words, selected by address bits [17:15]; the
// word index is address bits [14:2]:
//   0x00000  registers (below)
//   0x08000  channel-estimation reference RAM W[k], write only
//   0x10000  transmit waveform RAM, read/write
//   0x18000  range-profile RAM, {bank, bin}, read only
// Registers (byte offset):
//   0x00 CTRL      rw  bit0 tx_play
//   0x04 CMD       wo  bit0 start sweep, bit1/bit2 release profile bank 0/1,
//                      bit3 clear sticky flags
//   0x08 STATUS    ro  bit0 sweep busy, bit1 sweep done (sticky), bit3:2 bank
//                      full, bit4 last bank written, bit5 capture overrun
//                      (sticky)
//   0x0C TX_LEN    rw  samples per transmit period (reset N_FFT + CP_LEN)
//   0x10 CAP_DELAY rw  DAC-to-ADC loop delay in samples
//   0x14 NUM_BEAMS rw  receive beams per sweep
//   0x18 SETTLE    rw  beam settle time after a trigger, cycles
//   0x1C PROFILES  ro  profiles written in this sweep
//   0x20/0x24 BANKn_BEAM ro  beam index of the profile in bank 0/1
//   0x28 TRIG_COUNT ro GPIO trigger edges since reset
//   0x2C STALLS    ro  cycles the receive pipeline waited on a full bank
// Timing: a write is taken when AWVALID and WVALID are both high and answered
// with BVALID in the next cycle; a read answers RVALID three cycles after the
// AR handshake (the RAMs have registered reads). One transaction of each kind
// is outstanding at most. WSTRB is ignored (32-bit accesses only); all
// responses are OKAY. The map and the register set are this design's own.
// The assertions at the end use rst_n as a synchronous disable while the
// flops use it as an asynchronous reset; lint notes this mixed use, which is
// intended.
module axil_regs
  import isac_pkg::*;
#(
  parameter int unsigned ADDR_W     = 18,
  parameter int unsigned IDX_W      = 13,
  parameter int unsigned BEAM_W     = 16,
  parameter logic [31:0] RST_TX_LEN = 32'(isac_pkg::N_FFT + isac_pkg::CP_LEN),
  parameter logic [31:0] RST_BEAMS  = 32'd21,
  parameter logic [31:0] RST_SETTLE = 32'd256
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // memory write strobes, shared address and data
  output logic              tx_wr_en,
  output logic              ref_wr_en,
  output logic [IDX_W-1:0]  mem_waddr,
  output logic [31:0]       mem_wdata,
  // memory read ports (one cycle latency)
  output logic [IDX_W-1:0]  mem_raddr,
  input  logic [31:0]       tx_rd_data,
  input  logic [31:0]       prof_rd_data,
  // control
  output logic              tx_play,
  output logic [31:0]       tx_len,
  output logic [31:0]       cap_delay,
  output logic [BEAM_W-1:0] num_beams,
  output logic [31:0]       settle_cycles,
  output logic              sweep_start,
  output logic [1:0]        bank_ack,
  // status
  input  logic              sweep_busy,
  input  logic              sweep_done,
  input  logic [1:0]        bank_full,
  input  logic              last_bank,
  input  logic              cap_overrun,
  input  logic [31:0]       profiles,
  input  logic [BEAM_W-1:0] beam_tag0,
  input  logic [BEAM_W-1:0] beam_tag1,
  input  logic [31:0]       trig_count,
  input  logic [31:0]       stall_cycles
);

  localparam logic [2:0] R_REGS = 3'd0, R_REF = 3'd1, R_TX = 3'd2, R_PROF = 3'd3;

  logic [2:0]  wr_region, rd_region;
  logic [5:0]  wr_reg, rd_reg;
  logic        do_write;
  logic        done_sticky, ovr_sticky;
  logic [ADDR_W-1:0] ar_q;
  logic [1:0]  rpipe;           // read in flight, stages 1 and 2
  logic [31:0] reg_rdata;

  // ---------------- write channel ----------------
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign s_bresp   = 2'b00;
  assign do_write  = s_awready;
  assign wr_region = s_awaddr[17:15];
  assign wr_reg    = s_awaddr[7:2];

  assign tx_wr_en  = do_write && wr_region == R_TX;
  assign ref_wr_en = do_write && wr_region == R_REF;
  assign mem_waddr = s_awaddr[IDX_W+1:2];
  assign mem_wdata = s_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid      <= 1'b0;
      tx_play       <= 1'b0;
      tx_len        <= RST_TX_LEN;
      cap_delay     <= '0;
      num_beams     <= BEAM_W'(RST_BEAMS);
      settle_cycles <= RST_SETTLE;
      sweep_start   <= 1'b0;
      bank_ack      <= '0;
      done_sticky   <= 1'b0;
      ovr_sticky    <= 1'b0;
    end else begin
      sweep_start <= 1'b0;
      bank_ack    <= '0;
      if (sweep_done)  done_sticky <= 1'b1;
      if (cap_overrun) ovr_sticky  <= 1'b1;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (do_write) begin
        s_bvalid <= 1'b1;
        if (wr_region == R_REGS) begin
          unique case (wr_reg)
            6'h00: tx_play       <= s_wdata[0];
            6'h01: begin
              sweep_start <= s_wdata[0];
              bank_ack    <= s_wdata[2:1];
              if (s_wdata[3]) begin
                done_sticky <= 1'b0;
                ovr_sticky  <= 1'b0;
              end
              if (s_wdata[0]) done_sticky <= 1'b0;
            end
            6'h03: tx_len        <= s_wdata;
            6'h04: cap_delay     <= s_wdata;
            6'h05: num_beams     <= s_wdata[BEAM_W-1:0];
            6'h06: settle_cycles <= s_wdata;
            default: ;
          endcase
        end
      end
    end
  end

  // ---------------- read channel ----------------
  assign s_arready = !s_rvalid && rpipe == 2'b00;
  assign s_rresp   = 2'b00;
  assign rd_region = ar_q[17:15];
  assign rd_reg    = ar_q[7:2];
  assign mem_raddr = ar_q[IDX_W+1:2];

  always_comb begin
    unique case (rd_reg)
      6'h00:   reg_rdata = {31'b0, tx_play};
      6'h02:   reg_rdata = {26'b0, ovr_sticky, last_bank, bank_full, done_sticky, sweep_busy};
      6'h03:   reg_rdata = tx_len;
      6'h04:   reg_rdata = cap_delay;
      6'h05:   reg_rdata = 32'(num_beams);
      6'h06:   reg_rdata = settle_cycles;
      6'h07:   reg_rdata = profiles;
      6'h08:   reg_rdata = 32'(beam_tag0);
      6'h09:   reg_rdata = 32'(beam_tag1);
      6'h0A:   reg_rdata = trig_count;
      6'h0B:   reg_rdata = stall_cycles;
      default: reg_rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_q     <= '0;
      rpipe    <= '0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      rpipe <= {rpipe[0], s_arvalid && s_arready};
      if (s_arvalid && s_arready) ar_q <= s_araddr;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rpipe[1]) begin
        s_rvalid <= 1'b1;
        unique case (rd_region)
          R_REGS:  s_rdata <= reg_rdata;
          R_TX:    s_rdata <= tx_rd_data;
          R_PROF:  s_rdata <= prof_rd_data;
          default: s_rdata <= '0;
        endcase
      end
    end
  end

  // ---------------- AXI4-Lite response rules ----------------
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
    s_arvalid && s_arready |-> !s_rvalid);

  logic unused;
  assign unused = ^{s_wstrb, wr_region[2], rd_region[2], s_awaddr[1:0], ar_q[1:0]};

endmodule
