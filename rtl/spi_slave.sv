// spi_slave: SPI slave of a core (frame logic, memory access unit and the
// configuration register unit).
//
// Frame: 46 SCK cycles while cs_n is low. Cycles 0-22 shift the 23-bit
// command a[22:0] in on MOSI, MSB first; it is latched into the address
// register at the end of cycle 22. Cycles 23-45 are the data field: d[22:0]
// on MOSI for configuration and memory writes, or, for a memory read, the
// addressed byte on MISO, MSB first, in cycles 38-45 (0 before). Command
// fields: [22] 1 = memory access, 0 = configuration write; [21] 1 = write,
// 0 = read; [20:19] memory (00 neuron state, 01 feedforward synapses,
// 10 recurrent synapses); [18:0] register index or row/byte address. A new
// frame may follow immediately; raising cs_n aborts a frame.
// Frame layout and fields follow the paper's SPI timing figure; the cs_n
// line and the exact first MISO data cycle (the paper says "around cycle 36",
// this design uses 38 so that the eight bits end with the frame) are this
// design's choices. MOSI is sampled on SCK rising edges (SPI mode 0).
//
// SCK, cs_n and MOSI are sampled in the core clock domain through two-flop
// synchronisers, so clk must be at least 4x faster than SCK.
//
// Memory access unit: a read raises mem_req at the end of the address phase,
// a write at the end of the data phase; mem_req stays high until the
// controller answers with mem_ack, and a read's byte arrives with mem_rvalid.
// Only the selected core (core-number register = CORE_ID) raises mem_req or
// drives MISO (miso_oe).
module spi_slave
  import flexi_pkg::*;
#(
  parameter logic [7:0] CORE_ID       = 8'd0,
  parameter int         N             = 128,
  parameter bit         DEF_RECURRENT = 1'b0,
  parameter bit         DEF_ATA_T     = 1'b0,
  parameter bit         DEF_SYNAPTIC  = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sck,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output logic        miso_oe,
  // memory access unit -> controller
  output logic        mem_req,
  output logic        mem_we,
  output mem_target_e mem_target,
  output logic [18:0] mem_addr,
  output logic [7:0]  mem_wdata,
  input  logic        mem_ack,
  input  logic [7:0]  mem_rdata,
  input  logic        mem_rvalid,
  // configuration unit
  output cfg_t        cfg
);

  localparam int FIRST_MISO = SPI_FRAME - 8;   // 38

  logic [2:0]  sck_s, cs_s, mosi_s;
  logic        sck_rise, cs_act, mosi_b;
  logic [5:0]  cnt;
  logic [21:0] sh;
  logic [22:0] addr_reg;
  logic [22:0] word;
  logic        rd_frame;
  logic [7:0]  rd_byte;
  logic        cfg_we;
  logic        active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s  <= '0;
      cs_s   <= '1;
      mosi_s <= '0;
    end else begin
      sck_s  <= {sck_s[1:0], sck};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[1:0], mosi};
    end
  end

  assign sck_rise = sck_s[1] && !sck_s[2];
  assign cs_act   = !cs_s[1];
  assign mosi_b   = mosi_s[1];
  assign word     = {sh, mosi_b};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      sh         <= '0;
      addr_reg   <= '0;
      rd_frame   <= 1'b0;
      rd_byte    <= '0;
      mem_req    <= 1'b0;
      mem_we     <= 1'b0;
      mem_target <= MEM_NEUR;
      mem_addr   <= '0;
      mem_wdata  <= '0;
      cfg_we     <= 1'b0;
    end else begin
      cfg_we <= 1'b0;
      if (mem_ack)    mem_req <= 1'b0;
      if (mem_rvalid) rd_byte <= mem_rdata;
      if (!cs_act) begin
        cnt      <= '0;
        rd_frame <= 1'b0;
      end else if (sck_rise) begin
        sh <= word[21:0];
        if (cnt == 6'(SPI_FIELD_W - 1)) begin
          // end of address phase
          addr_reg <= word;
          if (word[22] && !word[21] && active) begin
            rd_frame   <= 1'b1;
            rd_byte    <= '0;
            mem_req    <= 1'b1;
            mem_we     <= 1'b0;
            mem_target <= mem_target_e'(word[20:19]);
            mem_addr   <= word[18:0];
          end
        end
        if (cnt == 6'(SPI_FRAME - 1)) begin
          // end of data phase
          cnt      <= '0;
          rd_frame <= 1'b0;
          if (!addr_reg[22]) cfg_we <= 1'b1;
          else if (addr_reg[21] && active) begin
            mem_req    <= 1'b1;
            mem_we     <= 1'b1;
            mem_target <= mem_target_e'(addr_reg[20:19]);
            mem_addr   <= addr_reg[18:0];
            mem_wdata  <= word[7:0];
          end
        end else begin
          cnt <= cnt + 6'd1;
        end
      end
    end
  end

  // Latched data word of a configuration frame, held for the write pulse.
  logic [22:0] cfg_data;
  always_ff @(posedge clk)
    if (cs_act && sck_rise && cnt == 6'(SPI_FRAME - 1)) cfg_data <= word;

  config_regs #(.CORE_ID(CORE_ID), .N(N), .DEF_RECURRENT(DEF_RECURRENT),
                .DEF_ATA_T(DEF_ATA_T), .DEF_SYNAPTIC(DEF_SYNAPTIC)) u_cfg (
    .clk, .rst_n, .wr_en(cfg_we), .wr_idx(addr_reg[18:0]), .wr_data(cfg_data),
    .cfg, .active);

  // MISO: bit for frame cycle cnt, presented once cnt has advanced to it.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) miso <= 1'b0;
    else if (rd_frame && cnt >= 6'(FIRST_MISO) && cnt <= 6'(SPI_FRAME - 1))
      miso <= rd_byte[3'(6'(SPI_FRAME - 1) - cnt)];
    else
      miso <= 1'b0;
  end
  assign miso_oe = rd_frame;

endmodule
