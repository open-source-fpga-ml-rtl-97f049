// axi_read_mover: input data mover of the accelerator (the IN_BUS master).
//
// On start it reads N_ELEMS input elements of ELEM_W bits from off-chip
// memory at base_addr over an AXI4 read channel, converts each one and packs
// PACK converted elements into one stream word for the input local buffer,
// as the data-mover loop of an hls4ml top-level function does. The memory
// word is DATA_W bits wide and carries DATA_W/ELEM_W elements, element 0 in
// the low bits; a wide bus raises the transfer bandwidth.
//
// Element conversion, following the paper's top-level listing: the element is
// an unsigned fixed-point number with 8 integer and 8 fraction bits (16,8),
// it is shifted right by SHIFT = 8 bits (a division by 256) and the OUT_W
// low bits are kept: for the defaults the stream element is the element's
// integer byte, read as an 8-bit fraction.
//
// Bursts: INCR bursts of at most MAX_BURST beats, never crossing a 4 KiB
// boundary, one burst in flight at a time. The base address must be aligned
// to DATA_W/8 bytes. One element is unpacked per cycle, so the mover moves one
// element per clock when memory keeps up. done pulses when the last word has
// been handed to the stream; err is set if any beat returns a non-OKAY
// response. Burst sizing, the one-burst-in-flight rule and the error flag are
// this design's choices.
module axi_read_mover
  import tinyml_pkg::*;
#(
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned DATA_W    = 64,
  parameter int unsigned ELEM_W    = 16,
  parameter int unsigned OUT_W     = 8,
  parameter int unsigned SHIFT     = 8,
  parameter int unsigned N_ELEMS   = 490,
  parameter int unsigned PACK      = 10,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [ADDR_W-1:0]       base_addr,
  output logic                    busy,
  output logic                    done,
  output logic                    err,
  // AXI4 read address channel
  output logic [ADDR_W-1:0]       m_axi_araddr,
  output logic [7:0]              m_axi_arlen,
  output logic [2:0]              m_axi_arsize,
  output logic [1:0]              m_axi_arburst,
  output logic                    m_axi_arvalid,
  input  logic                    m_axi_arready,
  // AXI4 read data channel
  input  logic [DATA_W-1:0]       m_axi_rdata,
  input  logic [1:0]              m_axi_rresp,
  input  logic                    m_axi_rlast,
  input  logic                    m_axi_rvalid,
  output logic                    m_axi_rready,
  // packed output stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [PACK*OUT_W-1:0]   out_data
);
  localparam int unsigned EPB    = DATA_W / ELEM_W;               // elements per beat
  localparam int unsigned NBEATS = (N_ELEMS + EPB - 1) / EPB;
  localparam int unsigned BYTES  = DATA_W / 8;
  localparam int unsigned EW     = $clog2(N_ELEMS + 1);
  localparam int unsigned BW     = $clog2(NBEATS + 1);
  localparam int unsigned PW     = (PACK > 1) ? $clog2(PACK) : 1;
  localparam int unsigned KW     = (EPB > 1) ? $clog2(EPB) : 1;

  // address side
  logic [ADDR_W-1:0] next_addr;
  logic [BW-1:0]     beats_left;     // beats not yet requested
  logic              burst_open;     // a burst has been requested, not all beats seen
  logic [8:0]        burst_len;

  // data side
  logic [DATA_W-1:0] beat_q;
  logic              beat_full;
  logic [KW-1:0]     elem_k;         // element within the held beat
  logic [EW-1:0]     elems_left;     // elements not yet unpacked
  logic [PW-1:0]     pack_cnt;
  logic [PACK*OUT_W-1:0] pack_q;

  // Length of the next burst: limited by MAX_BURST, what is left and 4 KiB.
  always_comb begin
    logic [12:0] to_4k;
    logic [31:0] len;
    to_4k = 13'((32'h1000 - 32'(next_addr[11:0])) / BYTES);
    len   = 32'(MAX_BURST);
    if (32'(beats_left) < len) len = 32'(beats_left);
    if (32'(to_4k) < len)      len = 32'(to_4k);
    burst_len = 9'(len);
  end

  assign busy          = (elems_left != '0) || out_valid;
  assign m_axi_araddr  = next_addr;
  assign m_axi_arlen   = 8'(burst_len - 1'b1);
  assign m_axi_arsize  = 3'($clog2(BYTES));
  assign m_axi_arburst = AXI_BURST_INCR;
  assign m_axi_rready  = !beat_full;

  logic [ELEM_W-1:0] raw;   // element being unpacked
  assign raw = beat_q[elem_k*ELEM_W +: ELEM_W];

  logic unpack;       // move one element from the beat into the pack register
  assign unpack = beat_full && (elems_left != '0) && !(out_valid && !out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_addr     <= '0;
      beats_left    <= '0;
      burst_open    <= 1'b0;
      m_axi_arvalid <= 1'b0;
      beat_q        <= '0;
      beat_full     <= 1'b0;
      elem_k        <= '0;
      elems_left    <= '0;
      pack_cnt      <= '0;
      pack_q        <= '0;
      out_valid     <= 1'b0;
      out_data      <= '0;
      done          <= 1'b0;
      err           <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        next_addr  <= base_addr;
        beats_left <= BW'(NBEATS);
        elems_left <= EW'(N_ELEMS);
        burst_open <= 1'b0;
        elem_k     <= '0;
        pack_cnt   <= '0;
        err        <= 1'b0;
      end else begin
        // issue a burst when none is open
        if (!burst_open && !m_axi_arvalid && beats_left != '0) begin
          m_axi_arvalid <= 1'b1;
        end
        if (m_axi_arvalid && m_axi_arready) begin
          m_axi_arvalid <= 1'b0;
          burst_open    <= 1'b1;
          beats_left    <= beats_left - BW'(burst_len);
          next_addr     <= next_addr + ADDR_W'(burst_len * BYTES);
        end
        // take a beat
        if (m_axi_rvalid && m_axi_rready) begin
          beat_q    <= m_axi_rdata;
          beat_full <= 1'b1;
          elem_k    <= '0;
          if (m_axi_rresp != AXI_RESP_OKAY) err <= 1'b1;
          if (m_axi_rlast) burst_open <= 1'b0;
        end
        // unpack one element per cycle
        if (out_valid && out_ready) out_valid <= 1'b0;
        if (unpack) begin
          pack_q[pack_cnt*OUT_W +: OUT_W] <= OUT_W'(raw >> SHIFT);
          elems_left <= elems_left - 1'b1;
          if (elem_k == KW'(EPB - 1) || elems_left == EW'(1)) begin
            beat_full <= 1'b0;
            elem_k    <= '0;
          end else begin
            elem_k <= elem_k + 1'b1;
          end
          if (pack_cnt == PW'(PACK - 1)) begin
            pack_cnt  <= '0;
            out_valid <= 1'b1;
            out_data  <= pack_q;
            out_data[pack_cnt*OUT_W +: OUT_W] <= OUT_W'(raw >> SHIFT);
            if (elems_left == EW'(1)) done <= 1'b1;
          end else begin
            pack_cnt <= pack_cnt + 1'b1;
          end
        end
      end
    end
  end

  initial begin
    assert (N_ELEMS % PACK == 0) else $fatal(1, "axi_read_mover: PACK must divide N_ELEMS");
    assert (DATA_W % ELEM_W == 0) else $fatal(1, "axi_read_mover: ELEM_W must divide DATA_W");
  end

  // AXI rule: an address request, once valid, holds until accepted.
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr))
    else $error("axi_read_mover: AR request changed before acceptance");
  // Stream rule: an output word holds until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("axi_read_mover: output word changed before it was taken");
endmodule
