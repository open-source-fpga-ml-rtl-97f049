// axi_write_mover: output data mover of the accelerator (the OUT_BUS master).
//
// On start it takes N_ELEMS/PACK words of PACK elements (IN_W bits each) from
// the output local buffer, widens every element to ELEM_W bits (sign
// extension, or zero extension with SIGN_EXT = 0 for class indices; a plain
// numeric conversion as in the paper's top-level listing)
// and writes them to off-chip memory at base_addr over an AXI4 write channel,
// DATA_W/ELEM_W elements per memory word, element 0 in the low bits.
//
// Bursts: INCR bursts of at most MAX_BURST beats, never crossing a 4 KiB
// boundary; the address of a burst is sent before its data, and the next
// burst starts after the write response of the one before. A last, partly
// filled beat only enables the bytes of real elements. One element is
// serialised per cycle. done pulses when the last write response has
// arrived, so the results are in memory when the accelerator reports done;
// err is set by a non-OKAY response. The burst rules and the error flag are
// this design's choices.
module axi_write_mover
  import tinyml_pkg::*;
#(
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned DATA_W    = 64,
  parameter int unsigned ELEM_W    = 16,
  parameter int unsigned IN_W      = 8,
  parameter int unsigned N_ELEMS   = 1,
  parameter int unsigned PACK      = 1,
  parameter int unsigned MAX_BURST = 16,
  parameter bit          SIGN_EXT  = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [ADDR_W-1:0]     base_addr,
  output logic                  busy,
  output logic                  done,
  output logic                  err,
  // stream in
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [PACK*IN_W-1:0]  in_data,
  // AXI4 write address channel
  output logic [ADDR_W-1:0]     m_axi_awaddr,
  output logic [7:0]            m_axi_awlen,
  output logic [2:0]            m_axi_awsize,
  output logic [1:0]            m_axi_awburst,
  output logic                  m_axi_awvalid,
  input  logic                  m_axi_awready,
  // AXI4 write data channel
  output logic [DATA_W-1:0]     m_axi_wdata,
  output logic [DATA_W/8-1:0]   m_axi_wstrb,
  output logic                  m_axi_wlast,
  output logic                  m_axi_wvalid,
  input  logic                  m_axi_wready,
  // AXI4 write response channel
  input  logic [1:0]            m_axi_bresp,
  input  logic                  m_axi_bvalid,
  output logic                  m_axi_bready
);
  localparam int unsigned EPB    = DATA_W / ELEM_W;
  localparam int unsigned NBEATS = (N_ELEMS + EPB - 1) / EPB;
  localparam int unsigned BYTES  = DATA_W / 8;
  localparam int unsigned EB     = ELEM_W / 8;              // bytes per element
  localparam int unsigned EW     = $clog2(N_ELEMS + 1);
  localparam int unsigned BW     = $clog2(NBEATS + 1);
  localparam int unsigned PW     = (PACK > 1) ? $clog2(PACK) : 1;
  localparam int unsigned KW     = (EPB > 1) ? $clog2(EPB) : 1;

  typedef enum logic [1:0] {A_IDLE, A_ADDR, A_DATA, A_RESP} aw_state_e;

  aw_state_e          astate;
  logic [ADDR_W-1:0]  next_addr;
  logic [BW-1:0]      beats_left;     // beats whose burst is not yet requested
  logic [8:0]         burst_len;
  logic [8:0]         beat_in_burst;
  logic [8:0]         cur_len;        // length of the burst in flight
  logic               active;

  logic [PACK*IN_W-1:0] word_q;
  logic                 word_full;
  logic [PW-1:0]        pack_k;
  logic [EW-1:0]        elems_left;   // elements not yet serialised

  logic [DATA_W-1:0]  beat_q;
  logic [BYTES-1:0]   strb_q;
  logic [KW-1:0]      beat_k;
  logic               beat_ready;     // a complete beat waits for the W channel

  always_comb begin
    logic [12:0] to_4k;
    logic [31:0] len;
    to_4k = 13'((32'h1000 - 32'(next_addr[11:0])) / BYTES);
    len   = 32'(MAX_BURST);
    if (32'(beats_left) < len) len = 32'(beats_left);
    if (32'(to_4k) < len)      len = 32'(to_4k);
    burst_len = 9'(len);
  end

  assign busy          = active;
  assign in_ready      = active && !word_full;
  assign m_axi_awaddr  = next_addr;
  assign m_axi_awlen   = 8'(burst_len - 1'b1);
  assign m_axi_awsize  = 3'($clog2(BYTES));
  assign m_axi_awburst = AXI_BURST_INCR;
  assign m_axi_awvalid = (astate == A_ADDR);
  assign m_axi_wdata   = beat_q;
  assign m_axi_wstrb   = strb_q;
  assign m_axi_wvalid  = (astate == A_DATA) && beat_ready;
  assign m_axi_wlast   = (beat_in_burst == cur_len - 1'b1);
  assign m_axi_bready  = (astate == A_RESP);

  logic [IN_W-1:0] e;       // element being serialised
  assign e = word_q[pack_k*IN_W +: IN_W];

  logic serialise;
  assign serialise = word_full && !beat_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      astate        <= A_IDLE;
      next_addr     <= '0;
      beats_left    <= '0;
      beat_in_burst <= '0;
      cur_len       <= '0;
      active        <= 1'b0;
      word_q        <= '0;
      word_full     <= 1'b0;
      pack_k        <= '0;
      elems_left    <= '0;
      beat_q        <= '0;
      strb_q        <= '0;
      beat_k        <= '0;
      beat_ready    <= 1'b0;
      done          <= 1'b0;
      err           <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active     <= 1'b1;
        next_addr  <= base_addr;
        beats_left <= BW'(NBEATS);
        elems_left <= EW'(N_ELEMS);
        astate     <= A_ADDR;
        pack_k     <= '0;
        beat_k     <= '0;
        strb_q     <= '0;
        err        <= 1'b0;
      end else if (active) begin
        // take a stream word
        if (in_valid && in_ready) begin
          word_q    <= in_data;
          word_full <= 1'b1;
          pack_k    <= '0;
        end
        // serialise one element into the beat
        if (serialise) begin
          beat_q[beat_k*ELEM_W +: ELEM_W] <= SIGN_EXT ? ELEM_W'(signed'(e)) : ELEM_W'(e);
          strb_q[beat_k*EB +: EB]         <= '1;
          elems_left <= elems_left - 1'b1;
          if (pack_k == PW'(PACK - 1)) begin
            word_full <= 1'b0;
            pack_k    <= '0;
          end else begin
            pack_k <= pack_k + 1'b1;
          end
          if (beat_k == KW'(EPB - 1) || elems_left == EW'(1)) begin
            beat_ready <= 1'b1;
            beat_k     <= '0;
          end else begin
            beat_k <= beat_k + 1'b1;
          end
        end
        // address / data / response sequencing
        case (astate)
          A_ADDR: if (m_axi_awready) begin
            astate        <= A_DATA;
            beat_in_burst <= '0;
            cur_len       <= burst_len;
            beats_left    <= beats_left - BW'(burst_len);
          end
          A_DATA: if (m_axi_wvalid && m_axi_wready) begin
            beat_ready <= 1'b0;
            strb_q     <= '0;
            if (m_axi_wlast) astate <= A_RESP;
            else             beat_in_burst <= beat_in_burst + 1'b1;
          end
          A_RESP: if (m_axi_bvalid) begin
            if (m_axi_bresp != AXI_RESP_OKAY) err <= 1'b1;
            next_addr <= next_addr + ADDR_W'(cur_len * BYTES);
            if (beats_left == '0) begin
              astate <= A_IDLE;
              active <= 1'b0;
              done   <= 1'b1;
            end else begin
              astate <= A_ADDR;
            end
          end
          default: astate <= A_IDLE;
        endcase
      end
    end
  end

  initial begin
    assert (N_ELEMS % PACK == 0) else $fatal(1, "axi_write_mover: PACK must divide N_ELEMS");
    assert (DATA_W % ELEM_W == 0 && ELEM_W % 8 == 0) else $fatal(1, "axi_write_mover: bad ELEM_W");
    assert (ELEM_W >= IN_W) else $fatal(1, "axi_write_mover: ELEM_W narrower than IN_W");
  end

  // AXI rules: address and data, once valid, hold until accepted.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr))
    else $error("axi_write_mover: AW request changed before acceptance");
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_wvalid && !m_axi_wready |=> m_axi_wvalid && $stable(m_axi_wdata))
    else $error("axi_write_mover: W beat changed before acceptance");
endmodule
