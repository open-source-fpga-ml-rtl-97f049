// ctrl_regs: AXI4-Lite control bundle of the accelerator (s_axi, CTRL_BUS).
//
// The processor programs the accelerator through these memory-mapped
// registers, starts it and polls for completion, as the paper's bare-metal
// flow does. Register map (32-bit registers; the layout imitates an
// HLS-generated control block and is this design's choice):
//   0x00 CTRL   bit0 start (write 1; reads 1 until the run is accepted)
//               bit1 done  (set at the end of a run, cleared when CTRL is read)
//               bit2 idle  bit3 ready (pulse: run accepted), read only
//   0x10 IN     byte address of the input array in off-chip memory
//   0x18 OUT    byte address of the output array in off-chip memory
//   0x20 CYCLES clock cycles of the last run, from start accepted to done
//   0x24 STATUS bit0 input bus error, bit1 output bus error (read only)
// Writes and reads to other offsets return OKAY and read zero.
//
// Handshake: a write is taken when AWVALID and WVALID are both high (one
// write at a time) and answered with BVALID in the next cycle; a read is
// answered with RVALID in the cycle after ARVALID. ap_start is handed to the
// core as a one-cycle start pulse while the core is idle; core_done ends the
// run.
module ctrl_regs
  import tinyml_pkg::*;
#(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // to / from the core
  output logic              core_start,
  output logic [31:0]       in_addr,
  output logic [31:0]       out_addr,
  input  logic              core_done,
  input  logic              in_err,
  input  logic              out_err
);
  logic        ap_start, ap_done, running;
  logic [31:0] cycles, cycle_cnt;
  logic [1:0]  status;

  logic do_write, do_read;
  assign do_write      = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = do_write;
  assign s_axi_wready  = do_write;
  assign do_read       = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_arready = do_read;
  assign s_axi_bresp   = AXI_RESP_OKAY;
  assign s_axi_rresp   = AXI_RESP_OKAY;

  assign core_start = ap_start && !running;

  function automatic logic [31:0] apply_strb(input logic [31:0] old, input logic [31:0] d,
                                             input logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[b*8 +: 8] = strb[b] ? d[b*8 +: 8] : old[b*8 +: 8];
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ap_start     <= 1'b0;
      ap_done      <= 1'b0;
      running      <= 1'b0;
      in_addr      <= '0;
      out_addr     <= '0;
      cycles       <= '0;
      cycle_cnt    <= '0;
      status       <= '0;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      // run control
      if (core_start) begin
        ap_start  <= 1'b0;
        running   <= 1'b1;
        cycle_cnt <= '0;
        status    <= '0;
      end else if (running) begin
        cycle_cnt <= cycle_cnt + 1'b1;
        if (in_err)  status[0] <= 1'b1;
        if (out_err) status[1] <= 1'b1;
        if (core_done) begin
          running <= 1'b0;
          ap_done <= 1'b1;
          cycles  <= cycle_cnt + 1'b1;
        end
      end

      // register writes
      if (do_write) begin
        s_axi_bvalid <= 1'b1;
        case (s_axi_awaddr)
          ADDR_W'(REG_CTRL):   if (s_axi_wstrb[0] && s_axi_wdata[CTRL_START_BIT]) ap_start <= 1'b1;
          ADDR_W'(REG_IN_LO):  in_addr  <= apply_strb(in_addr,  s_axi_wdata, s_axi_wstrb);
          ADDR_W'(REG_OUT_LO): out_addr <= apply_strb(out_addr, s_axi_wdata, s_axi_wstrb);
          default: ;
        endcase
      end else if (s_axi_bvalid && s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end

      // register reads
      if (do_read) begin
        s_axi_rvalid <= 1'b1;
        case (s_axi_araddr)
          ADDR_W'(REG_CTRL): begin
            s_axi_rdata <= '0;
            s_axi_rdata[CTRL_START_BIT] <= ap_start;
            s_axi_rdata[CTRL_DONE_BIT]  <= ap_done;
            s_axi_rdata[CTRL_IDLE_BIT]  <= !running && !ap_start;
            s_axi_rdata[CTRL_READY_BIT] <= core_start;
            ap_done <= core_done && running;   // clear on read
          end
          ADDR_W'(REG_IN_LO):  s_axi_rdata <= in_addr;
          ADDR_W'(REG_OUT_LO): s_axi_rdata <= out_addr;
          ADDR_W'(REG_CYCLES): s_axi_rdata <= cycles;
          ADDR_W'(REG_STATUS): s_axi_rdata <= {30'd0, status};
          default:             s_axi_rdata <= '0;
        endcase
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once valid, holds until accepted.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid)
    else $error("ctrl_regs: BVALID dropped");
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata))
    else $error("ctrl_regs: read data changed before acceptance");
endmodule
