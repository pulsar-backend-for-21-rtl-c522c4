// mmio_regs: the control registers the processing system writes over AXI4-Lite.
//
// They hold the start-capture command (arm), the enable of each stream, the sample
// shift, the pause after each packet, and the destination IPv4 address and UDP port of
// each of the N streams. The destination of the packet in flight is selected by tid
// and presented on dest_ip / dest_port for the 100 GbE block. A status word reads back
// whether the streams are running.
//
// Register map (byte addresses, 32-bit words):
//   0x00 control      bit 0 arm (start capturing)            reset 0
//   0x04 tx_enable    bits N-1:0, one per stream              reset all ones
//   0x08 shift_count  bits 3:0                                reset 8
//   0x0C pause_count  bits 7:0                                reset 4
//   0x10 status       bit 0 data_valid (read only)
//   0x40 + 4*i        destination IPv4 address of stream i    reset 0
//   0x60 + 4*i        destination UDP port of stream i (15:0) reset 0
// Other addresses read 0 and ignore writes.
//
// Interface: AXI4-Lite slave (one write and one read in flight, OKAY responses) on clk.
// Timing: a write is accepted when both address and data are present and answered in
// the next cycle; a read answers one cycle after its address is accepted. The set of
// registers follows the paper; the map, reset values and bus behaviour are this
// design's choices.
module mmio_regs
  import pb_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic              clk,
  input  logic              rst,
  // AXI4-Lite
  input  logic [7:0]        s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [7:0]        s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // settings
  output logic              arm,
  output logic [N-1:0]      tx_enable,
  output logic [3:0]        shift_count,
  output logic [7:0]        pause_count,
  input  logic              data_valid,
  input  logic [TID_W-1:0]  tid,
  output logic [31:0]       dest_ip,
  output logic [15:0]       dest_port
);
  logic [31:0] ip_r   [N];
  logic [15:0] port_r [N];
  logic        do_wr, do_rd;

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign do_wr     = s_awready;
  assign s_arready = s_arvalid && !s_rvalid;
  assign do_rd     = s_arready;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  assign dest_ip   = ip_r[tid];
  assign dest_port = port_r[tid];

  always_ff @(posedge clk) begin
    if (rst) begin
      arm         <= 1'b0;
      tx_enable   <= '1;
      shift_count <= 4'd8;
      pause_count <= 8'd4;
      for (int i = 0; i < N; i++) begin
        ip_r[i]   <= '0;
        port_r[i] <= '0;
      end
      s_bvalid <= 1'b0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (do_wr) begin
        s_bvalid <= 1'b1;
        case (s_awaddr)
          8'h00: arm         <= s_wdata[0];
          8'h04: tx_enable   <= s_wdata[N-1:0];
          8'h08: shift_count <= s_wdata[3:0];
          8'h0C: pause_count <= s_wdata[7:0];
          default: begin
            for (int i = 0; i < N; i++) begin
              if (s_awaddr == 8'(8'h40 + 4*i)) ip_r[i]   <= s_wdata;
              if (s_awaddr == 8'(8'h60 + 4*i)) port_r[i] <= s_wdata[15:0];
            end
          end
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (do_rd) begin
        s_rvalid <= 1'b1;
        s_rdata  <= '0;
        case (s_araddr)
          8'h00: s_rdata <= 32'(arm);
          8'h04: s_rdata <= 32'(tx_enable);
          8'h08: s_rdata <= 32'(shift_count);
          8'h0C: s_rdata <= 32'(pause_count);
          8'h10: s_rdata <= 32'(data_valid);
          default: begin
            for (int i = 0; i < N; i++) begin
              if (s_araddr == 8'(8'h40 + 4*i)) s_rdata <= ip_r[i];
              if (s_araddr == 8'(8'h60 + 4*i)) s_rdata <= 32'(port_r[i]);
            end
          end
        endcase
      end
    end
  end

  // AXI rule: a response stays until it is taken.
  a_b_hold: assert property (@(posedge clk) disable iff (rst) (s_bvalid && !s_bready) |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (rst)
    (s_rvalid && !s_rready) |=> (s_rvalid && $stable(s_rdata)));
endmodule
