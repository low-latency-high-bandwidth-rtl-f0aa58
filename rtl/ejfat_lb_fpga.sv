// ejfat_lb_fpga: the load balancer as one FPGA with NUM_PORTS network ports.
//
// The paper quotes 200 Gb/s as the most one FPGA carries, with a line rate of
// 100 Gb/s or more; one ejfat_lb_dp pipeline carries 512 bits per cycle
// (128 Gb/s at 250 MHz). This top therefore holds NUM_PORTS = 2 data-plane
// pipelines, one per port, each forwarding the packets that arrive on its
// port and sending them out on the same port index. The control plane's table
// writes (`cfg`) go to every pipeline, so all ports see identical instance,
// epoch, calendar and member tables and a packet is handled the same way on
// either port. Each port has its own drop and forward counters.
//
// Interface: per port a valid/ready input stream and output stream (arrays
// indexed by port) with 512-bit data, 64-bit keep and last; one configuration
// write port; counters per port. Timing per port is that of ejfat_lb_dp
// (first output beat 5 cycles after the first input beat of a multi-beat
// packet). Replicating the tables per port, rather than sharing multi-ported
// memories, is this design's choice; the paper gives no FPGA structure.
module ejfat_lb_fpga
  import ejfat_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid [NUM_PORTS],
  output logic        s_ready [NUM_PORTS],
  input  data_t       s_data  [NUM_PORTS],
  input  keep_t       s_keep  [NUM_PORTS],
  input  logic        s_last  [NUM_PORTS],
  output logic        m_valid [NUM_PORTS],
  input  logic        m_ready [NUM_PORTS],
  output data_t       m_data  [NUM_PORTS],
  output keep_t       m_keep  [NUM_PORTS],
  output logic        m_last  [NUM_PORTS],
  input  cfg_wr_t     cfg,
  output logic [31:0] cnt_fwd         [NUM_PORTS],
  output logic [31:0] cnt_drop_fmt    [NUM_PORTS],
  output logic [31:0] cnt_drop_inst   [NUM_PORTS],
  output logic [31:0] cnt_drop_epoch  [NUM_PORTS],
  output logic [31:0] cnt_drop_member [NUM_PORTS]
);

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    ejfat_lb_dp u_dp (
      .clk, .rst_n,
      .s_valid(s_valid[p]), .s_ready(s_ready[p]), .s_data(s_data[p]),
      .s_keep(s_keep[p]), .s_last(s_last[p]),
      .m_valid(m_valid[p]), .m_ready(m_ready[p]), .m_data(m_data[p]),
      .m_keep(m_keep[p]), .m_last(m_last[p]),
      .cfg,
      .cnt_fwd(cnt_fwd[p]), .cnt_drop_fmt(cnt_drop_fmt[p]),
      .cnt_drop_inst(cnt_drop_inst[p]), .cnt_drop_epoch(cnt_drop_epoch[p]),
      .cnt_drop_member(cnt_drop_member[p])
    );
  end

endmodule
