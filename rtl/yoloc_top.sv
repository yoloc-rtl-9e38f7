// yoloc_top: the YOLoC chip, a ReBranch-assisted ROM-CiM accelerator.
//
// N_ROM ROM-CiM macros hold the fixed, pretrained weights (backbone trunk
// layers and the ReBranch Res-Compress / Res-Decompress layers); one SRAM-CiM
// macro holds the small trainable Res-Conv and prediction weights loaded at
// power-on; a cache holds feature maps; the controller (with its IO FIFO)
// moves data and does activation and pooling. This is the organisation the
// paper gives. The number of ROM macros (2), the cache size and the direct
// controller-to-macro wiring in place of the paper's unspecified NoC are this
// design's own. Off-chip memory (DRAM) is outside: its traffic arrives as
// commands on the cmd port (cache writes, SRAM-CiM weight loads).
//
// Interface: cmd_valid/cmd_ready/cmd (yoloc_pkg::cmd_t) in, resp_valid/
// resp_data out (one cycle per CRD command), stall (a command waits for a busy
// macro), m_busy (per macro, for observation). ROM macro i has ROM contents
// rom_bit(i+1, row, col).
module yoloc_top
  import yoloc_pkg::*;
#(
  parameter int unsigned N_ROM = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_t              cmd,
  output logic              resp_valid,
  output cword_t            resp_data,
  output logic              stall,
  output logic [N_ROM:0]    m_busy
);
  localparam int unsigned NM = N_ROM + 1;

  logic                     c_we, c_re;
  logic [CADDR_W-1:0]       c_waddr, c_raddr;
  cword_t                   c_wdata, c_rdata;
  logic [NM-1:0]            m_start, m_done;
  logic [$clog2(GROUPS)-1:0] m_group;
  act_t [ACTIVE_ROWS-1:0]   m_act;
  logic                     m_in_signed, m_acc_clear;
  acc_t [NM-1:0][N_OUT-1:0] m_result;
  logic                     s_we;
  logic [$clog2(ROWS)-1:0]  s_wrow;
  logic [$clog2(COLS/SRAM_WR_W)-1:0] s_wword;
  logic [SRAM_WR_W-1:0]     s_wdata;

  yoloc_ctrl #(.N_ROM(N_ROM)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .resp_valid, .resp_data,
    .c_we, .c_waddr, .c_wdata, .c_re, .c_raddr, .c_rdata,
    .m_start, .m_group, .m_act, .m_in_signed, .m_acc_clear, .m_busy, .m_result,
    .s_we, .s_wrow, .s_wword, .s_wdata, .stall);

  cache u_cache (.clk, .we(c_we), .waddr(c_waddr), .wdata(c_wdata), .re(c_re),
                 .raddr(c_raddr), .rdata(c_rdata));

  for (genvar i = 0; i < N_ROM; i++) begin : g_rom
    rom_cim_macro #(.SEED(i + 1)) u_rom (
      .clk, .rst_n, .start(m_start[i]), .group(m_group), .act(m_act),
      .in_signed(m_in_signed), .acc_clear(m_acc_clear), .busy(m_busy[i]),
      .done(m_done[i]), .result(m_result[i]));
  end

  sram_cim_macro u_sram (
    .clk, .rst_n, .we(s_we), .wrow(s_wrow), .wword(s_wword), .wdata(s_wdata),
    .start(m_start[N_ROM]), .group(m_group), .act(m_act), .in_signed(m_in_signed),
    .acc_clear(m_acc_clear), .busy(m_busy[N_ROM]), .done(m_done[N_ROM]),
    .result(m_result[N_ROM]));
endmodule
