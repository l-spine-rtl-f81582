// data_interface: host word bus of the accelerator.
//
// The host controller (a small RISC-V core in the published system, not part
// of this RTL) reaches every memory and register through a 16-bit word
// address bus. host_addr[15:12] selects a region:
//   0x0  0x000-0x007 map record registers (r/w); 0x010 control (w: bit 0
//        starts an inference, bit 1 starts the weight load); 0x011 status (r)
//   0x1  synaptic weight memory, 4096 x 32 bit (r/w)
//   0x2  encoder pixel memory, 1024 x 8 bit (w)
//   0x3  spike buffer, 1024 x 1 bit (r/w)
//   0x4  neuron memory: addr[4:0] word, addr[10:5] engine, 4 lane spikes (r)
//   0x5  spike counter: 0x00-0x0f counts, 0x10 winner (r)
// Writes take effect on the clock edge of host_we. A read (host_re) returns
// host_rdata with host_rvalid one cycle later; the read sources are
// combinational and are sampled here. Unmapped reads return 0. Address map,
// widths and latency are this design's choices.
module data_interface #(
  parameter int unsigned WM_AW  = 12,
  parameter int unsigned PIX_AW = 10,
  parameter int unsigned SB_AW  = 10,
  parameter int unsigned KW     = 4,
  parameter int unsigned CNT_W  = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              host_we,
  input  logic              host_re,
  input  logic [15:0]       host_addr,
  input  logic [31:0]       host_wdata,
  output logic [31:0]       host_rdata,
  output logic              host_rvalid,
  // map record
  output logic              rec_we,
  output logic [2:0]        rec_addr,
  input  logic [31:0]       rec_rdata,
  // control / status
  output logic              run_start,
  output logic              load_start,
  input  logic [31:0]       status,
  // weight memory
  output logic              wm_we,
  output logic [WM_AW-1:0]  wm_addr,
  input  logic [31:0]       wm_rdata,
  // pixel memory
  output logic              pix_we,
  output logic [PIX_AW-1:0] pix_addr,
  // spike buffer
  output logic              sb_we,
  output logic [SB_AW-1:0]  sb_addr,
  input  logic              sb_rdata,
  // neuron memory
  output logic [4:0]        nm_word,
  output logic [5:0]        nm_nce,
  input  logic [3:0]        nm_rdata,
  // spike counter
  output logic [KW-1:0]     cnt_idx,
  input  logic [CNT_W-1:0]  cnt_rdata,
  input  logic [KW-1:0]     winner
);

  logic [3:0] region;
  logic [31:0] rd_next;

  assign region = host_addr[15:12];

  assign rec_we     = host_we && region == 4'h0 && host_addr[11:3] == '0;
  assign rec_addr   = host_addr[2:0];
  assign run_start  = host_we && region == 4'h0 && host_addr[11:0] == 12'h010 && host_wdata[0];
  assign load_start = host_we && region == 4'h0 && host_addr[11:0] == 12'h010 && host_wdata[1];
  assign wm_we      = host_we && region == 4'h1;
  assign wm_addr    = host_addr[WM_AW-1:0];
  assign pix_we     = host_we && region == 4'h2;
  assign pix_addr   = host_addr[PIX_AW-1:0];
  assign sb_we      = host_we && region == 4'h3;
  assign sb_addr    = host_addr[SB_AW-1:0];
  assign nm_word    = host_addr[4:0];
  assign nm_nce     = host_addr[10:5];
  assign cnt_idx    = host_addr[KW-1:0];

  always_comb begin
    rd_next = '0;
    unique case (region)
      4'h0: if (host_addr[11:3] == '0)            rd_next = rec_rdata;
            else if (host_addr[11:0] == 12'h011) rd_next = status;
      4'h1: rd_next = wm_rdata;
      4'h3: rd_next = 32'(sb_rdata);
      4'h4: rd_next = 32'(nm_rdata);
      4'h5: rd_next = host_addr[4] ? 32'(winner) : 32'(cnt_rdata);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rdata  <= '0;
      host_rvalid <= 1'b0;
    end else begin
      host_rvalid <= host_re;
      if (host_re) host_rdata <= rd_next;
    end
  end

endmodule
