// tb_data_interface: random bus writes and reads to every region. Checks that
// exactly the addressed write strobe fires, that address fields reach the
// right outputs, that control bits start runs and loads, and that each read
// returns the right source one cycle later with host_rvalid.
module tb_data_interface;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        host_we, host_re, host_rvalid, rec_we, run_start, load_start, wm_we, pix_we, sb_we, sb_rdata;
  logic [15:0] host_addr;
  logic [31:0] host_wdata, host_rdata, rec_rdata, status, wm_rdata;
  logic [2:0]  rec_addr;
  logic [11:0] wm_addr;
  logic [9:0]  pix_addr, sb_addr;
  logic [4:0]  nm_word;
  logic [5:0]  nm_nce;
  logic [3:0]  nm_rdata, cnt_idx, winner;
  logic [7:0]  cnt_rdata;
  data_interface dut (.*);
  int checks = 0, failures = 0;

  // read sources: simple functions of the address outputs
  assign rec_rdata = 32'h1000_0000 | 32'(rec_addr);
  assign wm_rdata  = 32'hA000_0000 | 32'(wm_addr);
  assign status    = 32'h0000_5A5A;
  assign sb_rdata  = ^sb_addr;
  assign nm_rdata  = nm_word[3:0] ^ nm_nce[3:0];
  assign cnt_rdata = 8'(cnt_idx) + 8'd7;
  assign winner    = 4'd9;

  function automatic logic [31:0] expect_rd(logic [15:0] a);
    case (a[15:12])
      4'h0: return (a[11:3] == 0) ? (32'h1000_0000 | 32'(a[2:0])) : (a[11:0] == 12'h011) ? 32'h5A5A : 32'h0;
      4'h1: return 32'hA000_0000 | 32'(a[11:0]);
      4'h3: return 32'(^a[9:0]);
      4'h4: return 32'(a[3:0] ^ a[8:5]);
      4'h5: return a[4] ? 32'd9 : 32'(8'(a[3:0]) + 8'd7);
      default: return 32'h0;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_we = 0; host_re = 0; host_addr = 0; host_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      logic [15:0] a;
      logic [3:0]  rg;
      rg = 4'($urandom % 7);
      a  = {rg, 12'($urandom)};
      if ($urandom % 4 == 0) a = {4'h0, 12'($urandom % 24)};
      @(negedge clk);
      host_addr = a; host_wdata = $urandom;
      if ($urandom % 2) begin
        host_we = 1; host_re = 0; #1;
        checks++;
        if (rec_we     !== (a[15:12] == 0 && a[11:3] == 0) ||
            run_start  !== (a == 16'h0010 && host_wdata[0]) ||
            load_start !== (a == 16'h0010 && host_wdata[1]) ||
            wm_we !== (a[15:12] == 1) || pix_we !== (a[15:12] == 2) || sb_we !== (a[15:12] == 3) ||
            wm_addr !== a[11:0] || pix_addr !== a[9:0] || sb_addr !== a[9:0] || rec_addr !== a[2:0]) begin
          failures++;
          if (failures < 10) $display("WRITE MISMATCH addr=%h", a);
        end
      end else begin
        logic [31:0] e;
        e = expect_rd(a);
        host_we = 0; host_re = 1;
        @(negedge clk);
        host_re = 0;
        checks++;
        if (!host_rvalid || host_rdata !== e) begin
          failures++;
          if (failures < 10) $display("READ MISMATCH addr=%h got=%h exp=%h", a, host_rdata, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
