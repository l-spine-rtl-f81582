// spike_encoder: rate (Poisson-style) encoder from pixels to spikes.
//
// The host stores up to NPIX 8-bit pixel intensities in the encoder's pixel
// memory. A start pulse encodes pixels 0..n_pix-1, one per cycle: pixel p
// gives spike = (pixel > r), r being the top byte of a 16-bit LFSR that
// advances once per pixel, so a pixel of intensity x fires with probability
// about x/256 in every timestep. Each spike is written to spike-buffer
// address p (sb_we/sb_waddr/sb_wdata). done pulses for one cycle after the
// last pixel; busy is high meanwhile. Encoding n pixels takes n cycles.
// The LFSR is x^16 + x^14 + x^13 + x^11 + 1 (Fibonacci form), seeded with SEED
// at reset and never reseeded, so successive timesteps see fresh numbers.
// An encoder fed by an LFSR is from the published design flow; the LFSR
// polynomial, width and comparison are this design's choices.
module spike_encoder #(
  parameter int unsigned NPIX = 1024,
  parameter logic [15:0] SEED = 16'hACE1,
  localparam int unsigned AW = $clog2(NPIX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pix_we,
  input  logic [AW-1:0] pix_waddr,
  input  logic [7:0]    pix_wdata,
  input  logic          start,
  input  logic [AW:0]   n_pix,
  output logic          sb_we,
  output logic [AW-1:0] sb_waddr,
  output logic          sb_wdata,
  output logic          busy,
  output logic          done
);

  logic [7:0]  pix [NPIX];
  logic [15:0] lfsr;
  logic [AW:0] idx;

  always_ff @(posedge clk) begin
    if (pix_we) pix[pix_waddr] <= pix_wdata;
  end

  assign sb_we    = busy;
  assign sb_waddr = idx[AW-1:0];
  assign sb_wdata = pix[idx[AW-1:0]] > lfsr[15:8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= SEED;
      idx  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          idx  <= '0;
          busy <= (n_pix != 0);
          done <= (n_pix == 0);
        end
      end else begin
        lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
        if (idx == n_pix - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        idx <= idx + 1'b1;
      end
    end
  end

endmodule
