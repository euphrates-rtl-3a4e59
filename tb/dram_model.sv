// dram_model: behavioural DRAM behind the interconnect, for testbenches only.
// A byte-addressed sparse memory with an AXI4 write slave (its own clock) and
// an AXI4 read slave (its own clock), INCR bursts, one burst at a time per
// side.  `wr_gap` / `rd_gap` insert that many idle cycles before each beat to
// model a slow or busy memory.  The testbench reads and writes `mem` directly
// for set-up and checking.
module dram_model #(
  parameter int unsigned DW = 128,
  parameter int unsigned RLAT = 4
) (
  input  logic            wclk,
  input  logic            awvalid,
  output logic            awready,
  input  logic [31:0]     awaddr,
  input  logic [7:0]      awlen,
  input  logic            wvalid,
  output logic            wready,
  input  logic [DW-1:0]   wdata,
  input  logic            wlast,
  output logic            bvalid,
  input  logic            bready,
  input  logic            rclk,
  input  logic            arvalid,
  output logic            arready,
  input  logic [31:0]     araddr,
  input  logic [7:0]      arlen,
  output logic            rvalid,
  input  logic            rready,
  output logic [DW-1:0]   rdata,
  output logic            rlast
);
  localparam int BPB = DW / 8;
  byte unsigned mem [int unsigned];
  int wr_gap = 0, rd_gap = 0;
  int wbursts = 0, rbursts = 0, wbeats = 0, rbeats = 0, wlast_errs = 0;

  function automatic byte unsigned rd8(input int unsigned a);
    return mem.exists(a) ? mem[a] : 8'h00;
  endfunction

  // write side
  // Both sides are clocked state machines updated with non-blocking
  // assignments, so the handshakes are free of races with the design.
  int unsigned wa, ra;
  int wn, wb, wgc, rn, rb, rgc;
  logic [1:0] ws = 0;
  logic rs = 0;
  initial begin awready = 0; wready = 0; bvalid = 0; arready = 0; rvalid = 0; rdata = '0; rlast = 0; end

  always @(posedge wclk) begin
    unique case (ws)
      2'd0: if (awvalid && !awready) awready <= 1;
            else if (awvalid && awready) begin
              awready <= 0; wa = awaddr; wn = int'(awlen) + 1; wb = 0; wgc = wr_gap; ws <= 2'd1; wbursts++;
            end
      2'd1: if (wready && wvalid) begin
              for (int k = 0; k < BPB; k++) mem[wa + k] = wdata[k*8 +: 8];
              if (wlast != (wb == wn - 1)) wlast_errs++;
              wa += BPB; wb++; wbeats++;
              wready <= 0; wgc = wr_gap;
              if (wb == wn) begin bvalid <= 1; ws <= 2'd2; end
            end else if (!wready) begin
              if (wgc > 0) wgc--; else wready <= 1;
            end
      default: if (bvalid && bready) begin bvalid <= 0; ws <= 2'd0; end
    endcase
  end

  always @(posedge rclk) begin
    if (!rs) begin
      if (arvalid && !arready) arready <= 1;
      else if (arvalid && arready) begin
        arready <= 0; ra = araddr; rn = int'(arlen) + 1; rb = 0; rgc = RLAT; rs <= 1; rbursts++;
      end
    end else if (rvalid && rready) begin
      rvalid <= 0; rlast <= 0; ra += BPB; rb++; rbeats++; rgc = rd_gap;
      if (rb == rn) rs <= 0;
    end else if (!rvalid) begin
      if (rgc > 0) rgc--;
      else begin
        logic [DW-1:0] d;
        for (int k = 0; k < BPB; k++) d[k*8 +: 8] = rd8(ra + k);
        rvalid <= 1; rdata <= d; rlast <= (rb == rn - 1);
      end
    end
  end
endmodule
