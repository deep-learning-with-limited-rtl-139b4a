// axi_mem_model: behavioural model of the DDR memory behind its AXI4
// controller, for testbenches only (not synthesizable logic).
//
// An AXI4 slave with a data bus of BW 16-bit words over an array of WORDS
// 16-bit words (byte address / 2, modulo WORDS). Beats are aligned to the bus
// width; lane i of a beat is the word at (beat address / 2) + i, and a write
// lane is stored only when its byte strobes are set. It takes one read burst and one write
// burst at a time, inserts random wait states on every ready/valid it drives
// (STALL_PCT percent of cycles) and returns OKAY responses. It flags bursts that
// cross a 4 KB boundary and counts bursts and beats. Testbenches fill and read
// the array mem directly.
module axi_mem_model #(
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned ADDR_W    = 33,
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned STALL_PCT = 20,
  parameter int unsigned BW        = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                arvalid,
  output logic                arready,
  input  logic [ADDR_W-1:0]   araddr,
  input  logic [7:0]          arlen,
  input  logic [2:0]          arsize,
  input  logic [1:0]          arburst,
  output logic                rvalid,
  input  logic                rready,
  output logic [BW*DATA_W-1:0] rdata,
  output logic                rlast,
  output logic [1:0]          rresp,
  input  logic                awvalid,
  output logic                awready,
  input  logic [ADDR_W-1:0]   awaddr,
  input  logic [7:0]          awlen,
  input  logic [2:0]          awsize,
  input  logic [1:0]          awburst,
  input  logic                wvalid,
  output logic                wready,
  input  logic [BW*DATA_W-1:0] wdata,
  input  logic [BW*DATA_W/8-1:0] wstrb,
  input  logic                wlast,
  output logic                bvalid,
  input  logic                bready,
  output logic [1:0]          bresp
);
  logic [DATA_W-1:0] mem [WORDS];

  int unsigned bursts_rd, bursts_wr, beats_rd, beats_wr, cross_4k, proto_err, splits_4k;

  function automatic bit go();
    return ($urandom_range(99) >= STALL_PCT);
  endfunction

  function automatic int unsigned widx(input logic [ADDR_W-1:0] a);
    return int'((a >> 1) % WORDS);
  endfunction

  // read side
  logic              rd_act;
  logic [ADDR_W-1:0] rd_addr;
  int unsigned       rd_left;

  assign rresp = 2'b00;
  assign bresp = 2'b00;

  always @(posedge clk) begin
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; rlast <= 1'b0; rdata <= '0;
      rd_act <= 1'b0; rd_addr <= '0; rd_left <= 0;
      bursts_rd <= 0; beats_rd <= 0; cross_4k <= 0; proto_err <= 0; splits_4k <= 0;
    end else begin
      if (arvalid && arready) begin
        rd_act   <= 1'b1;
        rd_addr  <= araddr;
        rd_left  <= int'(arlen) + 1;
        bursts_rd <= bursts_rd + 1;
        if (arsize != 3'($clog2(2*BW)) || arburst != 2'b01 || (araddr % (2*BW)) != 0) proto_err <= proto_err + 1;
        if ((araddr >> 12) != ((araddr + 2*BW*(ADDR_W'(arlen))) >> 12)) cross_4k <= cross_4k + 1;
        if (((araddr + 2*BW*(ADDR_W'(arlen) + 1)) & 'hFFF) == 0 && arlen != 8'hFF) splits_4k <= splits_4k + 1;
        arready  <= 1'b0;
      end else begin
        arready <= !rd_act && !arready && go();
      end
      if (rvalid && rready) begin
        beats_rd <= beats_rd + 1;
        rvalid   <= 1'b0;
        if (rlast) rd_act <= 1'b0;
      end
      if (rd_act && (!rvalid || rready) && !(rvalid && rready && rlast) && rd_left > 0 && go()) begin
        rvalid  <= 1'b1;
        for (int i = 0; i < BW; i++) rdata[i*DATA_W +: DATA_W] <= mem[widx(rd_addr + ADDR_W'(2*i))];
        rlast   <= (rd_left == 1);
        rd_addr <= rd_addr + ADDR_W'(2*BW);
        rd_left <= rd_left - 1;
      end
    end
  end

  // write side
  logic              wr_act;
  logic [ADDR_W-1:0] wr_addr;
  int unsigned       wr_left;

  always @(posedge clk) begin
    if (!rst_n) begin
      awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0;
      wr_act <= 1'b0; wr_addr <= '0; wr_left <= 0;
      bursts_wr <= 0; beats_wr <= 0;
    end else begin
      if (awvalid && awready) begin
        wr_act   <= 1'b1;
        wr_addr  <= awaddr;
        wr_left  <= int'(awlen) + 1;
        bursts_wr <= bursts_wr + 1;
        if (awsize != 3'($clog2(2*BW)) || awburst != 2'b01 || (awaddr % (2*BW)) != 0) proto_err <= proto_err + 1;
        if ((awaddr >> 12) != ((awaddr + 2*BW*(ADDR_W'(awlen))) >> 12)) cross_4k <= cross_4k + 1;
        if (((awaddr + 2*BW*(ADDR_W'(awlen) + 1)) & 'hFFF) == 0) splits_4k <= splits_4k + 1;
        awready  <= 1'b0;
      end else begin
        awready <= !wr_act && !bvalid && !awready && go();
      end
      if (wvalid && wready) begin
        for (int i = 0; i < BW; i++) begin
          if (wstrb[2*i +: 2] == 2'b11) mem[widx(wr_addr + ADDR_W'(2*i))] <= wdata[i*DATA_W +: DATA_W];
          else if (wstrb[2*i +: 2] != 2'b00) proto_err <= proto_err + 1;
        end
        beats_wr <= beats_wr + 1;
        wr_addr  <= wr_addr + ADDR_W'(2*BW);
        wr_left  <= wr_left - 1;
        if (wlast != (wr_left == 1)) proto_err <= proto_err + 1;
        if (wlast) begin
          wr_act <= 1'b0;
          bvalid <= 1'b1;
        end
      end
      wready <= wr_act && !(wvalid && wready && wlast) && go();
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
