// axil_ctrl: AXI4-Lite control slave of the accelerator.
//
// The paper connects its kernel to the processor's control bus through an AXI4-Lite
// slave; the register map below is this design's own:
//   0x00 CTRL     write: bit 0 = 1 starts a run (self-clearing), bit 1 = load the
//                 parameters from the input stream before h_0 (kept)
//   0x04 STATUS   read:  bit 0 busy, bit 1 done (set when a run ends, cleared by start)
//   0x08 SEQ_LEN  read/write: number of time steps T of the next run
//   0x0C CYCLES   read:  clocks the last run took, from start to its last result beat
// A write is accepted when address and data are both valid (one clock, then
// bvalid until bready); a read returns on the next clock. Responses are OKAY.
// Writing CTRL.start while busy is ignored.
module axil_ctrl #(
  parameter int unsigned T_W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           awvalid,
  output logic           awready,
  input  logic [3:0]     awaddr,
  input  logic           wvalid,
  output logic           wready,
  input  logic [31:0]    wdata,
  output logic           bvalid,
  input  logic           bready,
  output logic [1:0]     bresp,
  input  logic           arvalid,
  output logic           arready,
  input  logic [3:0]     araddr,
  output logic           rvalid,
  input  logic           rready,
  output logic [31:0]    rdata,
  output logic [1:0]     rresp,
  // to the accelerator
  output logic           start,
  output logic           load_params,
  output logic [T_W-1:0] seq_len,
  input  logic           busy,
  input  logic           run_done
);
  logic        done_flag;
  logic [31:0] cycles;
  logic        wr;

  assign wr      = awvalid && wvalid && !bvalid;
  assign awready = wr;
  assign wready  = wr;
  assign arready = !rvalid;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid <= 1'b0; rvalid <= 1'b0; rdata <= '0;
      start <= 1'b0; load_params <= 1'b0; seq_len <= '0;
      done_flag <= 1'b0; cycles <= '0;
    end else begin
      start <= 1'b0;
      if (wr) begin
        bvalid <= 1'b1;
        unique case (awaddr[3:2])
          2'd0: begin
            load_params <= wdata[1];
            if (wdata[0] && !busy) begin
              start <= 1'b1; done_flag <= 1'b0; cycles <= '0;
            end
          end
          2'd2:    seq_len <= T_W'(wdata);
          default: ;
        endcase
      end else if (bvalid && bready) begin
        bvalid <= 1'b0;
      end
      if (arvalid && arready) begin
        rvalid <= 1'b1;
        unique case (araddr[3:2])
          2'd0:    rdata <= {30'd0, load_params, 1'b0};
          2'd1:    rdata <= {30'd0, done_flag, busy};
          2'd2:    rdata <= 32'(seq_len);
          default: rdata <= cycles;
        endcase
      end else if (rvalid && rready) begin
        rvalid <= 1'b0;
      end
      if (busy)     cycles    <= cycles + 1;
      if (run_done) done_flag <= 1'b1;
    end
  end

  a_bhold: assert property (@(posedge clk) disable iff (!rst_n) bvalid && !bready |=> bvalid);
  a_rhold: assert property (@(posedge clk) disable iff (!rst_n) rvalid && !rready |=> rvalid && $stable(rdata));
endmodule
