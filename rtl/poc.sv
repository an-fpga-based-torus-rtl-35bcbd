// poc: processor output controller, the outbound half of the PCIe processor
// interface ("POC").
//
// Builds the up-stream TLPs that the PCIe hard IP sends to the CPU on its
// Avalon-ST transmit port. Sources, served round-robin, one TLP sequence at
// a time: the six links' delivery streams and the register-read requests
// of the PIC.
//  * a received 128-byte packet becomes one memory write with 64-bit address
//    (4-DW header beat, then 8 data beats) to the address the link's Match
//    block computed from the credit;
//  * when that packet is the last one of a credit, a 16-byte notification
//    write follows to the credit's notification address, holding
//    {DW3 = 1 (done flag), DW2 = 0, DW1 = packets, DW0 = link<<16 | VC};
//  * a register read is answered with a one-word completion (3-DW header
//    and the data word in a single beat).
// The paper gives POC's role: moving received data to CPU memory by
// outbound transactions followed by a notification. TLP formats follow PCIe;
// the notification layout, the arbitration and the bus layout (DW0 in bits
// 31:0, header beat separate from 16-byte aligned data beats) are this
// design's choices. `tx_data` and friends are combinational from the
// current state; a beat moves when tx_valid && tx_ready.
module poc
  import tnw_pkg::*;
#(
  parameter logic [15:0] DEVICE_ID = 16'h0100   // bus/device/function of the NWP
) (
  input  logic                 clk,
  input  logic                 rst,
  // delivery streams of the links
  input  logic [NUM_LINKS-1:0] dlv_valid,
  output logic [NUM_LINKS-1:0] dlv_ready,
  input  logic [127:0]         dlv_data        [NUM_LINKS],
  input  logic [NUM_LINKS-1:0] dlv_last,
  input  logic [63:0]          dlv_addr        [NUM_LINKS],
  input  logic [VC_W-1:0]      dlv_vc          [NUM_LINKS],
  input  logic [NUM_LINKS-1:0] dlv_notify,
  input  logic [63:0]          dlv_notify_addr [NUM_LINKS],
  input  logic [15:0]          dlv_npkts       [NUM_LINKS],
  // register reads
  input  logic                 rd_valid,
  output logic                 rd_ready,
  input  logic [31:0]          rd_data,
  input  logic [15:0]          rd_reqid,
  input  logic [7:0]           rd_tag,
  input  logic [6:0]           rd_lowaddr,
  // Avalon-ST transmit port of the PCIe IP
  output logic [127:0]         tx_data,
  output logic                 tx_sop,
  output logic                 tx_eop,
  output logic                 tx_valid,
  input  logic                 tx_ready
);
  localparam int NSRC = NUM_LINKS + 1;   // links, then register reads
  localparam int SRCW = $clog2(NSRC);

  typedef enum logic [2:0] {O_IDLE, O_HDR, O_DATA, O_NHDR, O_NDATA, O_CPL} ostate_e;
  ostate_e         state;
  logic [SRCW-1:0] sel, last, pick;
  logic            pick_ok;
  logic [NSRC-1:0] req;
  logic            notify;
  logic [63:0]     n_addr;
  logic [15:0]     n_pkts;
  logic [VC_W-1:0] n_vc;
  logic [127:0]    cpl;

  assign req = {rd_valid, dlv_valid};

  always_comb begin
    pick    = last;
    pick_ok = 1'b0;
    for (int i = 1; i <= NSRC; i++) begin
      logic [SRCW-1:0] c;
      c = SRCW'((int'(last) + i) % NSRC);
      if (!pick_ok && req[c]) begin
        pick    = c;
        pick_ok = 1'b1;
      end
    end
  end

  function automatic logic [127:0] mwr_hdr(logic [63:0] a, logic [9:0] len_dw);
    logic [31:0] h0, h1;
    h0 = {FMT_4DW_D, TYPE_MEM, 8'h00, 6'h00, len_dw};
    h1 = {DEVICE_ID, 8'h00, (len_dw == 10'd1) ? 4'h0 : 4'hF, 4'hF};
    return {a[31:0], a[63:32], h1, h0};
  endfunction

  logic [LINK_W-1:0] lsel;
  assign lsel = LINK_W'(sel);

  always_comb begin
    tx_data   = '0;
    tx_sop    = 1'b0;
    tx_eop    = 1'b0;
    tx_valid  = 1'b0;
    dlv_ready = '0;
    rd_ready  = (state == O_IDLE) && pick_ok && (pick == SRCW'(NUM_LINKS));
    unique case (state)
      O_HDR: begin
        tx_valid = 1'b1;
        tx_sop   = 1'b1;
        tx_data  = mwr_hdr(dlv_addr[lsel], 10'(PKT_WORDS));
      end
      O_DATA: begin
        tx_valid        = dlv_valid[lsel];
        tx_data         = dlv_data[lsel];
        tx_eop          = dlv_last[lsel];
        dlv_ready[lsel] = tx_ready;
      end
      O_NHDR: begin
        tx_valid = 1'b1;
        tx_sop   = 1'b1;
        tx_data  = mwr_hdr(n_addr, 10'd4);
      end
      O_NDATA: begin
        tx_valid = 1'b1;
        tx_eop   = 1'b1;
        tx_data  = {32'd1, 32'd0, 16'd0, n_pkts, 13'd0, lsel, 13'd0, n_vc};
      end
      O_CPL: begin
        tx_valid = 1'b1;
        tx_sop   = 1'b1;
        tx_eop   = 1'b1;
        tx_data  = cpl;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= O_IDLE;
      sel    <= '0;
      last   <= SRCW'(NSRC - 1);
      notify <= 1'b0;
      n_addr <= '0;
      n_pkts <= '0;
      n_vc   <= '0;
      cpl    <= '0;
    end else begin
      unique case (state)
        O_IDLE: if (pick_ok) begin
          sel  <= pick;
          last <= pick;
          if (pick == SRCW'(NUM_LINKS)) begin
            cpl <= {rd_data,
                    rd_reqid, rd_tag, 1'b0, rd_lowaddr,
                    DEVICE_ID, 3'b000, 1'b0, 12'd4,
                    FMT_3DW_D, TYPE_CPL, 8'h00, 6'h00, 10'd1};
            state <= O_CPL;
          end else begin
            state <= O_HDR;
          end
        end
        O_HDR: if (tx_ready) begin
          notify <= dlv_notify[lsel];
          n_addr <= dlv_notify_addr[lsel];
          n_pkts <= dlv_npkts[lsel];
          n_vc   <= dlv_vc[lsel];
          state  <= O_DATA;
        end
        O_DATA: if (tx_ready && dlv_valid[lsel] && dlv_last[lsel])
          state <= notify ? O_NHDR : O_IDLE;
        O_NHDR:  if (tx_ready) state <= O_NDATA;
        O_NDATA: if (tx_ready) state <= O_IDLE;
        O_CPL:   if (tx_ready) state <= O_IDLE;
        default: state <= O_IDLE;
      endcase
    end
  end
endmodule
