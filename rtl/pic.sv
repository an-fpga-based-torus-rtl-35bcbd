// pic: processor input controller, the inbound half of the PCIe processor
// interface ("PIC").
//
// Takes the down-stream transaction-layer packets (TLPs) that the PCIe hard
// IP delivers on its Avalon-ST receive port and acts on them according to
// the target address (see the address map in tnw_pkg):
//  * memory writes to the injection region are the Pput send operation: the
//    CPU stores message data straight into the window of a link and VC. Each
//    16-byte beat goes to that link's reorder_buffer, which restores the
//    order of write-combined fragments before the data enters txFifo. While
//    a beat lies outside the re-order window the receive port is stalled
//    (back-pressure towards the CPU).
//  * a 16-byte memory write to the credit region posts a credit (receive
//    operation) for a link and VC: bytes 0-5 destination address, bytes 6-7
//    number of packets, bytes 8-15 notification address.
//  * a one-word memory write to the register region writes a link register;
//    a one-word memory read is handed to the POC, which answers it with a
//    completion. The port stalls until the POC has taken the read.
// Other TLPs are dropped.
//
// The paper gives PIC's role, the Pput scheme with addresses encoding link
// and VC, and the need for re-order logic. The address map, the credit
// format, single-word register access and the TLP layout on the 128-bit
// Avalon-ST bus are this design's choices: the header occupies the first
// beat (DW0 in bits 31:0) and the payload starts, 16-byte aligned, in the
// next beat. Byte enables are ignored.
// Lint note: header fields the PIC does not act on (the length, since eop
// marks the end; traffic class, attributes, byte enables, address bits
// above the 2 MB window) are reported as unused bits of dw0..dw3.
module pic
  import tnw_pkg::*;
#(
  parameter int TXF_DEPTH = 64,
  parameter int RB_SLOTS  = 4
) (
  input  logic                           clk,
  input  logic                           rst,
  // Avalon-ST receive port of the PCIe IP
  input  logic [127:0]                   rx_data,
  input  logic                           rx_sop,
  input  logic                           rx_eop,
  input  logic                           rx_valid,
  output logic                           rx_ready,
  // injection: to the txFifo of each link
  input  logic [$clog2(TXF_DEPTH+1)-1:0] txf_free [NUM_LINKS],
  output logic [NUM_LINKS-1:0]           txf_wr,
  output logic [127:0]                   txf_data [NUM_LINKS],
  output tx_attr_t                       txf_attr [NUM_LINKS],
  // credits
  output logic [NUM_LINKS-1:0]           cr_valid,
  output logic [VC_W-1:0]                cr_vc,
  output credit_t                        cr_data,
  // register writes
  output logic [NUM_LINKS-1:0]           reg_wr,
  output logic [5:0]                     reg_idx,
  output logic [31:0]                    reg_wdata,
  // register read requests to the POC
  output logic                           rd_valid,
  input  logic                           rd_ready,
  output logic [LINK_W-1:0]              rd_link,
  output logic [5:0]                     rd_idx,
  output logic [15:0]                    rd_reqid,
  output logic [7:0]                     rd_tag,
  output logic [6:0]                     rd_lowaddr
);
  typedef enum logic [1:0] {P_HDR, P_DATA, P_RD, P_DROP} pstate_e;
  pstate_e           state;
  logic [ADDR_W-1:0] addr;
  logic              first;

  // header fields of the current beat
  logic [31:0]       dw0, dw1, dw2, dw3;
  logic [2:0]        fmt;
  logic [4:0]        typ;
  logic [ADDR_W-1:0] haddr;
  assign {dw3, dw2, dw1, dw0} = rx_data;
  assign fmt   = dw0[31:29];
  assign typ   = dw0[28:24];
  assign haddr = fmt[0] ? dw3[ADDR_W-1:0] : dw2[ADDR_W-1:0];
  // Only the BAR offset bits of the address are decoded; the PCIe IP has
  // already matched the BAR.

  // fields of the current write address
  region_e           region;
  logic [LINK_W-1:0] link;
  logic [VC_W-1:0]   vc;
  assign region = region_e'(addr[20:19]);
  assign link   = addr[18:16];
  assign vc     = addr[15:13];

  logic [NUM_LINKS-1:0] rb_wr, rb_accept;
  logic                 accept;
  assign accept = (link < LINK_W'(NUM_LINKS)) ? rb_accept[link] : 1'b1;

  for (genvar l = 0; l < NUM_LINKS; l++) begin : g_rb
    reorder_buffer #(.RB_SLOTS(RB_SLOTS), .TXF_DEPTH(TXF_DEPTH)) u_rb (
      .clk (clk), .rst (rst),
      .wr_en (rb_wr[l]), .wr_vc (vc), .wr_pidx (addr[12:7]), .wr_chunk (addr[6:4]),
      .wr_data (rx_data), .wr_accept (rb_accept[l]),
      .txf_free (txf_free[l]), .txf_wr (txf_wr[l]), .txf_data (txf_data[l]), .txf_attr (txf_attr[l])
    );
  end

  always_comb begin
    rx_ready = 1'b0;
    rb_wr    = '0;
    cr_valid = '0;
    reg_wr   = '0;
    unique case (state)
      P_HDR:  rx_ready = 1'b1;
      P_DROP: rx_ready = 1'b1;
      P_RD:   rx_ready = 1'b0;
      P_DATA: begin
        rx_ready = (region == RG_INJ) ? accept : 1'b1;
        if (rx_valid && rx_ready && link < LINK_W'(NUM_LINKS)) begin
          if (region == RG_INJ)                rb_wr[link]    = 1'b1;
          if (region == RG_CREDIT && first)    cr_valid[link] = 1'b1;
          if (region == RG_REG && first)       reg_wr[link]   = 1'b1;
        end
      end
      default: ;
    endcase
  end

  assign cr_vc     = vc;
  assign cr_data   = credit_t'(rx_data);
  assign reg_idx   = addr[7:2];
  assign reg_wdata = rx_data[addr[3:2]*32 +: 32];
  assign rd_valid  = (state == P_RD);
  assign rd_link   = link;
  assign rd_idx    = addr[7:2];

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= P_HDR;
      addr       <= '0;
      first      <= 1'b0;
      rd_reqid   <= '0;
      rd_tag     <= '0;
      rd_lowaddr <= '0;
    end else begin
      unique case (state)
        P_HDR: if (rx_valid && rx_sop) begin
          addr  <= haddr;
          first <= 1'b1;
          if (typ == TYPE_MEM && (fmt == FMT_3DW_D || fmt == FMT_4DW_D)) begin
            if (!rx_eop) state <= P_DATA;
          end else if (typ == TYPE_MEM && (fmt == FMT_3DW_ND || fmt == FMT_4DW_ND)) begin
            rd_reqid   <= dw1[31:16];
            rd_tag     <= dw1[15:8];
            rd_lowaddr <= haddr[6:0];
            state      <= P_RD;
          end else if (!rx_eop) begin
            state <= P_DROP;
          end
        end
        P_DATA: if (rx_valid && rx_ready) begin
          first <= 1'b0;
          addr  <= {addr[ADDR_W-1:13], addr[12:0] + 13'd16};  // stay in the window
          if (rx_eop) state <= P_HDR;
        end
        P_RD: if (rd_ready) state <= P_HDR;
        P_DROP: if (rx_valid && rx_eop) state <= P_HDR;
        default: state <= P_HDR;
      endcase
    end
  end
endmodule
