// usb3_endpoints: endpoint management of the device.
//
// The device has the three endpoints the paper names: EP0, the control
// endpoint used for enumeration, EP1 bulk-in and EP2 bulk-out. This block
// keeps their state; usb3_protocol moves the packets.
//   EP0  decodes each 8-byte SETUP packet. SET_ADDRESS and
//        SET_CONFIGURATION take effect when the status stage completes
//        (status_done). GET_DESCRIPTOR selects the device, configuration or
//        BOS descriptor from a built-in table; desc_len is the number of bytes
//        the data stage returns (the descriptor length, capped by wLength)
//        and desc_word(desc_idx) the 32-bit word at that word index. Other
//        requests are accepted and ignored.
//   EP1  remembers that an NRDY was sent (in_nrdy_sent) and asks for an ERDY
//        once the bulk-in FIFO holds data.
//   EP2  keeps the expected data packet sequence number (advanced by
//        out_accepted, cleared by SET_CONFIGURATION) and, after an NRDY,
//        asks for an ERDY once the bulk-out FIFO has room for a full packet.
// erdy_valid / erdy_ep / erdy_dir_in are held until erdy_sent.
// The device state (address, configuration, EP2 sequence number) is kept
// through U1, U2 and U3 and cleared when the link trains again (active low).
// The descriptor contents (vendor and product id 0, one interface with one
// bulk endpoint in each direction, 1024-byte packets, no bursts) are this
// design's own; the paper does not list them.
module usb3_endpoints #(
  parameter int unsigned MAX_PKT_BYTES = 1024,
  parameter logic [15:0] VENDOR_ID     = 16'h0000,
  parameter logic [15:0] PRODUCT_ID    = 16'h0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        active,          // link up (U0..U3, U-exit); low resets the device state
  // EP0
  input  logic        setup_valid,
  input  logic [63:0] setup_pkt,       // byte 0 in bits 7:0
  input  logic        status_done,
  input  logic [5:0]  desc_idx,
  output logic [15:0] desc_len,
  output logic [31:0] desc_word,
  output logic [6:0]  dev_addr,
  output logic        configured,
  // EP1 bulk-in
  input  logic        in_nrdy_sent,
  input  logic [15:0] in_fifo_count,   // words
  // EP2 bulk-out
  input  logic        out_accepted,
  input  logic        out_nrdy_sent,
  input  logic [15:0] out_fifo_free,   // words
  output logic [4:0]  ep2_seq,
  // ERDY requests
  output logic        erdy_valid,
  output logic [3:0]  erdy_ep,
  output logic        erdy_dir_in,
  input  logic        erdy_sent
);

  localparam int unsigned DEV_OFS = 0,  DEV_LEN = 18;
  localparam int unsigned CFG_OFS = 18, CFG_LEN = 44;
  localparam int unsigned BOS_OFS = 62, BOS_LEN = 22;
  localparam int unsigned ROM_LEN = 84;
  localparam logic [15:0] MPS = 16'(MAX_PKT_BYTES);

  localparam logic [7:0] ROM [ROM_LEN] = '{
    // device descriptor: USB 3.0, EP0 max packet 2^9, one configuration
    8'h12, 8'h01, 8'h00, 8'h03, 8'h00, 8'h00, 8'h00, 8'h09,
    VENDOR_ID[7:0], VENDOR_ID[15:8], PRODUCT_ID[7:0], PRODUCT_ID[15:8],
    8'h00, 8'h01, 8'h00, 8'h00, 8'h00, 8'h01,
    // configuration descriptor, total 44 bytes, bus powered, 400 mA
    8'h09, 8'h02, 8'h2C, 8'h00, 8'h01, 8'h01, 8'h00, 8'h80, 8'h32,
    // interface 0, two endpoints, vendor class
    8'h09, 8'h04, 8'h00, 8'h00, 8'h02, 8'hFF, 8'h00, 8'h00, 8'h00,
    // EP1 IN bulk + SuperSpeed companion
    8'h07, 8'h05, 8'h81, 8'h02, MPS[7:0], MPS[15:8], 8'h00,
    8'h06, 8'h30, 8'h00, 8'h00, 8'h00, 8'h00,
    // EP2 OUT bulk + SuperSpeed companion
    8'h07, 8'h05, 8'h02, 8'h02, MPS[7:0], MPS[15:8], 8'h00,
    8'h06, 8'h30, 8'h00, 8'h00, 8'h00, 8'h00,
    // BOS descriptor: USB 2.0 extension and SuperSpeed capability
    8'h05, 8'h0F, 8'h16, 8'h00, 8'h02,
    8'h07, 8'h10, 8'h02, 8'h02, 8'h00, 8'h00, 8'h00,
    8'h0A, 8'h10, 8'h03, 8'h00, 8'h0E, 8'h00, 8'h03, 8'h00, 8'h00, 8'h00
  };

  logic [7:0]  bm_req, b_req;
  logic [15:0] w_value, w_length;
  assign bm_req   = setup_pkt[7:0];
  assign b_req    = setup_pkt[15:8];
  assign w_value  = setup_pkt[31:16];
  assign w_length = setup_pkt[63:48];

  logic [6:0]  pend_addr;
  logic        pend_addr_v, pend_cfg_v, pend_cfg;
  logic [6:0]  desc_base;
  logic        in_pend, out_pend;

  function automatic logic [15:0] min16(input logic [15:0] a, input logic [15:0] b);
    return (a < b) ? a : b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dev_addr    <= '0;
      configured  <= 1'b0;
      pend_addr   <= '0;
      pend_addr_v <= 1'b0;
      pend_cfg_v  <= 1'b0;
      pend_cfg    <= 1'b0;
      desc_base   <= '0;
      desc_len    <= '0;
      ep2_seq     <= '0;
      in_pend     <= 1'b0;
      out_pend    <= 1'b0;
    end else if (!active) begin
      dev_addr    <= '0;
      configured  <= 1'b0;
      pend_addr_v <= 1'b0;
      pend_cfg_v  <= 1'b0;
      desc_len    <= '0;
      ep2_seq     <= '0;
      in_pend     <= 1'b0;
      out_pend    <= 1'b0;
    end else begin
      if (setup_valid) begin
        desc_len <= '0;
        if (bm_req == 8'h00 && b_req == 8'h05) begin          // SET_ADDRESS
          pend_addr   <= w_value[6:0];
          pend_addr_v <= 1'b1;
        end else if (bm_req == 8'h00 && b_req == 8'h09) begin // SET_CONFIGURATION
          pend_cfg    <= (w_value[7:0] != 8'h00);
          pend_cfg_v  <= 1'b1;
        end else if (bm_req == 8'h80 && b_req == 8'h06) begin // GET_DESCRIPTOR
          unique case (w_value[15:8])
            8'h01: begin desc_base <= 7'(DEV_OFS); desc_len <= min16(16'(DEV_LEN), w_length); end
            8'h02: begin desc_base <= 7'(CFG_OFS); desc_len <= min16(16'(CFG_LEN), w_length); end
            8'h0F: begin desc_base <= 7'(BOS_OFS); desc_len <= min16(16'(BOS_LEN), w_length); end
            default: desc_len <= '0;
          endcase
        end
      end
      if (status_done) begin
        if (pend_addr_v) dev_addr <= pend_addr;
        if (pend_cfg_v) begin
          configured <= pend_cfg;
          ep2_seq    <= '0;
        end
        pend_addr_v <= 1'b0;
        pend_cfg_v  <= 1'b0;
      end
      if (out_accepted) ep2_seq <= ep2_seq + 1;
      // NRDY bookkeeping / ERDY
      if (in_nrdy_sent) in_pend <= 1'b1;
      else if (erdy_sent && erdy_dir_in) in_pend <= 1'b0;
      if (out_nrdy_sent) out_pend <= 1'b1;
      else if (erdy_sent && !erdy_dir_in) out_pend <= 1'b0;
    end
  end

  always_comb begin
    erdy_valid  = 1'b0;
    erdy_ep     = 4'd0;
    erdy_dir_in = 1'b0;
    if (in_pend && in_fifo_count != 0) begin
      erdy_valid  = 1'b1;
      erdy_ep     = 4'd1;
      erdy_dir_in = 1'b1;
    end else if (out_pend && 32'(out_fifo_free) >= MAX_PKT_BYTES / 4) begin
      erdy_valid  = 1'b1;
      erdy_ep     = 4'd2;
    end
  end

  always_comb begin
    desc_word = '0;
    for (int b = 0; b < 4; b++) begin
      int unsigned a;
      a = 32'(desc_base) + 4 * 32'(desc_idx) + b;
      if (a < ROM_LEN) desc_word[8*b +: 8] = ROM[a];
    end
  end

endmodule
