// vme_usb_if: "VME/USB Interface" block of the DAVE firmware.
//
// Turns the two host paths into single requests on the internal register bus
// (dave_pkg::hbus_req_t / hbus_rsp_t).
//
// VME slave (A32/D16):
//   * the card answers when A31-A24 equal the base-address switches and the
//     address modifier is an A32 data access, user (0x09) or supervisory
//     (0x0D); IACK cycles, other modifiers, block transfers (0x0B, 0x0F,
//     0x08, 0x0C) and byte or 32-bit transfers (only one data strobe, or
//     LWORD* low) are ignored and get no DTACK*;
//   * D16 only: a transfer is both data strobes low with LWORD* high; A0 does
//     not exist on the bus and is taken as 0, A1 and up address 16-bit words;
//   * A23-A9 must be zero; A8-A1 give the register word address;
//   * a slave cycle is: AS* low and both DS* low -> one register request ->
//     ack -> DTACK* low (and data driven for a read) -> DS* high -> DTACK*
//     released. Only one transfer is done per AS* cycle, so read-modify-write
//     cycles are not supported; an address-only cycle (AS* without DS*) does
//     nothing.
//   AS*, DS*, WRITE* are brought onto the BC clock with two flip-flops;
//   address, AM and data are sampled once the synchronised strobes say they
//   are stable. DTACK* follows the register ack by one clock.
//
// USB: the on-board USB microcontroller is taken to present the same
// register-bus request (synchronous to the BC clock) on `usb_req`, and gets
// the answer on `usb_rsp`.
//
// Arbitration: one request is open at a time. When both hosts ask in the same
// cycle VME goes first and the USB request waits (it is held in a pending
// register, so the USB side may drop its strobe). Both hosts see the register
// bus read data directly (usb_rsp.rdata is bus_rsp.rdata); it is only
// meaningful in the cycle their own ack is high.
//
// Follows the paper: VME slave with A32/D16, base address A31-A24 from
// switches, A0 unused, user and supervisory data AM codes, no block transfer,
// RMW or address-only cycles; host access by VME or USB. The synchronous
// slave state machine, the register window, the USB port protocol and the
// arbitration are this design's choices.
module vme_usb_if (
  input  logic                clk,
  input  logic                rst,
  // VME bus (active-low strobes as on the backplane)
  input  logic                vme_as_n,
  input  logic [1:0]          vme_ds_n,
  input  logic                vme_write_n,
  input  logic                vme_lword_n,
  input  logic                vme_iack_n,
  input  logic [5:0]          vme_am,
  input  logic [31:1]         vme_addr,
  input  logic [15:0]         vme_d_in,
  output logic [15:0]         vme_d_out,
  output logic                vme_d_oe,
  output logic                vme_dtack_n,
  input  logic [7:0]          base_sw,      // A31-A24 switches
  // USB microcontroller port
  input  dave_pkg::hbus_req_t usb_req,
  output dave_pkg::hbus_rsp_t usb_rsp,
  // register bus master
  output dave_pkg::hbus_req_t bus_req,
  input  dave_pkg::hbus_rsp_t bus_rsp
);
  import dave_pkg::*;

  // ---------------------------------------------------------------- VME slave
  typedef enum logic [2:0] {V_IDLE, V_WAIT, V_ACK, V_DTACK, V_END} vstate_e;

  logic [1:0] as_s, ds0_s, ds1_s, wr_s;
  logic       as_a, ds_a, sel;
  vstate_e    vst;
  logic       vme_req;       // request towards the arbiter
  hbus_req_t  vme_cmd;
  logic       vme_done;      // ack for the VME request
  logic [15:0] vme_rdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      as_s  <= '1;
      ds0_s <= '1;
      ds1_s <= '1;
      wr_s  <= '1;
    end else begin
      as_s  <= {as_s[0],  vme_as_n};
      ds0_s <= {ds0_s[0], vme_ds_n[0]};
      ds1_s <= {ds1_s[0], vme_ds_n[1]};
      wr_s  <= {wr_s[0],  vme_write_n};
    end
  end

  assign as_a = !as_s[1];
  assign ds_a = !ds0_s[1] && !ds1_s[1];
  assign sel  = vme_iack_n && vme_lword_n &&
                (vme_am == 6'h09 || vme_am == 6'h0D) &&
                (vme_addr[31:24] == base_sw) &&
                (vme_addr[23:9] == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      vst         <= V_IDLE;
      vme_req     <= 1'b0;
      vme_cmd     <= '0;
      vme_dtack_n <= 1'b1;
      vme_d_oe    <= 1'b0;
      vme_d_out   <= '0;
    end else begin
      vme_req <= 1'b0;
      unique case (vst)
        V_IDLE: if (as_a && ds_a) begin
          if (sel) begin
            vme_req       <= 1'b1;
            vme_cmd.req   <= 1'b1;
            vme_cmd.we    <= !wr_s[1];
            vme_cmd.addr  <= vme_addr[8:1];
            vme_cmd.wdata <= vme_d_in;
            vst           <= V_WAIT;
          end else begin
            vst <= V_END;          // not for this card: wait for AS* high
          end
        end
        V_WAIT: if (vme_done) begin
          vme_d_out <= vme_rdata;
          vme_d_oe  <= !vme_cmd.we;
          vst       <= V_ACK;
        end
        V_ACK: begin
          vme_dtack_n <= 1'b0;
          vst         <= V_DTACK;
        end
        V_DTACK: if (ds0_s[1] && ds1_s[1]) begin
          vme_dtack_n <= 1'b1;
          vme_d_oe    <= 1'b0;
          vst         <= V_END;
        end
        V_END: if (!as_a) vst <= V_IDLE;
        default: vst <= V_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- arbiter
  typedef enum logic [1:0] {A_FREE, A_VME, A_USB} owner_e;

  owner_e    owner;
  logic      vme_pend, usb_pend;
  hbus_req_t usb_hold;

  always_ff @(posedge clk) begin
    if (rst) begin
      owner    <= A_FREE;
      vme_pend <= 1'b0;
      usb_pend <= 1'b0;
      usb_hold <= '0;
      bus_req  <= '0;
    end else begin
      bus_req.req <= 1'b0;
      if (vme_req) vme_pend <= 1'b1;
      if (usb_req.req) begin
        usb_pend <= 1'b1;
        usb_hold <= usb_req;
      end
      unique case (owner)
        A_FREE: begin
          if (vme_pend) begin
            bus_req  <= vme_cmd;
            owner    <= A_VME;
            vme_pend <= 1'b0;
          end else if (usb_pend) begin
            bus_req  <= usb_hold;
            owner    <= A_USB;
            usb_pend <= usb_req.req;
          end
        end
        default: if (bus_rsp.ack) owner <= A_FREE;
      endcase
    end
  end

  assign vme_done    = bus_rsp.ack && owner == A_VME;
  assign vme_rdata   = bus_rsp.rdata;
  assign usb_rsp.ack   = bus_rsp.ack && owner == A_USB;
  assign usb_rsp.rdata = bus_rsp.rdata;

  // A request is a single-cycle strobe and only one is open at a time.
  a_single_open: assert property (@(posedge clk) disable iff (rst)
                                  bus_req.req |-> owner != A_FREE);
endmodule
