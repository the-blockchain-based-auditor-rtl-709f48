# A hardware blockchain auditor for secret keys

Secret keys in a security processor are often exposed by how they move, more than by how they are
stored. A key may go to the wrong core, a compromised IP may ask for it, a copy may stay behind
after use, and nobody can tell afterwards what happened. This design keeps every secret key in
an isolated **master key memory (MKM)** that software cannot reach. Each movement of a key into or
out of that memory becomes one **block**: a record with the key, a timestamp, the hash of the
previous block, the operation, the source and destination IP and a snapshot of the system
state. The requesting IP signs the block with its RSA private key. A hardware **signature
checker** verifies the signature with that IP's public key before the key moves. A read key is
then erased, and an audit record goes out for the processor to store. The records are chained by
their pre-hashes, so they form a private blockchain of the key life cycle.

This RTL follows the architecture of *The Blockchain Based Auditor on Secret key Life Cycle in
Reconfigurable Platform* (Paul, Ghosh, Chakrabarti, Mahapatra). The paper gives the block
diagram, the control word, the interconnect and the instruction set. It gives little about the
insides of the blocks. Everything the paper leaves open was decided here, and the section
"Where this design departs from or adds to the paper" lists those decisions.

## The parts

```
             PE (AXI4-Lite)                       crypto area                 confidential area
                  |                                                          +------------------+
            +-----v-----+   CWR   +---------------------------------+        |  sig_checker     |
            |    dpc    |-------->|  cbi: 4-source / 5-destination  |        |  keccak512 + RSA |
            +-----------+         |  MUX + DEMUX, one clock         |        +--------^---------+
                                  +--+--------+--------+--------+---+                 |
   RNG (port) ---- src 0 ----------->|        |        |        |            +--------v---------+
                                     | src 1  | src 2  | src 3  |            |      buffer      |
   hash_core (SHA3-512) <-- dst 1,3 -+        |        |        +--- dst 0 ->|  one block       |
   pub_en (RSA-1024)    <-- dst 4 ---+        |        |                     |  data, header,   |
   AES key port         <-- dst 2 ---+        |        |                     |  digest, sig     |
                                              |        |                     +--------^---------+
                        hash_core --> src 2 --+        |                              |
                        pub_en    --> src 3 -----------+                     +--------v---------+
                        buffer    --> src 1                                  |  mkm: 3 slots    |
                                                                             +------------------+
```

| module | role |
|---|---|
| `bc_top` | wires everything; RNG, AES, the PE's re-key and randoms paths, public keys and the audit log are ports |
| `dpc` | data path controller: AXI4-Lite slave holding the 16-bit control word register (CWR) and reading back status |
| `cbi` | custom bus interconnect: routes one source (data plus its done strobe) to one destination |
| `hash_core` | crypto-area SHA3 block as it meets the interconnect (signature step 1-2, master-key derivation) |
| `pub_en` | crypto-area RSA block ("PubEn"): exponentiates with a key the PE loads (signature step 3-4) |
| `buffer` | the gateway to the MKM: builds, fills, submits and closes blocks; emits the audit record |
| `sig_checker` | its own `keccak512` and `rsa_modexp`, run in parallel; grant or refuse; holds the pre-hash |
| `mkm` | master key memory, erase-after-read |
| `keccak512` | SHA3-512 of one 64-byte message, one round per clock |
| `rsa_modexp` | base^exp mod n, 1024 bits, three clocks per exponent bit |
| `timer` | clock counter used as timestamp |
| `bc_pkg` | CWR fields, address codes, IP ids, status word, log record |

The processor, its bus interconnect, the DMA, the shared memory, the RNG and the AES core belong
to the base security processor this auditor is added to. They are not in this RTL.

## The control word and the instruction set

The processor runs the auditor by writing one 16-bit control word per instruction to the DPC
(AXI offset `0x0`). Bit numbers below count from 0:

| bits | field | meaning |
|---|---|---|
| 15:12 | input address | interconnect source: 0 RNG, 1 Buff, 2 Hash, 3 PubEn |
| 11:8 | output address | interconnect destination: 0 Buff, 1 Hash_key, 2 En_key, 3 Hash_in, 4 Pub_en_in |
| 7 | Buf cap | the buffer captures a block header |
| 6 | Bus sel | the interconnect path is open |
| 5..0 | enables | RSA, RNG, HASH, ENC, MKM, Buff |

Each write also produces a one-clock `cwr_strobe`, and the blocks act on it. The codes below are
the paper's instruction table, decoded with this layout:

| # | code | effect here |
|---|---|---|
| 2 | `0050` | RNG makes a number (`rng_start`); it crosses RNG→Buff into the data field |
| 3 | `0091` | write block from the RNG: header captured, op = write, src = RNG |
| 7 / 14 | `11C1` | read block for Hash: header captured, op = read, dst = Hash_key, data cleared |
| 8 / 15 | `1149` | Buff→Hash_key: the key leaves the buffer (and is erased there); the hash core derives from it |
| 9 | `2049` | Hash→Buff: the derived keys enter the data field |
| 10 | `20C9` | write block from Hash |
| 11 | `12C1` | read block for AES (dst = En_key) |
| 12 | `1245` | Buff→En_key: the key goes out on the AES key port and is erased in the buffer |
| 17 | `1341` | signature step 1: data Buff→Hash_in |
| 18 | `2049` | step 2: Hash→Buff, taken as the **digest** because step 1 is pending |
| 19 | `1461` | step 3: the digest Buff→Pub_en_in |
| 20 | `3061` | step 4: PubEn→Buff, taken as the **signature** |
| 21 | `1XX3` | verify: any code with MKM and Buff enabled and Buf cap clear (this RTL uses `1003`) |

Instructions 1, 4, 5, 6, 13 and 16 go over the processor's own buses to base-design cores. Two of
them reach this RTL as plain ports: the RSA re-key (`rsa_rekey_*`, instruction 4) and the client
and server randoms for the hash core (`hash_rand*`, instruction 6).

Instructions 9 and 18 have the same code, `2049`, but mean different things. The buffer tells
them apart with a *signature-pending* flag. Sending data to Hash_in (instruction 17) sets the
flag. The next hash result then lands in the digest field and clears the flag. Any other hash
result lands in the data field.

## One block, start to finish

Here is a pre-master key going from the RNG into the MKM:

1. `0050`: the RNG number arrives in the buffer's data field.
2. `0091`: the header is captured: timestamp, the current pre-hash, op = write, source RNG,
   destination Buff, the 16-bit system status.
3. The PE loads the RNG's private exponent into the RSA block (re-key port).
4. `1341`, `2049`: SHA3-512 of the data goes into the digest field.
5. `1461`, `3061`: digest^d mod n goes into the signature field.
6. `1003`: the signature checker takes the requestee from the header. That is the writer for a
   write (here the RNG) and the reader for a read. The checker computes SHA3-512(data) and
   signature^e mod n with the requestee's public key, both at once. If they are equal, the
   transaction is granted.
7. Granted write: the data goes to the MKM and is erased in the buffer. Granted read: the MKM
   key is loaded into the data field, and a later Buff→Hash_key or Buff→En_key instruction
   delivers it. Refused: the block is discarded.
8. In every case one audit record (`log_valid`, `log_rec`, `log_sig`) leaves. It holds the header,
   the requestee, the grant, the digest and the signature, and never the key. The digest just
   computed becomes the next block's pre-hash. So record *k*'s pre-hash equals record *k−1*'s
   digest, refused attempts included.

For a read, the block's data is empty when it is signed. The signature therefore covers the
header's request, not a key. The processor can poll progress at AXI offset `0x4`:

| STATUS bit | meaning |
|---|---|
| 15 / 14 | checker busy / last grant |
| 13 / 12 | RSA block busy / holds a result |
| 11 / 10 | hash block busy / holds a digest |
| 9 / 8 / 7 | MKM pre-master / hash-key copy / AES-key copy present |
| 6, 5..0 | RNG enable, CWR enables |
| 16 / 17 / 18 / 19 | block open / buffer data / digest / signature valid |
| 20 | buffer verifying or reading the MKM |

Bits 15:0 are also the "system status" that each block header records.

The hash and RSA blocks start as soon as data reaches them. Each puts its result out once, with a
done pulse. If a later instruction has that block's enable bit set and the block is holding a
result, it sends the result again. The processor can therefore write step 2 or step 4 either
while the core is still working, as in the paper's timing figures, or after it has finished.

## The master key memory

There are three 1024-bit slots:

- **pre-master**: written by the RNG. It is never erased by a read.
- **hash copy** and **AES copy** of the master key: both written by one Hash write. Each is
  erased when it is read.

A read for Hash returns the hash copy if there is one, and the pre-master key otherwise. This is
how the same code, `11C1`, serves both instruction 7 (read the pre-master key) and instruction 14
(read the master key). A read for AES returns the AES copy. An empty slot returns zero. A read
takes two clocks.

The hash core derives the master key as SHA3-512(pre-master ⊕ randoms). The randoms are the
512-bit client and server value that the processor loads. They also keep the master key
different from SHA3-512(pre-master), which the audit log carries as a digest.

## Timing

| path | clocks | paper |
|---|---|---|
| AXI write valid → new CWR | 2 | path controller, 2 clocks |
| interconnect | 1 (registered) | not given |
| `keccak512` start → done | 24 | KECCAK 24 clocks |
| `rsa_modexp` start → done | 3 × 1024 = 3072 | RSA 3048 clocks, rounds 1..1024 |
| signature check (start → done) | 3073 | — |
| MKM read | 2 | partition memory, 2 clocks |
| read-out: strobe → internal read → `buff_op`/`buff_done` | 1 + 1 | drawn as buff_rd then buff_done |

## Where this design departs from or adds to the paper

- **CBI enable bit.** The paper's text puts the interconnect enable in "the 11th bit". The same
  text gives bits 12 to 9 to the output address. All custom-bus instruction codes in its table
  set bit 6, and its control-word figure labels that bit "Bus Sel". Bit 6 is used here.
- **Erase rule.** The paper says the MKM deletes keys that are read, and also that every key
  except the pre-master key should be destroyed. Here the pre-master key is kept and everything
  else is erased on read.
- **RSA.** A single combinational 1024 × 1024 modular multiplier is used three times per exponent
  bit. Every bit gets a multiply, so the latency is fixed. This is the simplest circuit that does
  the job. It does not model FPGA timing, and the latency is 3072 clocks, not the paper's 3048.
- **SHA3.** One 64-byte block with FIPS 202 padding is hashed. Only the low 512 bits of the data
  field are hashed and signed. The paper checks the data together with the timestamp, system
  status and pre-hash. Here the header goes into the audit record but is not covered by the
  signature, because the header and data together would need a multi-block SHA3. This is the
  largest gap in the protection this RTL gives.
- **Derived keys.** In the paper the hash core turns the master secret into "four keys". Here it
  produces one 512-bit value, which could be cut into four 128-bit keys. It is stored whole, as one
  copy for Hash and one for AES.
- **Chaining.** The pre-hash is the SHA3-512 of the previous block's data. It is updated after
  every check, refused ones included. The paper says only that the pre-hash comes from the
  signature checker.
- **Public keys in the block.** The paper has the buffer store the public keys of the source
  and destination. Here the header stores their addresses instead. The checker picks the
  requestee's public key by address, which verifies the same signature without carrying
  2 × 1024 key bits in every block. The MKM has no key pair of its own here.
- **Keys.** The public keys enter as ports `pub_n`/`pub_e`, indexed RNG, Hash, AES, RSA (keys
  made offline). The paper does not say which key signs. Here the processor loads the
  requestee's private exponent into the RSA block, over the same re-key path that TLS uses to
  load the server's public key. Where that exponent is kept is outside this
  design.
- **Own choices.** The register map, the status word layout, the audit record format, the
  result replay, the signature-pending flag and erasing a key from the buffer after delivery are
  all this design's.
- **Not built.** The RNG, the AES core, the DMA, the shared memory and the processor are not
  built. The hash core does not take the processor's DMA data (instruction 6 is reduced to a
  randoms port).

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb/tb_vec_pkg.sv` holds the reference values:

- four RSA-1024 key pairs, one per IP, with n = p·q for random 512-bit primes, e = 65537 and
  d = e⁻¹ mod (p−1)(q−1);
- SHA3-512 digests from an independent implementation;
- the fixed RNG number R, the randoms S and the master key M = SHA3-512(R ⊕ S).

To build and run one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bc_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/bc_pkg.sv tb/tb_vec_pkg.sv tb/tb_bc_top.sv
./obj_dir/Vtb_bc_top
```

`tb_bc_top` runs the whole design at its default size in a few seconds. It plays the processor
(AXI writes and status polling), the RNG and the AES key port through one session:

- the pre-master key is written;
- Hash reads it and writes the master key;
- AES reads its copy;
- a forged AES request is refused;
- a repeated AES request finds its copy erased;
- Hash reads its copy.

It checks every audit record against the reference digests and the chain. It also counts each
interconnect path, grant, refusal, MKM write, read and erase, and each result replay, and fails
if one never happened.

## Changing it

- `DATA_W` on `bc_top` sets both the interconnect width and the RSA width. It must stay above
  512.
- `rsa_modexp` and `keccak512` can be swapped for pipelined or Montgomery versions with the same
  start/done interface.
- The instruction decode lives in `buffer` (the `act_*` terms) and in `bc_pkg`.
