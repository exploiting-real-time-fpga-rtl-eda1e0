a5c30000
a4c20101
a7c10202
a6c00303
a1c70404
a0c60505
a3c50606
a2c40707
adcb0808
acca0909
afc90a0a
aec80b0b
a9cf0c0c
a8ce0d0d
abcd0e0e
aacc0f0f
