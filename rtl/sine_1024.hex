0000
0065
00c9
012e
0192
01f7
025b
02c0
0324
0388
03ed
0451
04b5
051a
057e
05e2
0646
06aa
070e
0772
07d6
0839
089d
0901
0964
09c7
0a2b
0a8e
0af1
0b54
0bb7
0c1a
0c7c
0cdf
0d41
0da4
0e06
0e68
0eca
0f2b
0f8d
0fee
1050
10b1
1112
1173
11d3
1234
1294
12f4
1354
13b4
1413
1473
14d2
1531
1590
15ee
164c
16ab
1709
1766
17c4
1821
187e
18db
1937
1993
19ef
1a4b
1aa7
1b02
1b5d
1bb8
1c12
1c6c
1cc6
1d20
1d79
1dd3
1e2b
1e84
1edc
1f34
1f8c
1fe3
203a
2091
20e7
213d
2193
21e8
223d
2292
22e7
233b
238e
23e2
2435
2488
24da
252c
257e
25cf
2620
2671
26c1
2711
2760
27af
27fe
284c
289a
28e7
2935
2981
29ce
2a1a
2a65
2ab0
2afb
2b45
2b8f
2bd8
2c21
2c6a
2cb2
2cfa
2d41
2d88
2dcf
2e15
2e5a
2e9f
2ee4
2f28
2f6c
2faf
2ff2
3034
3076
30b8
30f9
3139
3179
31b9
31f8
3236
3274
32b2
32ef
332c
3368
33a3
33df
3419
3453
348d
34c6
34ff
3537
356e
35a5
35dc
3612
3648
367d
36b1
36e5
3718
374b
377e
37b0
37e1
3812
3842
3871
38a1
38cf
38fd
392b
3958
3984
39b0
39db
3a06
3a30
3a59
3a82
3aab
3ad3
3afa
3b21
3b47
3b6d
3b92
3bb6
3bda
3bfd
3c20
3c42
3c64
3c85
3ca5
3cc5
3ce4
3d03
3d21
3d3f
3d5b
3d78
3d93
3daf
3dc9
3de3
3dfc
3e15
3e2d
3e45
3e5c
3e72
3e88
3e9d
3eb1
3ec5
3ed8
3eeb
3efd
3f0f
3f20
3f30
3f40
3f4f
3f5d
3f6b
3f78
3f85
3f91
3f9c
3fa7
3fb1
3fbb
3fc4
3fcc
3fd4
3fdb
3fe1
3fe7
3fec
3ff1
3ff5
3ff8
3ffb
3ffd
3fff
3fff
3fff
3fff
3fff
3ffd
3ffb
3ff8
3ff5
3ff1
3fec
3fe7
3fe1
3fdb
3fd4
3fcc
3fc4
3fbb
3fb1
3fa7
3f9c
3f91
3f85
3f78
3f6b
3f5d
3f4f
3f40
3f30
3f20
3f0f
3efd
3eeb
3ed8
3ec5
3eb1
3e9d
3e88
3e72
3e5c
3e45
3e2d
3e15
3dfc
3de3
3dc9
3daf
3d93
3d78
3d5b
3d3f
3d21
3d03
3ce4
3cc5
3ca5
3c85
3c64
3c42
3c20
3bfd
3bda
3bb6
3b92
3b6d
3b47
3b21
3afa
3ad3
3aab
3a82
3a59
3a30
3a06
39db
39b0
3984
3958
392b
38fd
38cf
38a1
3871
3842
3812
37e1
37b0
377e
374b
3718
36e5
36b1
367d
3648
3612
35dc
35a5
356e
3537
34ff
34c6
348d
3453
3419
33df
33a3
3368
332c
32ef
32b2
3274
3236
31f8
31b9
3179
3139
30f9
30b8
3076
3034
2ff2
2faf
2f6c
2f28
2ee4
2e9f
2e5a
2e15
2dcf
2d88
2d41
2cfa
2cb2
2c6a
2c21
2bd8
2b8f
2b45
2afb
2ab0
2a65
2a1a
29ce
2981
2935
28e7
289a
284c
27fe
27af
2760
2711
26c1
2671
2620
25cf
257e
252c
24da
2488
2435
23e2
238e
233b
22e7
2292
223d
21e8
2193
213d
20e7
2091
203a
1fe3
1f8c
1f34
1edc
1e84
1e2b
1dd3
1d79
1d20
1cc6
1c6c
1c12
1bb8
1b5d
1b02
1aa7
1a4b
19ef
1993
1937
18db
187e
1821
17c4
1766
1709
16ab
164c
15ee
1590
1531
14d2
1473
1413
13b4
1354
12f4
1294
1234
11d3
1173
1112
10b1
1050
0fee
0f8d
0f2b
0eca
0e68
0e06
0da4
0d41
0cdf
0c7c
0c1a
0bb7
0b54
0af1
0a8e
0a2b
09c7
0964
0901
089d
0839
07d6
0772
070e
06aa
0646
05e2
057e
051a
04b5
0451
03ed
0388
0324
02c0
025b
01f7
0192
012e
00c9
0065
0000
ff9b
ff37
fed2
fe6e
fe09
fda5
fd40
fcdc
fc78
fc13
fbaf
fb4b
fae6
fa82
fa1e
f9ba
f956
f8f2
f88e
f82a
f7c7
f763
f6ff
f69c
f639
f5d5
f572
f50f
f4ac
f449
f3e6
f384
f321
f2bf
f25c
f1fa
f198
f136
f0d5
f073
f012
efb0
ef4f
eeee
ee8d
ee2d
edcc
ed6c
ed0c
ecac
ec4c
ebed
eb8d
eb2e
eacf
ea70
ea12
e9b4
e955
e8f7
e89a
e83c
e7df
e782
e725
e6c9
e66d
e611
e5b5
e559
e4fe
e4a3
e448
e3ee
e394
e33a
e2e0
e287
e22d
e1d5
e17c
e124
e0cc
e074
e01d
dfc6
df6f
df19
dec3
de6d
de18
ddc3
dd6e
dd19
dcc5
dc72
dc1e
dbcb
db78
db26
dad4
da82
da31
d9e0
d98f
d93f
d8ef
d8a0
d851
d802
d7b4
d766
d719
d6cb
d67f
d632
d5e6
d59b
d550
d505
d4bb
d471
d428
d3df
d396
d34e
d306
d2bf
d278
d231
d1eb
d1a6
d161
d11c
d0d8
d094
d051
d00e
cfcc
cf8a
cf48
cf07
cec7
ce87
ce47
ce08
cdca
cd8c
cd4e
cd11
ccd4
cc98
cc5d
cc21
cbe7
cbad
cb73
cb3a
cb01
cac9
ca92
ca5b
ca24
c9ee
c9b8
c983
c94f
c91b
c8e8
c8b5
c882
c850
c81f
c7ee
c7be
c78f
c75f
c731
c703
c6d5
c6a8
c67c
c650
c625
c5fa
c5d0
c5a7
c57e
c555
c52d
c506
c4df
c4b9
c493
c46e
c44a
c426
c403
c3e0
c3be
c39c
c37b
c35b
c33b
c31c
c2fd
c2df
c2c1
c2a5
c288
c26d
c251
c237
c21d
c204
c1eb
c1d3
c1bb
c1a4
c18e
c178
c163
c14f
c13b
c128
c115
c103
c0f1
c0e0
c0d0
c0c0
c0b1
c0a3
c095
c088
c07b
c06f
c064
c059
c04f
c045
c03c
c034
c02c
c025
c01f
c019
c014
c00f
c00b
c008
c005
c003
c001
c000
c000
c000
c001
c003
c005
c008
c00b
c00f
c014
c019
c01f
c025
c02c
c034
c03c
c045
c04f
c059
c064
c06f
c07b
c088
c095
c0a3
c0b1
c0c0
c0d0
c0e0
c0f1
c103
c115
c128
c13b
c14f
c163
c178
c18e
c1a4
c1bb
c1d3
c1eb
c204
c21d
c237
c251
c26d
c288
c2a5
c2c1
c2df
c2fd
c31c
c33b
c35b
c37b
c39c
c3be
c3e0
c403
c426
c44a
c46e
c493
c4b9
c4df
c506
c52d
c555
c57e
c5a7
c5d0
c5fa
c625
c650
c67c
c6a8
c6d5
c703
c731
c75f
c78f
c7be
c7ee
c81f
c850
c882
c8b5
c8e8
c91b
c94f
c983
c9b8
c9ee
ca24
ca5b
ca92
cac9
cb01
cb3a
cb73
cbad
cbe7
cc21
cc5d
cc98
ccd4
cd11
cd4e
cd8c
cdca
ce08
ce47
ce87
cec7
cf07
cf48
cf8a
cfcc
d00e
d051
d094
d0d8
d11c
d161
d1a6
d1eb
d231
d278
d2bf
d306
d34e
d396
d3df
d428
d471
d4bb
d505
d550
d59b
d5e6
d632
d67f
d6cb
d719
d766
d7b4
d802
d851
d8a0
d8ef
d93f
d98f
d9e0
da31
da82
dad4
db26
db78
dbcb
dc1e
dc72
dcc5
dd19
dd6e
ddc3
de18
de6d
dec3
df19
df6f
dfc6
e01d
e074
e0cc
e124
e17c
e1d5
e22d
e287
e2e0
e33a
e394
e3ee
e448
e4a3
e4fe
e559
e5b5
e611
e66d
e6c9
e725
e782
e7df
e83c
e89a
e8f7
e955
e9b4
ea12
ea70
eacf
eb2e
eb8d
ebed
ec4c
ecac
ed0c
ed6c
edcc
ee2d
ee8d
eeee
ef4f
efb0
f012
f073
f0d5
f136
f198
f1fa
f25c
f2bf
f321
f384
f3e6
f449
f4ac
f50f
f572
f5d5
f639
f69c
f6ff
f763
f7c7
f82a
f88e
f8f2
f956
f9ba
fa1e
fa82
fae6
fb4b
fbaf
fc13
fc78
fcdc
fd40
fda5
fe09
fe6e
fed2
ff37
ff9b
