1639
f839
e727
eb14
f812
fc1f
f02d
d82f
c120
b505
b7e5
cbc6
f3b6
22c2
40ef
3527
0646
d238
be0b
d3e8
f4ea
fa05
e011
c6f8
d1cd
02bd
2edf
2a18
f833
c718
c7e0
f7c4
29e0
2b1a
fd3c
c829
bbf9
d7d9
f9e1
fbfd
df04
cbe8
dcbf
0fb3
3fd4
4710
2440
ed4c
c136
ad10
afec
bfd2
d7c4
f0c5
02d2
04e6
f7f1
e8ea
e5d8
f4c8
0bc8
1bd8
1cec
10f9
02f8
fcf0
fee6
06e1
0fe1
18e5
21ee
27fc
2510
1523
fa2a
de1d
d101
dbe6
f2db
05e4
06f3
faf6
f5ea
04dd
1ce5
2503
0f1e
e81c
d4fa
e7d5
12d1
2cf6
1922
e72c
c208
c9d5
f4bf
17d3
17f5
fcfd
ede5
03ca
2ed0
46ff
2e34
f447
bc2b
a6f3
b7bf
dda1
079b
2ba8
43c3
47e4
36fb
1ff9
19e3
30d0
57db
6e05
5f36
354d
1040
0824
1918
2b27
2844
0d5b
e75f
c34f
a82d
a1fe
b9cd
eeb4
28c7
43fe
2d34
fa42
d725
dd01
fbfc
0618
e92f
c01c
b9e8
e4c1
1ed1
3009
0a36
d22a
c1f4
e8cb
20d8
320f
0e3b
da37
c30e
d7ee
f3f2
f20b
d50f
bfed
d3bf
0baf
41d2
4d12
2947
f056
c140
aa1b
aaf5
b9d8
d2c8
edc9
feda
fbed
e9f2
dbe2
e2c9
fdbc
19c6
25e0
1cf5
0cfa
04f2
08e9
12e9
1af1
1cfb
1a05
140d
0b13
0014
f710
f209
f103
f1fe
f2f9
f6f5
fdf4
02fa
ff01
f602
f1f8
f9ef
07f1
0c02
ff10
ea0c
e3f5
f5e2
11e9
1a08
0323
de20
cc00
dae2
f6e1
fff7
eb04
d3f0
dac8
09b3
3ecd
4f0d
2c49
e95c
ad41
910d
94da
acb4
cf9f
f59e
11b4
13d3
fae2
dfce
e1a2
0c81
488a
6cba
62ef
3d04
22f3
28d7
4acf
6be6
7811
6d3e
4e64
1b7a
dc74
a645
98fa
c1b8
0aa7
41ce
4406
2120
050f
11f6
32ff
392d
0e53
cf44
b404
d9c8
1ec6
44fe
2839
e73e
c10b
d8cf
14c1
3fe8
3a1b
1530
f921
fb0c
0b0d
0a23
ed2e
cc19
c7ec
e6c7
17c3
3be0
4309
3329
1a38
0139
ee2f
e31e
e70c
f504
030c
031f
f02c
d825
cc0f
d3f8
e5f0
f2f7
f103
e606
dcfe
dbef
e2e1
f1d8
04d6
17e0
24f5
2010
0a23
ee22
db0f
dbf6
ebe7
fce9
03f3
fffa
fbf9
fef5
04f6
07ff
0107
f706
f2fc
f7f3
02f3
08fd
0307
f80a
ee02
f0f6
f9f0
02f4
04fe
fc03
f4ff
f3f5
fcee
08f0
0efa
0c07
010d
f60c
ef05
edfc
f0f5
f4f1
faef
ffef
03f3
04f7
01fa
fff8
fff4
04f3
09f5
0bfb
0900
0401
02ff
03fd
05fd
05ff
0501
0501
0603
0607
030c
fc0f
f40c
ef05
effd
f4f7
f9f4
fff5
02f8
05fb
0500
0304
fd06
f804
f6ff
f8fa
fdf8
01fa
02ff
ff03
fa04
f601
f6fb
f9f7
fff7
03fb
0101
fb03
f5fe
f6f6
fdf1
06f3
0bfc
0806
000b
f709
f102
f1fb
f3f6
f7f2
fcf0
01f1
04f4
04f8
02f9
01f7
03f5
08f5
0cf9
0bff
0702
0402
04ff
06ff
0701
0704
0506
0306
0307
0209
fe0c
f80c
f308
f102
f2fc
f6f8
faf6
fff6
03f8
06fd
0603
0108
fa08
f502
f5fc
faf8
00f9
02fe
0102
fc04
f802
f6fe
f8f9
fdf7
01f9
03fe
ff03
f903
f5fd
f7f6
fef2
07f6
0afe
0606
fe09
f706
f301
f3fb
f5f7
f8f3
fdf2
01f2
04f5
04f9
03f9
03f8
06f7
0af9
0cfd
0902
0603
0301
0500
0701
0705
0508
0208
0007
0007
ff09
fc0b
f70a
f306
f101
f3fc
f6f9
faf6
fff6
04f8
07fe
0606
ff0a
f707
f401
f6fa
fcf8
02fb
0200
ff04
fa04
f700
f7fb
faf8
fff8
02fc
0201
fd03
f802
f6fc
f9f5
01f4
07f8
0800
0407
fc08
f705
f400
f4fb
f6f7
f9f4
fdf2
02f3
05f6
05f9
04fa
05f9
07fa
0afc
0a01
0704
0403
0301
0601
0804
0608
030a
ff09
fe07
ff07
fe09
fb0b
f60a
f206
f101
f2fc
f5f9
f9f6
fff5
05f8
08ff
0507
fd0a
f607
f3ff
f7f9
fef8
03fd
0203
fc06
f704
f5fe
f7f9
fdf7
02fa
03ff
0004
fa04
f6ff
f7f9
fdf5
04f7
08fd
0603
0107
fb07
f705
f501
f3fd
f4f7
f8f2
fef0
05f2
09f7
09fc
07fe
06fe
07ff
0802
0604
0305
0203
0302
0603
0607
030b
fe0c
fc09
fc07
fd07
fd09
fa0b
f50a
f207
f002
f0fe
f2f9
f6f6
fdf4
04f6
08fd
0706
000b
f70a
f302
f7fb
fffa
0501
020a
f70e
ec06
ebf8
f6ee
06f1
0dff
060d
f60f
ec02
f1f2
01ed
0ff8
0f08
0411
f90f
f808
fb09
f810
ea13
da05
d8eb
edd3
0fd1
2be7
3208
2524
0f32
f834
e52d
d820
d40e
dc00
eaff
f00c
e41b
ca18
b8ff
bdde
d9cb
f6d4
feec
effd
d8f9
cce2
d2c7
e8b2
08a9
2eb1
4fd1
5806
3b3c
ff51
c336
affb
cbcb
f8c4
0ede
02f3
eee8
f8cb
21c4
43ea
3623
fc3b
c717
c9d7
00b7
37d7
3818
ff3b
c21e
b7db
e5ae
1eba
2fe7
1404
f5f5
fcd2
27c9
4bef
412b
084d
c63b
a201
acc2
d498
068b
3395
56b1
65d9
5aff
3d10
2504
29eb
47e4
67fe
692e
4853
1a57
fd3d
ff21
1218
2025
1c3b
084a
ee4d
d243
bb2a
b304
c4dc
edc7
19d2
2ff8
221d
0327
ee17
f302
0500
0d12
fc24
e11e
d402
e3e6
01e1
15f4
120d
fe17
ec0c
ebfa
f8ef
06f2
0cfc
0905
0308
ff07
fd06
fa05
f802
f8ff
f9fc
fbfb
fbfb
faf9
f9f5
fbf0
00ea
08e8
12e9
1bef
1efa
1b03
1305
0eff
14f6
23f6
3004
311a
212a
0d2b
011f
0412
0f10
181a
1629
0a36
f83c
e239
cc29
bf0c
c7e7
e7cd
13cf
30ef
2c16
0f29
f61d
f806
0f02
1d1d
083d
d83e
b713
c6d9
ffc2
34e3
3720
0544
cc2c
c1ee
efc2
2fcd
4a04
3236
043e
ed23
fa0d
1019
0739
da46
aa22
a4dc
d5a2
2398
62c2
7903
6b3d
4963
2074
f673
d55c
cb39
dd1f
fb23
0545
e968
b36a
8842
8708
ace5
d5ea
e209
ce21
ac1d
94ff
92d7
a5b0
cb92
0289
3da3
60e1
522b
1657
d04c
ae17
bee4
e7d8
fdee
f004
d7fb
d6db
f7c6
1ed7
2702
0a21
e319
d7f6
eedc
0ee3
1801
0418
e913
e0fc
edeb
ffed
04fb
fa03
f0fd
f2f1
feec
07f3
07fd
0001
fbfd
fcf6
03f2
0bf3
12f9
1602
140c
0d13
0511
040a
0e08
1913
1829
053a
e939
d826
db11
eb0b
f616
ef28
da2f
c126
b00f
abf1
b7cf
d7b3
07ae
37cb
4803
2d3a
f54b
c72f
c301
e0ea
fbf9
f316
d118
baf4
d0c7
06bd
30e5
271e
f437
c619
c7e3
f6c8
26e1
2c17
063a
d731
c70b
daf0
f3f6
f20d
d614
bdf8
c6ca
f5af
2ebf
4ef3
432d
1a51
eb56
c744
b329
ae0c
b5f2
c9e2
e1e3
edf5
e30a
c90e
b2f8
b2d4
cdba
f0bc
03d4
fded
e6f4
d4e5
d3cc
e3b5
feaa
1eac
3fbf
55e6
511b
2946
ec4d
bb29
b3f0
d3c9
fcca
0ce4
fef5
edea
f7d1
19cd
34ee
281b
fa2c
d20f
d5de
00c8
28e3
2613
fc2c
cf15
c9e6
eac8
10d1
1af0
0801
f5f7
fbe1
16de
29f6
2018
fe27
dd18
d1f6
ddd8
f6ca
10cc
23d8
2deb
2bff
1f0c
120b
1001
1cfd
2b0a
2b24
