8000
802c
8059
8085
80b2
80df
810b
8138
8165
8192
81bf
81ec
8219
8246
8273
82a0
82ce
82fb
8328
8356
8383
83b1
83df
840c
843a
8468
8496
84c4
84f2
8520
854e
857c
85ab
85d9
8608
8636
8665
8693
86c2
86f1
871f
874e
877d
87ac
87db
880a
883a
8869
8898
88c7
88f7
8926
8956
8986
89b5
89e5
8a15
8a45
8a75
8aa5
8ad5
8b05
8b35
8b65
8b96
8bc6
8bf7
8c27
8c58
8c88
8cb9
8cea
8d1b
8d4c
8d7d
8dae
8ddf
8e10
8e41
8e73
8ea4
8ed6
8f07
8f39
8f6b
8f9c
8fce
9000
9032
9064
9096
90c8
90fa
912d
915f
9191
91c4
91f6
9229
925c
928e
92c1
92f4
9327
935a
938d
93c0
93f4
9427
945a
948e
94c1
94f5
9529
955c
9590
95c4
95f8
962c
9660
9694
96c8
96fd
9731
9765
979a
97cf
9803
9838
986d
98a2
98d7
990c
9941
9976
99ab
99e0
9a16
9a4b
9a81
9ab6
9aec
9b22
9b57
9b8d
9bc3
9bf9
9c2f
9c65
9c9c
9cd2
9d08
9d3f
9d75
9dac
9de3
9e19
9e50
9e87
9ebe
9ef5
9f2c
9f64
9f9b
9fd2
a00a
a041
a079
a0b0
a0e8
a120
a158
a190
a1c8
a200
a238
a270
a2a9
a2e1
a319
a352
a38b
a3c3
a3fc
a435
a46e
a4a7
a4e0
a519
a553
a58c
a5c5
a5ff
a638
a672
a6ac
a6e6
a71f
a759
a793
a7ce
a808
a842
a87c
a8b7
a8f1
a92c
a967
a9a1
a9dc
aa17
aa52
aa8d
aac8
ab04
ab3f
ab7a
abb6
abf1
ac2d
ac69
aca4
ace0
ad1c
ad58
ad94
add1
ae0d
ae49
ae86
aec2
aeff
af3b
af78
afb5
aff2
b02f
b06c
b0a9
b0e7
b124
b161
b19f
b1dd
b21a
b258
b296
b2d4
b312
b350
b38e
b3cc
b40b
b449
b488
b4c6
b505
b544
b583
b5c2
b601
b640
b67f
b6be
b6fe
b73d
b77d
b7bc
b7fc
b83c
b87c
b8bc
b8fc
b93c
b97c
b9bc
b9fd
ba3d
ba7e
babf
baff
bb40
bb81
bbc2
bc03
bc44
bc86
bcc7
bd09
bd4a
bd8c
bdce
be0f
be51
be93
bed5
bf18
bf5a
bf9c
bfdf
c021
c064
c0a7
c0e9
c12c
c16f
c1b2
c1f6
c239
c27c
c2c0
c303
c347
c38b
c3ce
c412
c456
c49a
c4df
c523
c567
c5ac
c5f0
c635
c67a
c6be
c703
c748
c78d
c7d3
c818
c85d
c8a3
c8e8
c92e
c974
c9ba
ca00
ca46
ca8c
cad2
cb18
cb5f
cba5
cbec
cc33
cc7a
ccc1
cd08
cd4f
cd96
cddd
ce25
ce6c
ceb4
cefb
cf43
cf8b
cfd3
d01b
d063
d0ab
d0f4
d13c
d185
d1ce
d216
d25f
d2a8
d2f1
d33a
d384
d3cd
d416
d460
d4aa
d4f3
d53d
d587
d5d1
d61b
d666
d6b0
d6fa
d745
d790
d7da
d825
d870
d8bb
d906
d952
d99d
d9e9
da34
da80
dacc
db17
db63
dbb0
dbfc
dc48
dc94
dce1
dd2e
dd7a
ddc7
de14
de61
deae
defb
df49
df96
dfe4
e031
e07f
e0cd
e11b
e169
e1b7
e205
e254
e2a2
e2f1
e340
e38e
e3dd
e42c
e47b
e4cb
e51a
e569
e5b9
e609
e658
e6a8
e6f8
e748
e799
e7e9
e839
e88a
e8db
e92b
e97c
e9cd
ea1e
ea6f
eac1
eb12
eb64
ebb5
ec07
ec59
ecab
ecfd
ed4f
eda1
edf4
ee46
ee99
eeec
ef3f
ef92
efe5
f038
f08b
f0df
f132
f186
f1da
f22d
f281
f2d6
f32a
f37e
f3d3
f427
f47c
f4d1
f525
f57b
f5d0
f625
f67a
f6d0
f725
f77b
f7d1
f827
f87d
f8d3
f929
f980
f9d6
fa2d
fa84
fadb
fb32
fb89
fbe0
fc37
fc8f
fce6
fd3e
fd96
fdee
fe46
fe9e
fef6
ff4f
ffa7
